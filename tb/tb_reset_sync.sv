// tb_reset_sync: checks that reset asserts at once (without a clock edge)
// and is released on exactly the STAGES-th rising clock edge after the
// asynchronous reset input rises, over several reset pulses of random
// length and phase.
module tb_reset_sync;
  localparam int STAGES = 2;
  logic clk = 1'b0, arst_n = 1'b0, rst_n;
  int checks = 0, failures = 0;

  reset_sync #(.STAGES(STAGES)) dut (.clk (clk), .arst_n (arst_n), .rst_n (rst_n));

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    for (int r = 0; r < 20; r++) begin
      // release in the middle of a clock period
      #($urandom_range(1, 4));
      arst_n = 1'b1;
      for (int e = 1; e <= STAGES + 2; e++) begin
        @(posedge clk); #1;
        checks++;
        if (rst_n !== (e >= STAGES)) begin
          failures++;
          $display("FAIL: edge %0d after release: rst_n=%0b", e, rst_n);
        end
      end
      repeat ($urandom_range(0, 5)) @(posedge clk);
      // assert between edges: must take effect immediately
      #($urandom_range(1, 3));
      arst_n = 1'b0;
      #0.1;
      checks++;
      if (rst_n !== 1'b0) begin
        failures++;
        $display("FAIL: reset not asserted asynchronously");
      end
      repeat ($urandom_range(1, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
