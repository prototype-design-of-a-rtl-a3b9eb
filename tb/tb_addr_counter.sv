// tb_addr_counter: checks the address sequence 0..REC_LEN-1 after a start
// pulse, its timing (addr 0 on the edge after start, REC_LEN active
// cycles), the done pulse and record counter, and that a start arriving
// during a record is ignored.
module tb_addr_counter;
  localparam int REC_LEN = 40;
  localparam int AW = $clog2(REC_LEN);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [AW-1:0] addr;
  logic active, done;
  logic [31:0] rec_count;
  int checks = 0, failures = 0;

  addr_counter #(.REC_LEN(REC_LEN)) dut (
    .clk (clk), .rst_n (rst_n), .start (start), .addr (addr),
    .active (active), .done (done), .rec_count (rec_count)
  );

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (addr=%0d active=%0b done=%0b)", what, addr, active, done);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(!active && !done && rec_count == 0, "idle after reset");
    for (int r = 0; r < 3; r++) begin
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      for (int a = 0; a < REC_LEN; a++) begin
        check(active && addr == AW'(a) && !done, $sformatf("step %0d", a));
        // a retrigger in mid record must not restart the count
        if (a == REC_LEN / 2) start = 1'b1;
        @(posedge clk); #1;
        start = 1'b0;
      end
      check(!active && done, "end of record");
      check(rec_count == 32'(r + 1), "record counter");
      @(posedge clk); #1;
      check(!active && !done, "idle after record");
      repeat (5) @(posedge clk);
      #1;
      check(!active, "stays idle without start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
