// tb_dac_path: writes an I/Q record over the system-clock port, then plays
// it with a counted address on the ADC clock, twice, and checks each DAC
// word with its 2-cycle latency, dac_valid, and zero output between plays.
module tb_dac_path;
  import llrf_pkg::*;
  localparam int DEPTH = 128, AW = 7;
  logic clk_sys = 1'b0, clk_adc = 1'b0, rst_adc_n = 1'b0;
  logic we = 1'b0, active = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [2*DAC_W-1:0] wdata = '0;
  logic signed [DAC_W-1:0] dac_i, dac_q;
  logic dac_valid;
  logic [2*DAC_W-1:0] rec [DEPTH];
  int checks = 0, failures = 0;

  dac_path #(.DEPTH(DEPTH)) dut (
    .clk_sys (clk_sys), .we (we), .waddr (waddr), .wdata (wdata),
    .clk_adc (clk_adc), .rst_adc_n (rst_adc_n), .active (active), .raddr (raddr),
    .dac_i (dac_i), .dac_q (dac_q), .dac_valid (dac_valid)
  );

  always #4.0  clk_sys = ~clk_sys;
  always #4.26 clk_adc = ~clk_adc;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) rec[a] = $urandom;
    repeat (3) @(posedge clk_adc);
    rst_adc_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk_sys);
      we = 1'b1; waddr = AW'(a); wdata = rec[a];
    end
    @(negedge clk_sys);
    we = 1'b0;
    for (int p = 0; p < 2; p++) begin
      repeat (5) @(negedge clk_adc);
      for (int n = 0; n < DEPTH + 4; n++) begin
        @(negedge clk_adc);
        active = (n < DEPTH);
        raddr  = AW'(n);
        // the word addressed two edges ago is on the outputs now
        checks++;
        if (n >= 2 && n - 2 < DEPTH) begin
          if (!dac_valid || {dac_i, dac_q} !== rec[n-2]) begin
            failures++;
            $display("FAIL: play %0d word %0d: %h expected %h", p, n - 2, {dac_i, dac_q}, rec[n-2]);
          end
        end else if (dac_valid || dac_i != 0 || dac_q != 0) begin
          failures++;
          $display("FAIL: output not idle at n=%0d", n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
