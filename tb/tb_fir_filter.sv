// tb_fir_filter: feeds random samples with random gaps in in_valid and
// compares each output with a 13-sample moving average computed in the
// testbench: round(5041 * sum(last 13 inputs) / 2^16), saturated. Also
// checks the 2-cycle latency and saturation at full-scale input.
module tb_fir_filter;
  localparam int W = 18;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W-1:0] din = '0, dout;
  logic out_valid;
  int checks = 0, failures = 0;
  longint hist [$];
  longint expq [$];

  fir_filter #(.W(W)) dut (
    .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .din (din),
    .out_valid (out_valid), .dout (dout)
  );

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model();
    longint s = 0, r;
    for (int k = 0; k < 13; k++) s += (k < hist.size()) ? hist[hist.size() - 1 - k] : 0;
    r = (s * 5041 + 32768) >>> 16;
    if (r > 131071) r = 131071;
    if (r < -131072) r = -131072;
    return r;
  endfunction

  // expected outputs, one per accepted input, two cycles later
  logic v1 = 1'b0, v2 = 1'b0;
  longint e1, e2;
  always @(posedge clk) begin
    #1;
    if (rst_n && v2) begin
      checks++;
      if (!out_valid || longint'(dout) != e2) begin
        failures++;
        $display("FAIL: dout=%0d expected %0d (valid %0b)", dout, e2, out_valid);
      end
    end else if (rst_n) begin
      checks++;
      if (out_valid) begin
        failures++;
        $display("FAIL: out_valid without an input two cycles before");
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      v2 = v1; e2 = e1;
      in_valid = ($urandom_range(0, 3) != 0);
      if (n >= 1500)      din = W'(131071);             // full scale
      else if (n >= 1400) din = -W'(131072);
      else                din = W'($signed($urandom_range(0, 262143)) - 131072);
      if (in_valid) begin
        hist.push_back(longint'(din));
        e1 = model();
      end
      v1 = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
