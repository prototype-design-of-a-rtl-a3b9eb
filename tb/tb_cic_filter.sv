// tb_cic_filter: compares the decimated CIC output with a direct model.
// A 3-stage CIC with decimation R and differential delay 1 equals the
// input convolved with three R-sample boxcars, sampled every R inputs and
// divided by R^3. In this implementation the output produced when input
// number t = mR-1 (counting accepted inputs from 0) arrives is
//   y_m = floor( sum_j h[j] * x[t-3-j] / R^3 ),  h = box * box * box,
// where the delay of 3 comes from the registered integrators. The testbench
// builds h by convolution and checks every output exactly, with random
// inputs and random gaps in in_valid, and then the settled average of a
// constant input.
module tb_cic_filter;
  localparam int W = 18, STAGES = 3, R = 16;
  localparam int HL = STAGES * (R - 1) + 1;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W-1:0] din = '0, dout;
  logic out_valid;
  int checks = 0, failures = 0;
  longint h [HL];
  longint xs [$];
  int nout = 0;

  cic_filter #(.W(W), .STAGES(STAGES), .R(R)) dut (
    .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .din (din),
    .out_valid (out_valid), .dout (dout)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model(input int t);
    longint s = 0;
    for (int j = 0; j < HL; j++) begin
      automatic int u = t - 3 - j;
      if (u >= 0) s += h[j] * xs[u];
    end
    return s >>> (STAGES * $clog2(R));   // floor division by R^3
  endfunction

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      automatic int t = (nout + 1) * R - 1;
      automatic longint m = model(t);
      nout++;
      checks++;
      if (longint'(dout) != m) begin
        failures++;
        $display("FAIL: output %0d: dout=%0d model=%0d", nout - 1, dout, m);
      end
    end
  end

  initial begin
    // h = boxcar(R) convolved with itself STAGES times
    longint a [HL], b [HL];
    for (int j = 0; j < HL; j++) a[j] = (j < R) ? 1 : 0;
    for (int s = 1; s < STAGES; s++) begin
      for (int j = 0; j < HL; j++) begin
        b[j] = 0;
        for (int k = 0; k < R; k++) if (j - k >= 0) b[j] += a[j-k];
      end
      a = b;
    end
    h = a;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      if (n < 2000) din = W'($signed($urandom_range(0, 262143)) - 131072);
      else          din = -W'(12345);
      if (in_valid) xs.push_back(longint'(din));
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (dout != -W'(12345) || nout < xs.size() / R - 1) begin
      failures++;
      $display("FAIL: settled output %0d, %0d outputs", dout, nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
