// tb_iq_demod: checks the sliding non-IQ demodulation against equation
//   I_k = 2/13 sum_{l=k-12..k} x_l sin(l*6pi/13),  Q_k = same with cos,
// evaluated in floating point from the sample history, for (a) an IF tone
// of known amplitude and phase, where I = -A sin(theta), Q = A cos(theta)
// is also checked, and (b) random samples. l counts samples from the first
// clock after reset. Also checks the 3-cycle latency and out_valid.
module tb_iq_demod;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real DPHI = 6.0 * PI / 13.0;
  localparam int  NS = 1200;

  logic clk = 1'b0, rst_n = 1'b0;
  adc_t x = '0;
  iq_t  iq;
  logic out_valid;
  int checks = 0, failures = 0;
  int xs [NS];

  iq_demod dut (.clk (clk), .rst_n (rst_n), .x (x), .iq (iq), .out_valid (out_valid));

  always #4.26 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real model_i(input int k);
    real s = 0.0;
    for (int l = k - 12; l <= k; l++) s += xs[l] * $sin(l * DPHI);
    return 2.0 / 13.0 * s;
  endfunction
  function automatic real model_q(input int k);
    real s = 0.0;
    for (int l = k - 12; l <= k; l++) s += xs[l] * $cos(l * DPHI);
    return 2.0 / 13.0 * s;
  endfunction

  real amp = 30000.0, theta = 0.7;

  initial begin
    for (int n = 0; n < NS; n++) begin
      if (n < 600) xs[n] = int'($floor(amp * $cos(n * DPHI + theta) + 0.5));
      else         xs[n] = $signed(16'($urandom));
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    x = adc_t'(xs[0]);
    for (int n = 0; n < NS; n++) begin
      @(posedge clk);          // sample n is taken at this edge
      #1;
      if (n + 1 < NS) x = adc_t'(xs[n+1]);
      // output after edge n holds the window ending at sample n-2 (3 registers)
      if (n >= 15) begin
        automatic real mi = model_i(n - 2);
        automatic real mq = model_q(n - 2);
        checks++;
        if (!out_valid || fabs(real'(iq.i) - mi) > 3.0 || fabs(real'(iq.q) - mq) > 3.0) begin
          failures++;
          $display("FAIL: n=%0d iq=(%0d,%0d) model=(%0.1f,%0.1f) v=%0b", n, iq.i, iq.q, mi, mq, out_valid);
        end
        if (n >= 20 && n < 600) begin
          checks++;
          if (fabs(real'(iq.i) + amp * $sin(theta)) > 4.0 || fabs(real'(iq.q) - amp * $cos(theta)) > 4.0) begin
            failures++;
            $display("FAIL: tone n=%0d iq=(%0d,%0d)", n, iq.i, iq.q);
          end
        end
      end else if (n <= 12) begin
        checks++;
        if (out_valid) begin
          failures++;
          $display("FAIL: out_valid before the window filled (n=%0d)", n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
