// iq_demod: sliding-window non-IQ demodulation of one IF channel.
//
// The 27.08 MHz IF is sampled at 117.36 MHz (ratio 3:13), so sample l has
// IF phase l*dphi with dphi = 6*pi/13. Every clock the demodulator outputs
//   I_k = 2/n * sum_{l=k-n+1..k} x_l * sin(l*dphi)
//   Q_k = 2/n * sum_{l=k-n+1..k} x_l * cos(l*dphi),   n = 13,
// i.e. one new I/Q pair per sample, each from the last 13 samples (three
// IF periods). For an input A*cos(l*dphi + theta) this gives
// I = -A*sin(theta), Q = A*cos(theta), so sqrt(I^2+Q^2) = A.
// How: a phase index l mod 13 addresses the coefficient ROM (2/n folded
// into sin_coef/cos_coef of llrf_pkg); the products go into a 13-deep delay
// line and a running sum adds the newest product and subtracts the one
// that leaves the window. Reset clears the sum and the delay line, so the
// running sum is exact; out_valid rises once the window has filled.
// Interface: x, one ADC sample per clock -> iq (IQ_W bits each, rounded and
// saturated). Timing: three register stages (latency 3): sample x_k, taken
// at rising edge k, is part of the iq present after edge k+2; out_valid is
// high from the first output whose window holds 13 samples taken after
// reset.
// The equations, n = 13 and the 3:13 ratio follow the design description;
// the pipeline, the running-sum structure and the widths are this design's.
module iq_demod
  import llrf_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  adc_t x,
  output iq_t  iq,
  output logic out_valid
);
  localparam int PW = ADC_W + COEF_W;          // product width
  localparam int SW = PW + $clog2(DEMOD_N) + 1; // running-sum width

  logic [$clog2(DEMOD_N)-1:0] idx;
  logic signed [PW-1:0] p_i, p_q;
  logic signed [PW-1:0] dl_i [DEMOD_N];
  logic signed [PW-1:0] dl_q [DEMOD_N];
  logic signed [SW-1:0] acc_i, acc_q;
  logic [$clog2(DEMOD_N+3):0] fill;

  // Round to nearest: add half an LSB before the arithmetic shift.
  localparam logic signed [SW-1:0] HALF = SW'(1) <<< (COEF_FRAC - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx   <= '0;
      p_i   <= '0;
      p_q   <= '0;
      acc_i <= '0;
      acc_q <= '0;
      fill  <= '0;
      iq    <= '0;
      out_valid <= 1'b0;
      for (int k = 0; k < DEMOD_N; k++) begin
        dl_i[k] <= '0;
        dl_q[k] <= '0;
      end
    end else begin
      // stage 1: multiply by the ROM coefficients of this phase index
      idx <= (idx == $bits(idx)'(DEMOD_N - 1)) ? '0 : idx + 1'b1;
      p_i <= PW'(x * sin_coef(32'(idx)));
      p_q <= PW'(x * cos_coef(32'(idx)));
      // stage 2: running window sum over the last DEMOD_N products
      dl_i[0] <= p_i;
      dl_q[0] <= p_q;
      for (int k = 1; k < DEMOD_N; k++) begin
        dl_i[k] <= dl_i[k-1];
        dl_q[k] <= dl_q[k-1];
      end
      acc_i <= acc_i + SW'(p_i) - SW'(dl_i[DEMOD_N-1]);
      acc_q <= acc_q + SW'(p_q) - SW'(dl_q[DEMOD_N-1]);
      // stage 3: scale back to sample units
      iq.i <= sat_iq(64'(SW'(acc_i + HALF) >>> COEF_FRAC));
      iq.q <= sat_iq(64'(SW'(acc_q + HALF) >>> COEF_FRAC));
      if (fill != $bits(fill)'(DEMOD_N + 3)) fill <= fill + 1'b1;
      out_valid <= (fill >= $bits(fill)'(DEMOD_N + 1));
    end
  end

  initial assert (DEMOD_N == 13 && DEMOD_M == 3)
    else $error("iq_demod: coefficient ROM is tabulated for n = 13, M = 3");
endmodule
