// ref_track: reference tracking of one measured channel.
//
// Drift in the LO/clock distribution turns the phase of every channel by
// the same amount, and the reference input (AC6) sees that drift too. The
// block removes it by the complex product
//   out = meas * conj(ref) * (1/A_ref)
//       = (Im*Ir + Qm*Qr) / A_ref  +  j (Qm*Ir - Im*Qr) / A_ref
// where meas = Im + jQm and ref = Ir + jQr are filtered vectors of the same
// sample instant and 1/A_ref is the averaged reference amplitude's
// reciprocal, delivered as recip = 2^RECIP_FRAC / A_ref. The result keeps
// the measured amplitude and carries the phase phi_mea - phi_ref.
// With en = 0 the tracking is bypassed and out is meas, delayed by the same
// latency, so that channels can be compared with and without tracking.
// Interface: meas, ref and recip -> out (rounded, saturated IQ_W bits).
// Timing: three register stages (latency 3): meas, ref_iq, recip and en
// sampled together at edge k give the out present after edge k+2.
// The phase subtraction by complex multiplication follows the design
// description (eqs. 3.2, 3.3); the pipeline, rounding and bypass switch are
// this design's own.
module ref_track
  import llrf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  iq_t                meas,
  input  iq_t                ref_iq,
  input  logic [RECIP_W-1:0] recip,
  output iq_t                out
);
  localparam int PW = 2 * IQ_W + 1;           // cross-product sum width
  localparam int MW = PW + RECIP_W + 1;       // after scaling by recip
  localparam logic signed [MW-1:0] HALF = MW'(1) <<< (RECIP_FRAC - 1);

  logic signed [PW-1:0] re1, im1;
  logic signed [MW-1:0] re2, im2;
  iq_t                  m1, m2;
  logic [RECIP_W-1:0]   recip1;
  logic                 en1, en2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      re1 <= '0; im1 <= '0; re2 <= '0; im2 <= '0;
      m1  <= '0; m2  <= '0; en1 <= 1'b0; en2 <= 1'b0;
      recip1 <= '0;
      out <= '0;
    end else begin
      // stage 1: meas * conj(ref)
      re1 <= PW'(meas.i * ref_iq.i) + PW'(meas.q * ref_iq.q);
      im1 <= PW'(meas.q * ref_iq.i) - PW'(meas.i * ref_iq.q);
      m1  <= meas;
      en1 <= en;
      recip1 <= recip;
      // stage 2: times 2^RECIP_FRAC / A_ref
      re2 <= MW'(re1) * $signed({1'b0, recip1});
      im2 <= MW'(im1) * $signed({1'b0, recip1});
      m2  <= m1;
      en2 <= en1;
      // stage 3: remove 2^RECIP_FRAC, round and saturate, or bypass
      if (en2) begin
        out.i <= sat_iq(64'((re2 + HALF) >>> RECIP_FRAC));
        out.q <= sat_iq(64'((im2 + HALF) >>> RECIP_FRAC));
      end else begin
        out <= m2;
      end
    end
  end
endmodule
