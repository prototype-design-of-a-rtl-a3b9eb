// tb_ref_track: drives random measured and reference vectors and checks
//  - the exact result round((Im*Ir+Qm*Qr)*recip/2^30), round((Qm*Ir-Im*Qr)*
//    recip/2^30) with recip = floor(2^30/|ref|), computed with 64-bit
//    integers in the testbench;
//  - the physics: output amplitude = measured amplitude and output phase =
//    phase(meas) - phase(ref), within rounding (eq. 3.2/3.3);
//  - the bypass (en = 0): output = input;
//  - the 3-register latency.
module tb_ref_track;
  import llrf_pkg::*;
  localparam int NV = 3000;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  iq_t meas = '0, ref_iq = '0, out;
  logic [RECIP_W-1:0] recip = '0;
  int checks = 0, failures = 0;
  iq_t    m_hist [NV], r_hist [NV];
  longint rc_hist [NV];
  bit     en_hist [NV];

  ref_track dut (
    .clk (clk), .rst_n (rst_n), .en (en), .meas (meas), .ref_iq (ref_iq),
    .recip (recip), .out (out)
  );

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic longint rshift_round(input longint v);
    return (v + (longint'(1) << 29)) >>> 30;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NV; n++) begin
      automatic real am = 100.0 + 30000.0 * ($urandom_range(0, 1000) / 1000.0);
      automatic real pm = 6.2831853 * ($urandom_range(0, 9999) / 10000.0);
      automatic real ar = 2000.0 + 28000.0 * ($urandom_range(0, 1000) / 1000.0);
      automatic real pr = 6.2831853 * ($urandom_range(0, 9999) / 10000.0);
      automatic longint rint;
      meas.i   = IQ_W'($rtoi(am * $cos(pm)));
      meas.q   = IQ_W'($rtoi(am * $sin(pm)));
      ref_iq.i = IQ_W'($rtoi(ar * $cos(pr)));
      ref_iq.q = IQ_W'($rtoi(ar * $sin(pr)));
      rint     = longint'($floor($sqrt(real'(ref_iq.i) * ref_iq.i + real'(ref_iq.q) * ref_iq.q)));
      recip    = RECIP_W'((longint'(1) << 30) / rint);
      en       = (n % 500) >= 50;    // bypass for the first 50 of every 500
      m_hist[n] = meas; r_hist[n] = ref_iq; rc_hist[n] = longint'(recip); en_hist[n] = en;
      @(posedge clk);
      #1;
      if (n >= 2) begin
        automatic int k = n - 2;     // vector sampled two edges earlier
        automatic longint mi = longint'(m_hist[k].i), mq = longint'(m_hist[k].q);
        automatic longint ri = longint'(r_hist[k].i), rq = longint'(r_hist[k].q);
        automatic longint ei, eq;
        if (en_hist[k]) begin
          ei = rshift_round((mi * ri + mq * rq) * rc_hist[k]);
          eq = rshift_round((mq * ri - mi * rq) * rc_hist[k]);
        end else begin
          ei = mi; eq = mq;
        end
        checks++;
        if (longint'(out.i) != ei || longint'(out.q) != eq) begin
          failures++;
          $display("FAIL: k=%0d en=%0b out=(%0d,%0d) expected (%0d,%0d)", k, en_hist[k], out.i, out.q, ei, eq);
        end
        if (en_hist[k]) begin
          automatic real a_o = $sqrt(real'(out.i) * out.i + real'(out.q) * out.q);
          automatic real a_m = $sqrt(real'(mi) * mi + real'(mq) * mq);
          automatic real d = $atan2(real'(out.q), real'(out.i))
                           - ($atan2(real'(mq), real'(mi)) - $atan2(real'(rq), real'(ri)));
          while (d > 3.14159265) d -= 6.2831853;
          while (d < -3.14159265) d += 6.2831853;
          checks++;
          if (fabs(a_o - a_m) > 2.0 + a_m * 2e-3 || fabs(d) * a_m > 3.0 + a_m * 1e-3) begin
            failures++;
            $display("FAIL: k=%0d amplitude %0.1f vs %0.1f, phase error %0.5f rad", k, a_o, a_m, d);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
