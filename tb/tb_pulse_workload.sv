// tb_pulse_workload: the pulse-to-pulse stability measurement, run through
// the whole firmware at its default sizes.
//
// Each trigger is followed by a 3 us RF pulse on AC0 (from 2.0 us to 5.0 us
// after the trigger, a choice of this testbench) with REF on AC6 running
// continuously. From pulse to pulse the amplitude and phase of AC0 carry
// an injected jitter of about 0.04 % and 0.04 deg RMS; every ADC sample
// also carries +-2 LSB of random noise. For each of NP pulses the testbench
// reads lane 0 (AC0 after reference tracking) for samples 469..514 of the
// record, i.e. the 4.00-4.38 us window, averages I and Q as the control
// software would, and turns the average into amplitude and phase. It checks
//  - every pulse's average against the injected amplitude and phase,
//  - that the RMS of the measurement error is well below the jitter, so the
//    jitter is resolved,
// and prints the measured RMS stabilities. The 20 ms pulse period of 50 Hz
// operation is shortened to a few records' length.
module tb_pulse_workload;
  import llrf_pkg::*;
  localparam real PI   = 3.14159265358979;
  localparam real DPHI = 6.0 * PI / 13.0;
  localparam int  NCH  = N_AC + N_DC;
  localparam int  NP   = 40;
  localparam int  W0 = 469, W1 = 514;       // 4.00 us .. 4.38 us at 117.36 MHz
  localparam int  P_START = 235, P_STOP = 587;  // 2.0 us .. 5.0 us after the trigger

  logic clk_adc = 1'b0, clk_sys = 1'b0, arst_n = 1'b0;
  logic [ADC_W/2-1:0] adc_ddr [NCH];
  logic timing_trig = 1'b0, trig_out;
  logic trig_en = 1'b1, track_en = 1'b1, rf_enable = 1'b1, intlk_clear = 1'b0;
  adc_t refl_threshold = 16'sd20000;
  logic [IQ_W-1:0] ref_min = 18'd10000;
  logic [IQ_W-1:0] ref_amp;
  logic ref_ok, intlk_tripped, rf_switch_on, rec_active;
  logic [31:0] trig_count, rec_count;
  logic [15:0] trip_count;
  logic acq_addr_push = 1'b0, acq_addr_full, acq_data_pop = 1'b0, acq_data_empty;
  logic [REC_AW-1:0] acq_addr_sample = '0;
  logic [LANE_AW-1:0] acq_addr_lane = '0;
  logic [LANE_W-1:0] acq_data;
  logic iq_rec_we = 1'b0;
  logic [REC_AW-1:0] iq_rec_addr = '0;
  logic [2*DAC_W-1:0] iq_rec_wdata = '0;
  logic signed [DAC_W-1:0] dac_i, dac_q;
  logic dac_valid;

  llrf_top dut (.*);

  always #4.26 clk_adc = ~clk_adc;
  always #4.0  clk_sys = ~clk_sys;

  int checks = 0, failures = 0;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real wrap(input real v);
    while (v > PI) v -= 2.0 * PI;
    while (v < -PI) v += 2.0 * PI;
    return v;
  endfunction
  // uniform jitter in [-a*sqrt(3), a*sqrt(3)]: RMS a
  function automatic real jitter(input real a);
    return a * 1.7320508 * (2.0 * ($urandom_range(0, 1000000) / 1000000.0) - 1.0);
  endfunction

  // ---------------- ADC model ----------------
  localparam real A0 = 20000.0, TH0 = -0.8, AREF = 25000.0, THREF = 0.3;
  real a_now = A0, th_now = TH0;
  longint ncyc = 0, pulse_on = -1, pulse_off = -1;
  logic [ADC_W-1:0] cur [NCH];

  function automatic logic [ADC_W-1:0] sample(input int c, input longint n);
    real v = 0.0;
    if (c == 0) begin
      if (n >= pulse_on && n < pulse_off) v = a_now * $cos(real'(n % 13) * DPHI + th_now);
    end else if (c == REF_CH) begin
      v = AREF * $cos(real'(n % 13) * DPHI + THREF);
    end else if (c < N_AC) begin
      v = 0.0;
    end else begin
      return ADC_W'(c == N_AC ? 0 : 1000);
    end
    v += real'($urandom_range(0, 4)) - 2.0;
    return ADC_W'($rtoi($floor(v + 0.5)));
  endfunction

  always @(negedge clk_adc) begin
    #0.5;
    for (int c = 0; c < NCH; c++) begin
      cur[c] = sample(c, ncyc);
      for (int k = 0; k < ADC_W/2; k++) adc_ddr[c][k] = cur[c][2*k];
    end
  end
  always @(posedge clk_adc) begin
    ncyc++;
    #0.5;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < ADC_W/2; k++) adc_ddr[c][k] = cur[c][2*k+1];
  end

  task automatic dma_read(input int s, input int lane, output logic [LANE_W-1:0] w);
    int guard = 0;
    @(negedge clk_sys);
    acq_addr_push = 1'b1; acq_addr_sample = REC_AW'(s); acq_addr_lane = LANE_AW'(lane);
    @(negedge clk_sys);
    acq_addr_push = 1'b0;
    while (acq_data_empty && guard < 100) begin
      @(negedge clk_sys);
      guard++;
    end
    w = acq_data;
    acq_data_pop = 1'b1;
    @(negedge clk_sys);
    acq_data_pop = 1'b0;
  endtask

  real inj_a [NP], inj_p [NP], meas_a [NP], meas_p [NP];

  initial begin
    real sa, sp, se_a, se_p, ma, mp, ia, ip, rms_a, rms_p, rms_ia, rms_ip, rms_ea, rms_ep;
    for (int c = 0; c < NCH; c++) adc_ddr[c] = '0;
    #50 arst_n = 1'b1;
    repeat (2000) @(posedge clk_adc);
    checks++;
    if (!ref_ok) begin
      failures++;
      $display("FAIL: REF not ok before the pulses");
    end
    for (int p = 0; p < NP; p++) begin
      automatic int rc0 = rec_count;
      automatic real si = 0.0, sq = 0.0;
      inj_a[p] = A0 * (1.0 + jitter(0.0004));
      inj_p[p] = TH0 + jitter(0.04 * PI / 180.0);
      @(posedge clk_adc);
      a_now = inj_a[p]; th_now = inj_p[p];
      pulse_on = ncyc + P_START; pulse_off = ncyc + P_STOP;
      timing_trig = 1'b1;
      repeat (6) @(posedge clk_adc);
      timing_trig = 1'b0;
      while (rec_count == 32'(rc0)) @(posedge clk_adc);
      for (int s = W0; s <= W1; s++) begin
        logic [LANE_W-1:0] w;
        dma_read(s, 0, w);
        si += real'($signed(w[LANE_W-1:IQ_W]));
        sq += real'($signed(w[IQ_W-1:0]));
      end
      si /= real'(W1 - W0 + 1);
      sq /= real'(W1 - W0 + 1);
      meas_a[p] = $sqrt(si * si + sq * sq);
      meas_p[p] = $atan2(sq, si);
      // expected: tracked phase = injected phase - REF phase, amplitude kept
      checks++;
      if (fabs(meas_a[p] - inj_a[p]) > 3.0 || fabs(wrap(meas_p[p] - (inj_p[p] - THREF))) > 1.5e-4) begin
        failures++;
        $display("FAIL: pulse %0d amplitude %0.2f vs %0.2f, phase %0.6f vs %0.6f", p, meas_a[p],
                 inj_a[p], meas_p[p], inj_p[p] - THREF);
      end
      repeat (200) @(posedge clk_adc);
    end
    // RMS of measured values, of injected values and of the error
    sa = 0; sp = 0; ia = 0; ip = 0;
    for (int p = 0; p < NP; p++) begin
      sa += meas_a[p]; sp += meas_p[p]; ia += inj_a[p]; ip += inj_p[p];
    end
    ma = sa / NP; mp = sp / NP; ia /= NP; ip /= NP;
    rms_a = 0; rms_p = 0; rms_ia = 0; rms_ip = 0; rms_ea = 0; rms_ep = 0;
    for (int p = 0; p < NP; p++) begin
      rms_a  += (meas_a[p] - ma) ** 2;  rms_p  += (meas_p[p] - mp) ** 2;
      rms_ia += (inj_a[p] - ia) ** 2;   rms_ip += (inj_p[p] - ip) ** 2;
      rms_ea += ((meas_a[p] - ma) - (inj_a[p] - ia)) ** 2;
      rms_ep += ((meas_p[p] - mp) - (inj_p[p] - ip)) ** 2;
    end
    rms_a = $sqrt(rms_a / NP) / ma * 100.0;  rms_ia = $sqrt(rms_ia / NP) / ia * 100.0;
    rms_p = $sqrt(rms_p / NP) * 180.0 / PI;  rms_ip = $sqrt(rms_ip / NP) * 180.0 / PI;
    rms_ea = $sqrt(rms_ea / NP) / ma * 100.0; rms_ep = $sqrt(rms_ep / NP) * 180.0 / PI;
    $display("amplitude stability: measured %0.4f %%, injected %0.4f %%, error %0.4f %%", rms_a, rms_ia, rms_ea);
    $display("phase stability:     measured %0.4f deg, injected %0.4f deg, error %0.4f deg", rms_p, rms_ip, rms_ep);
    checks++;
    if (rms_ea > 0.25 * rms_ia || rms_ep > 0.25 * rms_ip) begin
      failures++;
      $display("FAIL: measurement error not well below the injected jitter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
