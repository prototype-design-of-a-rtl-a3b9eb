// tb_llrf_top: end-to-end test of the LLRF firmware at its default sizes
// (2048-sample records, 13-sample demodulation, 13-tap FIRs, CIC R = 64).
//
// An ADC model drives all ten channels over their DDR lanes: AC0..AC7 carry
// a 27.08 MHz IF tone sampled at 117.36 MHz (3:13) with amplitude A_c and
// phase theta_c + drift, where drift is common to all AC channels, as a
// drift of the LO/clock distribution would be; AC6 is the reference. DC0 is
// a ramp and DC1 the reflected-power level. The testbench plays the DMA
// engine: it writes an I/Q excitation record and reads acquisition words
// back through the FIFOs.
// Sequence and checks:
//  1. REF amplitude, its status and the trigger gating.
//  2. Records with reference tracking on at drift 0 and drift 0.35 rad: the
//     tracked AC channels must show amplitude A_c and phase
//     theta_c - theta_ref in both, i.e. the drift is removed, while the raw
//     REF lane turns by the drift.
//  3. Records with tracking off at both drifts: the AC0 lane turns by the
//     drift, and its phase relative to the REF lane is theta_0 - theta_6.
//  4. Every record: DAC playback of the excitation record word by word, the
//     DC lane ramp (one sample per ADC clock, contiguous), a retrigger in
//     the middle of a record is ignored.
//  5. Reflected power above the limit trips the interlock and opens the RF
//     switch; clear closes it again. REF below ref_min clears ref_ok.
//  6. DMA back-pressure: addresses pushed without popping fill the FIFOs.
// Each mechanism is counted, and one that never happened is a failure.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam real PI   = 3.14159265358979;
  localparam real DPHI = 6.0 * PI / 13.0;
  localparam int  NCH  = N_AC + N_DC;

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

  always #4.26 clk_adc = ~clk_adc;   // 117.36 MHz
  always #4.0  clk_sys = ~clk_sys;   // 125 MHz

  int checks = 0, failures = 0;
  // mechanism counters
  int n_records = 0, n_retrig_ignored = 0, n_trig_disabled = 0, n_track_on = 0,
      n_track_off = 0, n_trips = 0, n_clears = 0, n_addr_full = 0, n_ref_low = 0,
      n_dac_words = 0;

  initial begin
    #3ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real wrap(input real v);
    while (v > PI) v -= 2.0 * PI;
    while (v < -PI) v += 2.0 * PI;
    return v;
  endfunction

  // ---------------- ADC model ----------------
  real amp_c [N_AC], th_c [N_AC];
  real drift = 0.0;
  int  dc1_level = 1000;
  longint ncyc = 0;
  logic [ADC_W-1:0] cur [NCH];

  function automatic logic [ADC_W-1:0] sample(input int c, input longint n);
    if (c < N_AC) return ADC_W'($rtoi($floor(amp_c[c] * $cos(real'(n % 13) * DPHI + th_c[c] + drift) + 0.5)));
    else if (c == N_AC) return ADC_W'(n % 30000);        // DC0: modulator HV monitor, a ramp
    else return ADC_W'(dc1_level);                        // DC1: reflected power
  endfunction

  always @(negedge clk_adc) begin
    #0.5;
    for (int c = 0; c < NCH; c++) begin
      cur[c] = sample(c, ncyc);
      for (int k = 0; k < ADC_W/2; k++) adc_ddr[c][k] = cur[c][2*k];      // even bits
    end
  end
  always @(posedge clk_adc) begin
    ncyc++;
    #0.5;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < ADC_W/2; k++) adc_ddr[c][k] = cur[c][2*k+1];    // odd bits
  end

  // ---------------- DAC playback monitor ----------------
  logic [2*DAC_W-1:0] rec [REC_LEN];
  int dac_k = 0;
  always @(posedge clk_adc) begin
    #1;
    if (!arst_n) begin
      dac_k = 0;
    end else if (dac_valid) begin
      n_dac_words++;
      checks++;
      if ({dac_i, dac_q} !== rec[dac_k]) begin
        failures++;
        if (failures < 10) $display("FAIL: DAC word %0d = %h expected %h", dac_k, {dac_i, dac_q}, rec[dac_k]);
      end
      dac_k++;
    end else begin
      if (dac_k != 0) begin
        checks++;
        if (dac_k != REC_LEN) begin
          failures++;
          $display("FAIL: %0d DAC words played, expected %0d", dac_k, REC_LEN);
        end
      end
      dac_k = 0;
      if (dac_i != 0 || dac_q != 0) begin
        checks++;
        failures++;
        $display("FAIL: DAC not idle between records");
      end
    end
  end

  // ---------------- DMA model ----------------
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

  task automatic wait_adc(input int n);
    repeat (n) @(posedge clk_adc);
  endtask

  task automatic fire_trigger(input bit retrig);
    int rc0 = rec_count, tc0 = trig_count;
    #3.1 timing_trig = 1'b1;
    wait_adc(6);
    timing_trig = 1'b0;
    if (retrig) begin
      wait_adc(500);
      check(rec_active, "record running");
      #2.3 timing_trig = 1'b1;       // second trigger inside the record
      wait_adc(6);
      timing_trig = 1'b0;
    end
    while (rec_count == 32'(rc0)) @(posedge clk_adc);
    wait_adc(20);
    check(rec_count == 32'(rc0 + 1), "one record per trigger");
    if (retrig) begin
      check(trig_count == 32'(tc0 + 2), "both triggers accepted by the trigger unit");
      if (rec_count == 32'(rc0 + 1)) n_retrig_ignored++;
    end
    n_records++;
  endtask

  // amplitude and phase of an IQ lane word
  function automatic real w_amp(input logic [LANE_W-1:0] w);
    real i = real'($signed(w[LANE_W-1:IQ_W])), q = real'($signed(w[IQ_W-1:0]));
    return $sqrt(i * i + q * q);
  endfunction
  function automatic real w_ph(input logic [LANE_W-1:0] w);
    return $atan2(real'($signed(w[IQ_W-1:0])), real'($signed(w[LANE_W-1:IQ_W])));
  endfunction

  // read a few samples of every lane and check the record contents
  real ph_ac0 [4], ph_ref [4];
  task automatic check_record(input int idx, input bit tracked);
    logic [LANE_W-1:0] w, w2;
    int samples [3] = '{300, 1100, 2040};
    foreach (samples[si]) begin
      automatic int s = samples[si];
      for (int c = 0; c < N_AC; c++) begin
        dma_read(s, c, w);
        if (c == REF_CH || !tracked) begin
          check(fabs(w_amp(w) - amp_c[c]) < 0.002 * amp_c[c],
                $sformatf("rec %0d lane %0d amplitude %0.1f vs %0.1f", idx, c, w_amp(w), amp_c[c]));
        end else begin
          automatic real dph = wrap(w_ph(w) - (th_c[c] - th_c[REF_CH]));
          check(fabs(w_amp(w) - amp_c[c]) < 0.002 * amp_c[c] && fabs(dph) < 0.002,
                $sformatf("rec %0d lane %0d tracked: amplitude %0.1f vs %0.1f, phase error %0.5f",
                          idx, c, w_amp(w), amp_c[c], dph));
        end
        if (c == 0 && si == 1) ph_ac0[idx] = w_ph(w);
        if (c == REF_CH && si == 1) ph_ref[idx] = w_ph(w);
      end
      // DC lane: DC0 ramp, DC1 level
      dma_read(s, N_AC, w);
      dma_read(s + 1 < REC_LEN ? s + 1 : s - 1, N_AC, w2);
      check($signed(w2[LANE_W-1:IQ_W]) - $signed(w[LANE_W-1:IQ_W]) == (s + 1 < REC_LEN ? 1 : -1),
            $sformatf("rec %0d DC0 ramp at sample %0d", idx, s));
      check($signed(w[IQ_W-1:0]) == dc1_level, $sformatf("rec %0d DC1 level", idx));
    end
    if (!tracked) begin
      // untracked AC0 against the REF lane: relative phase theta_0 - theta_6
      automatic real rel = wrap(ph_ac0[idx] - ph_ref[idx] - (th_c[0] - th_c[REF_CH]));
      check(fabs(rel) < 0.002, $sformatf("rec %0d untracked relative phase error %0.5f", idx, rel));
    end
  endtask

  initial begin
    logic [LANE_W-1:0] w;
    for (int c = 0; c < NCH; c++) adc_ddr[c] = '0;
    for (int c = 0; c < N_AC; c++) begin
      amp_c[c] = 20000.0 - 1500.0 * c;
      th_c[c]  = 0.5 * c - 1.0;
    end
    amp_c[REF_CH] = 25000.0;
    th_c[REF_CH]  = 0.3;
    for (int a = 0; a < REC_LEN; a++) rec[a] = $urandom;

    #50 arst_n = 1'b1;
    // I/Q excitation record written by the DMA engine
    for (int a = 0; a < REC_LEN; a++) begin
      @(negedge clk_sys);
      iq_rec_we = 1'b1; iq_rec_addr = REC_AW'(a); iq_rec_wdata = rec[a];
    end
    @(negedge clk_sys);
    iq_rec_we = 1'b0;
    wait_adc(1000);

    // 1. REF amplitude and status, trigger output
    check(ref_ok && fabs(real'(ref_amp) - 25000.0) < 25.0, $sformatf("REF amplitude %0d ok %0b", ref_amp, ref_ok));
    check(rf_switch_on && !intlk_tripped, "RF switch closed at start");
    trig_en = 1'b0;
    #3.1 timing_trig = 1'b1;
    wait_adc(6);
    check(!trig_out, "trigger output gated off");
    timing_trig = 1'b0;
    wait_adc(3000);
    check(rec_count == 0 && trig_count == 0 && !rec_active, "disabled trigger starts no record");
    if (rec_count == 0) n_trig_disabled++;
    trig_en = 1'b1;

    // 2. tracking on, drift 0 and 0.35 rad
    track_en = 1'b1;
    fire_trigger(1);
    check_record(0, 1);
    drift = 0.35;
    wait_adc(1500);
    fire_trigger(0);
    check_record(1, 1);
    n_track_on++;
    check(fabs(wrap(ph_ref[1] - ph_ref[0] - 0.35)) < 0.002, "REF lane turns by the drift");
    check(fabs(wrap(ph_ac0[1] - ph_ac0[0])) < 0.002, "tracked AC0 phase independent of drift");

    // 3. tracking off, drift 0.35 rad and 0
    track_en = 1'b0;
    wait_adc(100);
    fire_trigger(0);
    check_record(2, 0);
    drift = 0.0;
    wait_adc(1500);
    fire_trigger(0);
    check_record(3, 0);
    n_track_off++;
    check(fabs(wrap(ph_ac0[2] - ph_ac0[3] - 0.35)) < 0.002, "untracked AC0 phase moves with the drift");
    track_en = 1'b1;

    // 5. interlock
    for (int r = 0; r < 2; r++) begin
      wait_adc(10);
      dc1_level = 25000;
      wait_adc(3);
      dc1_level = 1000;
      wait_adc(20);
      check(intlk_tripped && !rf_switch_on, "reflected power above limit opens the RF switch");
      if (intlk_tripped) n_trips++;
      wait_adc(20);
      check(intlk_tripped && !rf_switch_on, "interlock latched");
      @(negedge clk_adc) intlk_clear = 1'b1;
      @(negedge clk_adc) intlk_clear = 1'b0;
      wait_adc(2);
      check(!intlk_tripped && rf_switch_on, "clear closes the RF switch");
      if (!intlk_tripped) n_clears++;
    end
    check(trip_count == 2, "trip counter");

    // REF below ref_min
    amp_c[REF_CH] = 5000.0;
    wait_adc(1500);
    check(!ref_ok && fabs(real'(ref_amp) - 5000.0) < 10.0, $sformatf("low REF: amplitude %0d ok %0b", ref_amp, ref_ok));
    if (!ref_ok) n_ref_low++;
    amp_c[REF_CH] = 25000.0;
    wait_adc(1500);
    check(ref_ok, "REF status back");

    // 6. DMA back-pressure: push addresses until the address FIFO is full
    begin
      int pushed = 0, popped = 0;
      while (!acq_addr_full && pushed < 100) begin
        @(negedge clk_sys);
        acq_addr_push = 1'b1; acq_addr_sample = REC_AW'(pushed); acq_addr_lane = LANE_AW'(N_AC);
        @(negedge clk_sys);
        acq_addr_push = 1'b0;
        pushed++;
      end
      if (acq_addr_full) n_addr_full++;
      while (popped < pushed) begin
        @(negedge clk_sys);
        if (!acq_data_empty) begin
          if (popped > 0) check($signed(acq_data[LANE_W-1:IQ_W]) - $signed(w[LANE_W-1:IQ_W]) == 1,
                                "words after back-pressure in order");
          w = acq_data;
          acq_data_pop = 1'b1;
          @(negedge clk_sys);
          acq_data_pop = 1'b0;
          popped++;
        end
      end
      check(pushed >= 32, $sformatf("%0d addresses accepted before full", pushed));
    end

    wait_adc(20);
    check(n_records == 4 && n_retrig_ignored >= 1 && n_trig_disabled >= 1 && n_track_on >= 1 &&
          n_track_off >= 1 && n_trips >= 1 && n_clears >= 1 && n_addr_full >= 1 &&
          n_ref_low >= 1 && n_dac_words == 4 * REC_LEN, "every mechanism happened");
    $display("mechanisms: records=%0d retrigger_ignored=%0d disabled_trigger=%0d track_on=%0d track_off=%0d trips=%0d clears=%0d addr_fifo_full=%0d ref_low=%0d dac_words=%0d",
             n_records, n_retrig_ignored, n_trig_disabled, n_track_on, n_track_off, n_trips, n_clears,
             n_addr_full, n_ref_low, n_dac_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
