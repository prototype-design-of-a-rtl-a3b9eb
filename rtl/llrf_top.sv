// llrf_top: FPGA firmware of the S-band TDC digital LLRF board.
//
// Ten ADC channels enter as double-data-rate lanes: AC0..AC7 are RF
// signals down-converted to a 27.08 MHz IF (AC6 = reference REF, AC7 =
// vector-modulator output), DC0 is the klystron modulator high-voltage
// monitor and DC1 the klystron reflected power. All are sampled at
// 117.36 MHz (clk_adc), so IF : CLK = 3 : 13.
//   - Every AC channel: data recovery (ddr_rx) -> 13-sample non-IQ
//     demodulation (iq_demod) -> 13-tap FIR on I and on Q.
//   - AC6 also feeds a second FIR pair and two CIC filters; the averaged
//     REF vector gives the REF amplitude, its reciprocal and the REF power
//     status (amp_solution).
//   - AC0..AC5 and AC7 are multiplied by conj(REF)/A_ref (ref_track), which
//     removes the drift common to all channels; track_en bypasses this.
//   - DC1 is compared with the reflected-power limit (threshold_judge),
//     which opens the RF switch in front of the vector-modulator output.
//   - A timing trigger (trigger_unit) starts the address counter, which
//     writes a REC_LEN-sample record of all channels into the acquisition
//     memory (acq_buffer) and plays the I/Q excitation record out of the
//     record memory to the DAC (dac_path).
// The system clock side (clk_sys, 125 MHz) is where the PCIe DMA engine
// connects: it pushes read addresses and pops acquisition words through
// FIFOs, and writes I/Q records. The DMA engine, the clock and input
// buffers, the ADCs, DACs, vector modulator and RF switch are outside this
// module; their signals are ports.
// Control inputs (trig_en, track_en, rf_enable, intlk_clear,
// refl_threshold, ref_min) are in the clk_adc domain and are set by a
// register block outside this module; the status outputs are in the
// clk_adc domain too.
// Memory lanes: lanes 0..7 = {I, Q} of AC0..AC7 (AC6 = REF vector, the
// others after reference tracking), lane 8 = {DC0, DC1}, all aligned to the
// same sample instant (the DC lane is delayed by the 8-cycle latency of
// the demodulation path).
// The block structure and its connections follow the firmware diagram of
// the design; widths, record length, lane layout and control details are
// this design's own.
module llrf_top
  import llrf_pkg::*;
(
  input  logic                     clk_adc,
  input  logic                     clk_sys,
  input  logic                     arst_n,
  // ADC data lanes after the input buffers: AC0..AC7, then DC0, DC1
  input  logic [ADC_W/2-1:0]       adc_ddr [N_AC+N_DC],
  // timing
  input  logic                     timing_trig,
  output logic                     trig_out,
  // control (clk_adc domain)
  input  logic                     trig_en,
  input  logic                     track_en,
  input  logic                     rf_enable,
  input  logic                     intlk_clear,
  input  adc_t                     refl_threshold,
  input  logic [IQ_W-1:0]          ref_min,
  // status (clk_adc domain)
  output logic [IQ_W-1:0]          ref_amp,
  output logic                     ref_ok,
  output logic                     intlk_tripped,
  output logic                     rf_switch_on,
  output logic [31:0]              trig_count,
  output logic [31:0]              rec_count,
  output logic                     rec_active,
  output logic [15:0]              trip_count,
  // DMA side: acquisition read-out (clk_sys domain)
  input  logic                     acq_addr_push,
  input  logic [REC_AW-1:0]        acq_addr_sample,
  input  logic [LANE_AW-1:0]       acq_addr_lane,
  output logic                     acq_addr_full,
  input  logic                     acq_data_pop,
  output logic [LANE_W-1:0]        acq_data,
  output logic                     acq_data_empty,
  // DMA side: I/Q record write (clk_sys domain), {I, Q}
  input  logic                     iq_rec_we,
  input  logic [REC_AW-1:0]        iq_rec_addr,
  input  logic [2*DAC_W-1:0]       iq_rec_wdata,
  // DAC words to the vector modulator (clk_adc domain)
  output logic signed [DAC_W-1:0]  dac_i,
  output logic signed [DAC_W-1:0]  dac_q,
  output logic                     dac_valid
);
  localparam int PATH_LAT = 8;   // iq_demod (3) + fir_filter (2) + ref_track (3)

  logic rst_adc_n, rst_sys_n;
  reset_sync u_rst_adc (.clk (clk_adc), .arst_n (arst_n), .rst_n (rst_adc_n));
  reset_sync u_rst_sys (.clk (clk_sys), .arst_n (arst_n), .rst_n (rst_sys_n));

  // ---------------- trigger and address counter ----------------
  logic              trig_pulse;
  logic [REC_AW-1:0] rec_addr;
  logic              rec_done;

  trigger_unit u_trig (
    .clk (clk_adc), .rst_n (rst_adc_n), .trig_in (timing_trig), .trig_en (trig_en),
    .trig_pulse (trig_pulse), .trig_out (trig_out), .trig_count (trig_count)
  );

  addr_counter #(.REC_LEN(REC_LEN)) u_addr (
    .clk (clk_adc), .rst_n (rst_adc_n), .start (trig_pulse),
    .addr (rec_addr), .active (rec_active), .done (rec_done), .rec_count (rec_count)
  );

  // ---------------- data recovery ----------------
  logic [ADC_W-1:0] samp [N_AC+N_DC];
  for (genvar c = 0; c < N_AC + N_DC; c++) begin : g_rx
    ddr_rx #(.W(ADC_W)) u_rx (.clk (clk_adc), .ddr_d (adc_ddr[c]), .q (samp[c]));
  end

  // ---------------- AC channels: demodulation and FIR ----------------
  iq_t  demod [N_AC];
  logic demod_v [N_AC];
  iq_t  filt [N_AC];
  logic filt_v [N_AC];

  for (genvar c = 0; c < N_AC; c++) begin : g_ac
    logic fv_q;
    iq_demod u_demod (
      .clk (clk_adc), .rst_n (rst_adc_n), .x (adc_t'(samp[c])),
      .iq (demod[c]), .out_valid (demod_v[c])
    );
    fir_filter u_fir_i (
      .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (demod_v[c]), .din (demod[c].i),
      .out_valid (filt_v[c]), .dout (filt[c].i)
    );
    fir_filter u_fir_q (
      .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (demod_v[c]), .din (demod[c].q),
      .out_valid (fv_q), .dout (filt[c].q)
    );
  end

  // ---------------- REF average amplitude: FIR -> CIC -> amplitude ----------------
  iq_t                ref_fir, ref_avg;
  logic               ref_fir_v, ref_fir_vq, ref_avg_v, ref_avg_vq;
  logic [RECIP_W-1:0] ref_recip;
  logic               amp_v;
  logic [15:0]        amp_overruns;

  fir_filter u_ref_fir_i (
    .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (demod_v[REF_CH]), .din (demod[REF_CH].i),
    .out_valid (ref_fir_v), .dout (ref_fir.i)
  );
  fir_filter u_ref_fir_q (
    .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (demod_v[REF_CH]), .din (demod[REF_CH].q),
    .out_valid (ref_fir_vq), .dout (ref_fir.q)
  );
  cic_filter u_cic_i (
    .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (ref_fir_v), .din (ref_fir.i),
    .out_valid (ref_avg_v), .dout (ref_avg.i)
  );
  cic_filter u_cic_q (
    .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (ref_fir_v), .din (ref_fir.q),
    .out_valid (ref_avg_vq), .dout (ref_avg.q)
  );
  amp_solution u_amp (
    .clk (clk_adc), .rst_n (rst_adc_n), .in_valid (ref_avg_v), .avg (ref_avg),
    .ref_min (ref_min), .out_valid (amp_v), .amp (ref_amp), .recip (ref_recip),
    .ref_ok (ref_ok), .overruns (amp_overruns)
  );

  // ---------------- reference tracking ----------------
  iq_t lane_iq [N_AC];
  for (genvar c = 0; c < N_AC; c++) begin : g_track
    if (c == REF_CH) begin : g_ref
      // the REF vector itself, delayed to stay aligned with the tracked lanes
      iq_t d1, d2;
      always_ff @(posedge clk_adc) begin
        d1         <= filt[c];
        d2         <= d1;
        lane_iq[c] <= d2;
      end
    end else begin : g_mul
      ref_track u_track (
        .clk (clk_adc), .rst_n (rst_adc_n), .en (track_en),
        .meas (filt[c]), .ref_iq (filt[REF_CH]), .recip (ref_recip), .out (lane_iq[c])
      );
    end
  end

  // ---------------- DC channels: interlock and waveform lane ----------------
  adc_t dc_d [PATH_LAT][N_DC];

  threshold_judge u_intlk (
    .clk (clk_adc), .rst_n (rst_adc_n), .dc (adc_t'(samp[N_AC+1])), .threshold (refl_threshold),
    .rf_enable (rf_enable), .clear (intlk_clear),
    .tripped (intlk_tripped), .rf_switch_on (rf_switch_on), .trip_count (trip_count)
  );

  always_ff @(posedge clk_adc) begin
    for (int d = 0; d < N_DC; d++) dc_d[0][d] <= adc_t'(samp[N_AC+d]);
    for (int k = 1; k < PATH_LAT; k++) dc_d[k] <= dc_d[k-1];
  end

  // ---------------- acquisition memory ----------------
  logic [LANE_W-1:0] wlanes [N_LANES];
  always_comb begin
    for (int c = 0; c < N_AC; c++) wlanes[c] = lane_iq[c];
    wlanes[N_AC] = {IQ_W'(dc_d[PATH_LAT-1][0]), IQ_W'(dc_d[PATH_LAT-1][1])};
  end

  acq_buffer #(.DEPTH(REC_LEN)) u_acq (
    .clk_adc (clk_adc), .we (rec_active), .wsample (rec_addr), .wlanes (wlanes),
    .clk_sys (clk_sys), .rst_sys_n (rst_sys_n),
    .addr_push (acq_addr_push), .addr_sample (acq_addr_sample), .addr_lane (acq_addr_lane),
    .addr_full (acq_addr_full),
    .data_pop (acq_data_pop), .data_out (acq_data), .data_empty (acq_data_empty)
  );

  // ---------------- I/Q record playback to the DAC ----------------
  dac_path #(.DEPTH(REC_LEN)) u_dac (
    .clk_sys (clk_sys), .we (iq_rec_we), .waddr (iq_rec_addr), .wdata (iq_rec_wdata),
    .clk_adc (clk_adc), .rst_adc_n (rst_adc_n), .active (rec_active), .raddr (rec_addr),
    .dac_i (dac_i), .dac_q (dac_q), .dac_valid (dac_valid)
  );
endmodule
