// threshold_judge: reflected-power interlock driving the RF switch.
//
// DC1 carries the klystron's reflected power after an envelope detector,
// sampled directly (no down-conversion). Each sample is compared with the
// protection threshold set by the operator; the first sample above it
// trips the interlock, which opens the RF switch in front of the vector
// modulator output. The trip is latched: the switch stays open until the
// operator clears it (clear pulse) with the reflected power back below the
// threshold. rf_switch_on = rf_enable & !tripped, where rf_enable is the
// operator's RF enable. trip_count counts trips.
// Interface: dc (signed ADC sample), threshold (same units) -> tripped,
// rf_switch_on. Timing: tripped and rf_switch_on change on the clock edge
// after the offending sample is on dc (one cycle).
// The comparison and the opening of the switch follow the description;
// latching, the clear input and the enable are this design's choices.
module threshold_judge
  import llrf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  adc_t        dc,
  input  adc_t        threshold,
  input  logic        rf_enable,
  input  logic        clear,
  output logic        tripped,
  output logic        rf_switch_on,
  output logic [15:0] trip_count
);
  logic over;
  assign over = (dc > threshold);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tripped    <= 1'b0;
      trip_count <= '0;
    end else begin
      if (over) begin
        if (!tripped) trip_count <= trip_count + 1'b1;
        tripped <= 1'b1;
      end else if (clear) begin
        tripped <= 1'b0;
      end
    end
  end

  // the switch opens in the same cycle as the trip is registered
  always_ff @(posedge clk) begin
    if (!rst_n) rf_switch_on <= 1'b0;
    else        rf_switch_on <= rf_enable & ~(over | (tripped & ~clear));
  end
endmodule
