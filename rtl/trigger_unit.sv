// trigger_unit: timing-trigger selection and trigger output.
//
// The pulse-mode system is started by an external timing trigger (at most
// 50 Hz). The trigger is asynchronous to the ADC clock, so it passes through
// a STAGES-deep synchroniser; a rising edge then gives a one-cycle
// trig_pulse, but only while trig_en (the operator's "trigger enable") is
// set. trig_out is the synchronised level gated by trig_en, the copy of the
// trigger the board forwards. trig_count counts accepted triggers so that
// software can show the trigger status and rate.
// Interface: all outputs in the clk domain. Timing: trig_pulse is high for
// one cycle, from the STAGES-th clk edge after the first edge that samples
// the trigger high; trig_out follows the trigger level with the same delay.
// The synchroniser, edge detection and counter are this design's choices;
// the description gives only the function (trigger selection and output).
module trigger_unit #(
  parameter int STAGES = 2,
  parameter int CNT_W  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig_in,     // asynchronous timing trigger
  input  logic             trig_en,     // operator trigger enable
  output logic             trig_pulse,  // one cycle per accepted trigger
  output logic             trig_out,    // gated, synchronised trigger level
  output logic [CNT_W-1:0] trig_count
);
  logic [STAGES-1:0] sync;
  logic              prev;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync       <= '0;
      prev       <= 1'b0;
      trig_pulse <= 1'b0;
      trig_out   <= 1'b0;
      trig_count <= '0;
    end else begin
      sync       <= {sync[STAGES-2:0], trig_in};
      prev       <= sync[STAGES-1];
      trig_out   <= sync[STAGES-1] & trig_en;
      trig_pulse <= sync[STAGES-1] & ~prev & trig_en;
      if (sync[STAGES-1] & ~prev & trig_en) trig_count <= trig_count + 1'b1;
    end
  end
endmodule
