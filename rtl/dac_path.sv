// dac_path: I/Q record memory and DAC output buffer.
//
// Software turns the operator's amplitude and phase set points into a
// record of I/Q words (DAC_W bits each) and writes it over PCIe into this
// dual-port RAM (system clock side). After each trigger the address
// counter reads the record out at the ADC clock, one word per sample, and
// the words pass a register stage (the "data buffer") to the two DAC
// channels, I and Q, which drive the vector modulator. Outside the
// record, i.e. while the address counter is idle, the DAC words are zero,
// so no drive is produced between pulses.
// Interface: host write port (clk_sys: we, waddr, wdata = {I, Q});
// playback (clk_adc: active, raddr) -> dac_i, dac_q, dac_valid.
// Timing: the word at address a reaches dac_i/dac_q 2 ADC cycles after
// raddr = a with active high.
// Playback of user I/Q records after a trigger follows the description;
// the record format, the zero output between pulses and the DAC width
// are this design's choices.
module dac_path
  import llrf_pkg::*;
#(
  parameter int DEPTH = REC_LEN
) (
  input  logic                     clk_sys,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [2*DAC_W-1:0]       wdata,
  input  logic                     clk_adc,
  input  logic                     rst_adc_n,
  input  logic                     active,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic signed [DAC_W-1:0]  dac_i,
  output logic signed [DAC_W-1:0]  dac_q,
  output logic                     dac_valid
);
  logic [2*DAC_W-1:0] rdata;
  logic               active_q;

  dpram #(.W(2*DAC_W), .DEPTH(DEPTH)) u_ram (
    .wclk (clk_sys), .we (we), .waddr (waddr), .wdata (wdata),
    .rclk (clk_adc), .re (active), .raddr (raddr), .rdata (rdata)
  );

  always_ff @(posedge clk_adc) begin
    if (!rst_adc_n) begin
      active_q  <= 1'b0;
      dac_i     <= '0;
      dac_q     <= '0;
      dac_valid <= 1'b0;
    end else begin
      active_q  <= active;
      dac_valid <= active_q;
      if (active_q) begin
        dac_i <= rdata[2*DAC_W-1:DAC_W];
        dac_q <= rdata[DAC_W-1:0];
      end else begin
        dac_i <= '0;
        dac_q <= '0;
      end
    end
  end
endmodule
