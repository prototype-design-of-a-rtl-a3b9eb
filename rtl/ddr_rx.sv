// ddr_rx: "data recovery" of one ADC channel.
//
// The ADC sends each W-bit sample over W/2 lanes at double data rate: the
// rising clock edge carries the even bits (lane k = bit 2k) and the falling
// edge the odd bits (lane k = bit 2k+1). The lanes are captured on both
// edges (the job of the FPGA's input DDR register) and the two halves are
// re-interleaved into one parallel word, registered on the rising edge.
// Interface: clk is the ADC data clock after the clock buffer, ddr_d the
// single-ended lanes after the differential input buffers; q is the sample
// in two's complement. Timing: the sample whose even bits are on ddr_d at
// rising edge t and odd bits at the falling edge after it appears on q
// after rising edge t+1.
// The description gives only the function (differential buffer, DDR input
// register, serial-to-parallel); the bit-to-edge mapping is an assumption.
module ddr_rx #(
  parameter int W = llrf_pkg::ADC_W
) (
  input  logic           clk,
  input  logic [W/2-1:0] ddr_d,
  output logic [W-1:0]   q
);
  logic [W/2-1:0] rise_q, fall_q;
  logic [W-1:0]   word;

  always_ff @(posedge clk) rise_q <= ddr_d;
  always_ff @(negedge clk) fall_q <= ddr_d;

  always_comb begin
    for (int k = 0; k < W/2; k++) begin
      word[2*k]   = rise_q[k];
      word[2*k+1] = fall_q[k];
    end
  end

  always_ff @(posedge clk) q <= word;

  initial assert (W % 2 == 0) else $error("ddr_rx: W must be even");
endmodule
