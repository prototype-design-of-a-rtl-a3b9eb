// dpram: simple dual-port RAM with separate write and read clocks.
//
// Used wherever data crosses between the ADC clock (117.36 MHz) and the
// PCIe/system clock (125 MHz): the acquisition memory (written by the ADC
// side, read by the PCIe side) and the I/Q record memory (written by the
// PCIe side, read by the ADC side). One write port (wclk, we, waddr,
// wdata) and one read port (rclk, re, raddr -> rdata). Timing: a write
// takes effect at the wclk edge; rdata holds mem[raddr] from the rclk edge
// at which re is high (one cycle read latency, as in a block RAM). Reading
// an address while it is being written from the other clock returns either
// value; the users avoid that by their protocol (a record is read after it
// is complete).
module dpram #(
  parameter int W     = 32,
  parameter int DEPTH = 2048
) (
  input  logic                     wclk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     rclk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge wclk) if (we) mem[waddr] <= wdata;
  always_ff @(posedge rclk) if (re) rdata <= mem[raddr];
endmodule
