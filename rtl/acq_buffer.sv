// acq_buffer: acquisition memory of all channels and its PCIe read side.
//
// Write side (ADC clock): while the address counter is active, every clock
// writes one sample of all N_LANES lanes at address wsample: lanes 0..7 are
// the I/Q vectors of AC0..AC7 ({I, Q}, IQ_W bits each), lane 8 holds the
// raw DC0 and DC1 waveforms (sign-extended into the I and Q halves). Each
// lane is one dual-port RAM of REC_LEN words of LANE_W bits.
// Read side (system clock): the DMA engine pushes word addresses
// {sample, lane} into an address FIFO; whenever the data FIFO has room for
// one more word (counting the word in flight) the head address is popped,
// all lanes are read at that sample and the selected lane is pushed into
// the data FIFO one cycle later, from which the DMA engine pops it. Words
// come out in the order their addresses went in.
// Interface: see ports; addr_full/data_empty give flow control to the DMA
// side. Timing: a word is in the data FIFO 3 system clocks after its
// address is pushed into an empty address FIFO (FIFO, RAM read, push).
// The dual-port RAM between the two clocks and the FIFOs towards the DMA
// engine follow the firmware diagram; the lane layout, FIFO depths and
// the read control are this design's own.
module acq_buffer
  import llrf_pkg::*;
#(
  parameter int DEPTH      = REC_LEN,
  parameter int FIFO_DEPTH = 16
) (
  // ADC side
  input  logic                     clk_adc,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] wsample,
  input  logic [LANE_W-1:0]        wlanes [N_LANES],
  // PCIe / system side
  input  logic                     clk_sys,
  input  logic                     rst_sys_n,
  input  logic                     addr_push,
  input  logic [$clog2(DEPTH)-1:0] addr_sample,
  input  logic [LANE_AW-1:0]       addr_lane,
  output logic                     addr_full,
  input  logic                     data_pop,
  output logic [LANE_W-1:0]        data_out,
  output logic                     data_empty
);
  localparam int SAW = $clog2(DEPTH);
  localparam int FAW = $clog2(FIFO_DEPTH);

  typedef struct packed {
    logic [SAW-1:0]     sample;
    logic [LANE_AW-1:0] lane;
  } raddr_t;

  raddr_t             af_out;
  logic               af_empty;
  logic               issue;
  logic               pending;
  logic [LANE_AW-1:0] lane_q;
  logic [LANE_W-1:0]  rdata [N_LANES];
  logic [FAW:0]       df_count;
  logic               df_full;

  for (genvar g = 0; g < N_LANES; g++) begin : g_lane
    dpram #(.W(LANE_W), .DEPTH(DEPTH)) u_ram (
      .wclk (clk_adc), .we (we), .waddr (wsample), .wdata (wlanes[g]),
      .rclk (clk_sys), .re (issue), .raddr (af_out.sample), .rdata (rdata[g])
    );
  end

  sync_fifo #(.W($bits(raddr_t)), .DEPTH(FIFO_DEPTH)) u_addr_fifo (
    .clk (clk_sys), .rst_n (rst_sys_n),
    .push (addr_push), .wdata ({addr_sample, addr_lane}),
    .pop (issue), .rdata (af_out),
    .full (addr_full), .empty (af_empty), .count ()
  );

  // issue a read only if the word can be stored when it arrives
  assign issue = !af_empty && ((df_count + (FAW+1)'(pending)) < (FAW+1)'(FIFO_DEPTH));

  always_ff @(posedge clk_sys) begin
    if (!rst_sys_n) begin
      pending <= 1'b0;
      lane_q  <= '0;
    end else begin
      pending <= issue;
      if (issue) lane_q <= af_out.lane;
    end
  end

  sync_fifo #(.W(LANE_W), .DEPTH(FIFO_DEPTH)) u_data_fifo (
    .clk (clk_sys), .rst_n (rst_sys_n),
    .push (pending), .wdata (rdata[lane_q]),
    .pop (data_pop), .rdata (data_out),
    .full (df_full), .empty (data_empty), .count (df_count)
  );

  assert property (@(posedge clk_sys) disable iff (!rst_sys_n) !(pending && df_full))
    else $error("acq_buffer: read word arrived at a full data FIFO");
endmodule
