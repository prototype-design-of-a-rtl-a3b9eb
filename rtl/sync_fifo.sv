// sync_fifo: first-in first-out buffer, one clock.
//
// The PCIe side of the acquisition memory uses two of these: one queues
// read addresses from the DMA engine, the other queues the words read out
// for it. DEPTH entries (a power of two) in a register array with read and
// write pointers one bit wider than the address, so full and empty are told
// apart. The head entry is visible on rdata whenever empty is low
// (first-word fall-through); pop removes it. A push when full or a pop
// when empty is a protocol error, checked by assertions and ignored.
// Interface: push/wdata, pop -> rdata, full, empty, count. Timing: an entry
// pushed at one edge is on rdata after that edge.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [W-1:0]           wdata,
  input  logic                   pop,
  output logic [W-1:0]           rdata,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          do_push, do_pop;

  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push & ~full;
  assign do_pop  = pop & ~empty;
  assign rdata   = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wptr[AW-1:0]] <= wdata;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");

  initial assert ((1 << AW) == DEPTH) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
