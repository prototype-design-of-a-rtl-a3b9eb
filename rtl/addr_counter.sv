// addr_counter: the address counter started by the timing trigger.
//
// On start (the accepted trigger) the counter runs addr = 0, 1, ...,
// REC_LEN-1, one step per ADC clock, with active high, then stops. The same
// address writes one sample of every acquisition channel into the
// acquisition memory and reads one I/Q excitation word from the I/Q record
// memory, so acquisition and excitation share one time base referenced to
// the trigger. A start that arrives while a record is running is ignored.
// At the end, done pulses for one cycle and rec_count increments, which
// tells software that a complete record can be read.
// Interface: start (one-cycle pulse) -> addr, active, done, rec_count.
// Timing: addr = 0 with active = 1 on the cycle after start; active falls
// REC_LEN cycles later, with done high in that cycle.
// That a trigger starts the counter follows the design description; the
// record length and the retrigger rule are this design's choices.
module addr_counter #(
  parameter int REC_LEN = llrf_pkg::REC_LEN,
  parameter int CNT_W   = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic [$clog2(REC_LEN)-1:0] addr,
  output logic                       active,
  output logic                       done,
  output logic [CNT_W-1:0]           rec_count
);
  localparam int AW = $clog2(REC_LEN);
  localparam logic [AW-1:0] LAST = AW'(REC_LEN - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      addr      <= '0;
      active    <= 1'b0;
      done      <= 1'b0;
      rec_count <= '0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active <= 1'b1;
          addr   <= '0;
        end
      end else if (addr == LAST) begin
        active    <= 1'b0;
        done      <= 1'b1;
        rec_count <= rec_count + 1'b1;
      end else begin
        addr <= addr + 1'b1;
      end
    end
  end
endmodule
