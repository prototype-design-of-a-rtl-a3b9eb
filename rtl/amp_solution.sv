// amp_solution: "amplitude solution" of the averaged reference vector.
//
// From each averaged REF vector (I, Q) delivered by the CIC filters this
// block computes
//   amp   = floor(sqrt(I^2 + Q^2))          the average REF amplitude
//   recip = floor(2^RECIP_FRAC / amp)       1/A_ref for reference tracking
//   ref_ok = (amp >= ref_min)               the REF power state
// How: a small sequencer squares and adds I and Q, then runs a
// digit-by-digit square root (one result bit per cycle, IQ_W cycles) and a
// restoring division (one quotient bit per cycle, RECIP_FRAC+1 cycles).
// amp = 0 gives the largest recip, 2^(RECIP_FRAC+1)-1. A vector that arrives while the
// sequencer is busy is dropped and counted in overruns; with the CIC
// decimating by 64 the sequencer (50 cycles) is always free.
// Interface: in_valid/avg -> out_valid/amp/recip, and ref_ok, all
// registered and held between updates. Timing: out_valid pulses
// IQ_W + RECIP_FRAC + 2 cycles after in_valid.
// The description names the block and the role of 1/A_ref (eq. 3.3); the
// square root, division and status threshold are this design's own.
module amp_solution
  import llrf_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  iq_t                 avg,
  input  logic [IQ_W-1:0]     ref_min,
  output logic                out_valid,
  output logic [IQ_W-1:0]     amp,
  output logic [RECIP_W-1:0]  recip,
  output logic                ref_ok,
  output logic [15:0]         overruns
);
  localparam int RW = 2 * IQ_W;          // radicand width
  localparam int NQ = RECIP_FRAC + 1;    // quotient bits

  typedef enum logic [1:0] {S_IDLE, S_SQRT, S_DIV, S_DONE} state_t;
  state_t state;

  logic [RW-1:0]        op;      // radicand bits still to consume
  logic [IQ_W+1:0]      rem;     // square-root remainder
  logic [IQ_W-1:0]      root;
  logic [IQ_W-1:0]      drem;    // division remainder, always below root
  logic [NQ-1:0]        quo;
  logic [$clog2(NQ):0]  cnt;
  logic [IQ_W+3:0]      trial;
  logic [IQ_W+3:0]      rem_sh;
  logic [IQ_W:0]        drem_sh;

  // one square-root step: bring down two radicand bits, try (root<<2)|1
  assign rem_sh = {rem, op[RW-1 -: 2]};
  assign trial  = {2'b00, root, 2'b01};
  // one division step: numerator is 2^RECIP_FRAC, one bit set at the top
  assign drem_sh = {drem, (cnt == $bits(cnt)'(NQ - 1))};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op        <= '0;
      rem       <= '0;
      root      <= '0;
      drem      <= '0;
      quo       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      amp       <= '0;
      recip     <= '0;
      ref_ok    <= 1'b0;
      overruns  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && state != S_IDLE) overruns <= overruns + 1'b1;
      case (state)
        S_IDLE: if (in_valid) begin
          op    <= RW'(avg.i * avg.i) + RW'(avg.q * avg.q);
          rem   <= '0;
          root  <= '0;
          cnt   <= '0;
          state <= S_SQRT;
        end
        S_SQRT: begin
          op <= op << 2;
          if (rem_sh >= trial) begin
            rem  <= $bits(rem)'(rem_sh - trial);
            root <= {root[IQ_W-2:0], 1'b1};
          end else begin
            rem  <= $bits(rem)'(rem_sh);
            root <= {root[IQ_W-2:0], 1'b0};
          end
          if (cnt == $bits(cnt)'(IQ_W - 1)) begin
            cnt   <= $bits(cnt)'(NQ - 1);
            drem  <= '0;
            quo   <= '0;
            state <= S_DIV;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DIV: begin
          // root holds the finished amplitude during the division
          if (root == '0) begin
            quo <= '1;
          end else if (drem_sh >= {1'b0, root}) begin
            drem <= IQ_W'(drem_sh - {1'b0, root});
            quo  <= {quo[NQ-2:0], 1'b1};
          end else begin
            drem <= IQ_W'(drem_sh);
            quo  <= {quo[NQ-2:0], 1'b0};
          end
          if (cnt == '0) state <= S_DONE;
          else           cnt   <= cnt - 1'b1;
        end
        S_DONE: begin
          state     <= S_IDLE;
          out_valid <= 1'b1;
          amp       <= root;
          recip     <= quo;
          ref_ok    <= (root >= ref_min);
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
