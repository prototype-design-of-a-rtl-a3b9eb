// cic_filter: decimating CIC average of one REF component (I or Q).
//
// The reference channel (AC6) needs a slowly varying, low-noise amplitude;
// its demodulated and FIR-smoothed I and Q each pass this cascaded
// integrator-comb filter: STAGES integrators at the input rate, decimation
// by R, STAGES combs (differential delay 1) at the output rate. Its DC gain
// R^STAGES is a power of two for R a power of two and is removed by an
// exact arithmetic shift, so dout is the average of the input in W bits.
// Interface: in_valid/din -> out_valid/dout, one output per R accepted
// inputs. Timing: out_valid pulses one cycle after every R-th accepted
// input. The registers are wide enough (W + STAGES*log2(R) bits) for the
// modular arithmetic of the integrators to be exact.
// The use of a CIC on the REF channel follows the description; STAGES = 3
// and R = 64 are this design's choices.
module cic_filter #(
  parameter int W      = llrf_pkg::IQ_W,
  parameter int STAGES = 3,
  parameter int R      = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] din,
  output logic                out_valid,
  output logic signed [W-1:0] dout
);
  localparam int LR = $clog2(R);
  localparam int GW = W + STAGES * LR;

  logic signed [GW-1:0] integ [STAGES];
  logic signed [GW-1:0] comb_d [STAGES];
  logic signed [GW-1:0] c [STAGES+1];
  logic [LR-1:0]        dcnt;
  logic                 dec;

  // integrators
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) integ[s] <= '0;
      dcnt <= '0;
    end else if (in_valid) begin
      integ[0] <= integ[0] + GW'(din);
      for (int s = 1; s < STAGES; s++) integ[s] <= integ[s] + integ[s-1];
      dcnt <= dcnt + 1'b1;
    end
  end

  assign dec = in_valid && (dcnt == LR'(R - 1));

  // combs, evaluated once per R inputs on the last integrator's value
  always_comb begin
    c[0] = integ[STAGES-1];
    for (int s = 0; s < STAGES; s++) c[s+1] = c[s] - comb_d[s];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) comb_d[s] <= '0;
      dout      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= dec;
      if (dec) begin
        for (int s = 0; s < STAGES; s++) comb_d[s] <= c[s];
        dout <= W'(c[STAGES] >>> (STAGES * LR));
      end
    end
  end

  initial assert (R >= 2 && (1 << LR) == R)
    else $error("cic_filter: R must be a power of two");
endmodule
