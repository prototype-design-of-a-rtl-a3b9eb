// fir_filter: FIR smoothing of one demodulated I or Q stream.
//
// After demodulation each of I and Q passes a TAPS-tap direct-form FIR
// filter: a delay line of the last TAPS inputs, one multiplier per tap and
// an adder tree, scaled by 2^-SHIFT, rounded and saturated to W bits. The
// default coefficients make a 13-tap moving average (each tap
// round(2^16/13) = 5041, DC gain 65533/65536). A 13-sample boxcar has its
// nulls at multiples of f_CLK/13 and so removes the residue of the non-IQ
// demodulator at twice the IF (6/13 of f_CLK).
// Interface: in_valid/din -> out_valid/dout; the delay line advances only
// on in_valid. Timing: 2 cycles from din to the dout that first includes
// it.
// The tap count (13) follows the description; the coefficients are not
// given there and the moving average is this design's choice.
module fir_filter #(
  parameter int W     = llrf_pkg::IQ_W,
  parameter int TAPS  = 13,
  parameter int CW    = 18,
  parameter int SHIFT = 16,
  parameter logic signed [CW-1:0] COEF [TAPS] = '{default: 18'sd5041}
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] din,
  output logic                out_valid,
  output logic signed [W-1:0] dout
);
  localparam int AW = W + CW + $clog2(TAPS) + 1;
  localparam logic signed [AW-1:0] HALF = AW'(1) <<< (SHIFT - 1);
  localparam logic signed [AW-1:0] MAXV = (AW'(1) <<< (W - 1)) - 1;
  localparam logic signed [AW-1:0] MINV = -(AW'(1) <<< (W - 1));

  logic signed [W-1:0]  taps [TAPS];
  logic signed [AW-1:0] sum, scaled;
  logic                 v1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) taps[k] <= '0;
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        taps[0] <= din;
        for (int k = 1; k < TAPS; k++) taps[k] <= taps[k-1];
      end
    end
  end

  always_comb begin
    sum = '0;
    for (int k = 0; k < TAPS; k++) sum += AW'(taps[k]) * AW'(COEF[k]);
    scaled = (sum + HALF) >>> SHIFT;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dout      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        if (scaled > MAXV)      dout <= MAXV[W-1:0];
        else if (scaled < MINV) dout <= MINV[W-1:0];
        else                    dout <= scaled[W-1:0];
      end
    end
  end
endmodule
