// tb_amp_solution: sends averaged vectors and checks amp = floor(sqrt(I^2+Q^2))
// (verified as amp^2 <= I^2+Q^2 < (amp+1)^2), recip = floor(2^30/amp)
// (2^31-1 for amp = 0), the REF status against ref_min, the
// 50-cycle latency, and that a vector arriving while busy is dropped and
// counted as an overrun.
module tb_amp_solution;
  import llrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  iq_t avg = '0;
  logic [IQ_W-1:0] ref_min = 18'd1000;
  logic out_valid, ref_ok;
  logic [IQ_W-1:0] amp;
  logic [RECIP_W-1:0] recip;
  logic [15:0] overruns;
  int checks = 0, failures = 0;

  amp_solution dut (
    .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .avg (avg), .ref_min (ref_min),
    .out_valid (out_valid), .amp (amp), .recip (recip), .ref_ok (ref_ok), .overruns (overruns)
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int i, input int q, input bit overrun);
    longint r = longint'(i) * i + longint'(q) * q;
    longint a;
    int lat = 0;
    @(negedge clk);
    avg.i = IQ_W'(i);
    avg.q = IQ_W'(q);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    if (overrun) begin
      repeat (5) @(negedge clk);
      avg.i = 1; avg.q = 1;
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      lat = 6;
    end
    while (!out_valid) begin
      @(negedge clk);
      lat++;
      if (lat > 200) break;
    end
    a = longint'(amp);
    checks++;
    if (!(a * a <= r && (a + 1) * (a + 1) > r)) begin
      failures++;
      $display("FAIL: I=%0d Q=%0d amp=%0d", i, q, amp);
    end
    checks++;
    if (a == 0 ? (longint'(recip) != (longint'(1) << 31) - 1) : (longint'(recip) != (longint'(1) << 30) / a)) begin
      failures++;
      $display("FAIL: amp=%0d recip=%0d", amp, recip);
    end
    checks++;
    if (ref_ok !== (amp >= ref_min)) begin
      failures++;
      $display("FAIL: ref_ok=%0b amp=%0d", ref_ok, amp);
    end
    checks++;
    if (lat != IQ_W + RECIP_FRAC + 2) begin   // edges from the one sampling in_valid
      failures++;
      $display("FAIL: latency %0d", lat);
    end
  endtask

  initial begin
    int ov0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    one(0, 0, 0);
    one(131071, 131071, 0);
    one(-131072, -131072, 0);
    one(999, 0, 0);
    one(0, -1000, 0);
    one(3, 4, 0);
    for (int n = 0; n < 200; n++)
      one($signed($urandom_range(0, 262143)) - 131072, $signed($urandom_range(0, 262143)) - 131072, 0);
    for (int n = 0; n < 50; n++)
      one($signed($urandom_range(0, 4000)) - 2000, $signed($urandom_range(0, 4000)) - 2000, 0);
    ov0 = overruns;
    one(30000, -20000, 1);
    checks++;
    if (overruns != 16'(ov0 + 1)) begin
      failures++;
      $display("FAIL: overrun not counted (%0d)", overruns);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
