// tb_trigger_unit: drives asynchronous trigger pulses of random width and
// phase, with the trigger enable on and off, and checks: one trig_pulse of
// one cycle per enabled trigger and none while disabled, the latency of
// STAGES edges from the first edge that samples the trigger high, the
// gated trigger output and the trigger counter.
module tb_trigger_unit;
  localparam int STAGES = 2;
  logic clk = 1'b0, rst_n = 1'b0, trig_in = 1'b0, trig_en = 1'b0;
  logic trig_pulse, trig_out;
  logic [31:0] trig_count;
  int checks = 0, failures = 0;
  int cyc = 0, rise_cyc = -1, pulses = 0, expected = 0;

  trigger_unit #(.STAGES(STAGES)) dut (
    .clk (clk), .rst_n (rst_n), .trig_in (trig_in), .trig_en (trig_en),
    .trig_pulse (trig_pulse), .trig_out (trig_out), .trig_count (trig_count)
  );

  always #4.26 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle counter and the cycle at which trig_in is first sampled high
  logic trig_seen = 1'b0;
  always @(posedge clk) begin
    cyc++;
    if (trig_in && !trig_seen) begin
      rise_cyc  = cyc;
      trig_seen = 1'b1;
    end
    if (!trig_in) trig_seen = 1'b0;
    #1;
    if (rst_n && trig_pulse) begin
      pulses++;
      checks++;
      if (!trig_en || cyc - rise_cyc != STAGES) begin
        failures++;
        $display("FAIL: pulse at cycle %0d, trigger sampled at %0d, en=%0b", cyc, rise_cyc, trig_en);
      end
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      trig_en = (t % 4 != 3);
      repeat (3) @(posedge clk);
      #($urandom_range(1, 7));
      trig_in = 1'b1;
      if (trig_en) expected++;
      repeat ($urandom_range(STAGES + 1, 12)) @(posedge clk);
      // the gated level follows the trigger while enabled
      #1;
      checks++;
      if (trig_out !== trig_en) begin
        failures++;
        $display("FAIL: trig_out=%0b with trigger high, en=%0b", trig_out, trig_en);
      end
      #($urandom_range(1, 7));
      trig_in = 1'b0;
      repeat (STAGES + 3) @(posedge clk);
      #1;
      checks++;
      if (trig_out !== 1'b0) begin
        failures++;
        $display("FAIL: trig_out stuck high");
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (pulses != expected || trig_count != 32'(expected)) begin
      failures++;
      $display("FAIL: pulses=%0d count=%0d expected=%0d", pulses, trig_count, expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
