// tb_threshold_judge: checks the reflected-power interlock: no trip while
// every sample is at or below the threshold; the first sample above it
// opens the RF switch on the next edge and latches; clear does nothing
// while the power is still above the threshold and re-closes the switch
// once it is below; RF enable off keeps the switch open; trips are
// counted once each.
module tb_threshold_judge;
  import llrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, rf_enable = 1'b1, clear = 1'b0;
  adc_t dc = '0, threshold = 16'sd20000;
  logic tripped, rf_switch_on;
  logic [15:0] trip_count;
  int checks = 0, failures = 0;
  int trips = 0;

  threshold_judge dut (
    .clk (clk), .rst_n (rst_n), .dc (dc), .threshold (threshold), .rf_enable (rf_enable),
    .clear (clear), .tripped (tripped), .rf_switch_on (rf_switch_on), .trip_count (trip_count)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input adc_t v, input bit clr, input bit exp_tripped, input bit exp_on);
    @(negedge clk);
    dc = v; clear = clr;
    @(posedge clk); #1;
    clear = 1'b0;
    checks++;
    if (tripped !== exp_tripped || rf_switch_on !== exp_on) begin
      failures++;
      $display("FAIL: dc=%0d clr=%0b -> tripped=%0b on=%0b, expected %0b %0b", v, clr, tripped,
               rf_switch_on, exp_tripped, exp_on);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 20; r++) begin
      threshold = adc_t'($urandom_range(1000, 30000));
      rf_enable = 1'b1;
      // below or at the threshold: stays closed
      for (int n = 0; n < 50; n++)
        step(adc_t'($signed($urandom_range(0, 32768 + int'(threshold))) - 32768), 0, 0, 1);
      step(threshold, 0, 0, 1);
      // one sample above: opens and latches
      step(threshold + 1, 0, 1, 0);
      trips++;
      for (int n = 0; n < 10; n++) step(adc_t'($urandom_range(0, int'(threshold))), 0, 1, 0);
      // clear while still above: stays open
      step(threshold + adc_t'($urandom_range(1, 32767 - int'(threshold))), 1, 1, 0);
      // clear below the threshold: closes again
      step(threshold - 1, 1, 0, 1);
      // RF enable off keeps it open without a trip
      rf_enable = 1'b0;
      step(adc_t'(0), 0, 0, 0);
      rf_enable = 1'b1;
      step(adc_t'(0), 0, 0, 1);
    end
    checks++;
    if (trip_count != 16'(trips)) begin
      failures++;
      $display("FAIL: trip_count=%0d expected %0d", trip_count, trips);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
