// tb_acq_buffer: writes a record of random words into all lanes on the ADC
// clock, then reads it back on the system clock through the address and
// data FIFOs, with addresses in random order and random stalls on both
// the address and the data side. Checks every word and its order, the
// back-pressure (the address FIFO reports full and no word is lost), and
// the 3-edge latency from an address push into idle FIFOs to the word.
module tb_acq_buffer;
  import llrf_pkg::*;
  localparam int DEPTH = 64, FD = 4, SAW = 6;
  logic clk_adc = 1'b0, clk_sys = 1'b0, rst_sys_n = 1'b0;
  logic we = 1'b0;
  logic [SAW-1:0] wsample = '0;
  logic [LANE_W-1:0] wlanes [N_LANES];
  logic addr_push = 1'b0, addr_full, data_pop = 1'b0, data_empty;
  logic [SAW-1:0] addr_sample = '0;
  logic [LANE_AW-1:0] addr_lane = '0;
  logic [LANE_W-1:0] data_out;
  logic [LANE_W-1:0] model [DEPTH][N_LANES];
  logic [LANE_W-1:0] expq [$];
  int checks = 0, failures = 0, n_full = 0, got = 0;

  acq_buffer #(.DEPTH(DEPTH), .FIFO_DEPTH(FD)) dut (
    .clk_adc (clk_adc), .we (we), .wsample (wsample), .wlanes (wlanes),
    .clk_sys (clk_sys), .rst_sys_n (rst_sys_n),
    .addr_push (addr_push), .addr_sample (addr_sample), .addr_lane (addr_lane),
    .addr_full (addr_full), .data_pop (data_pop), .data_out (data_out), .data_empty (data_empty)
  );

  always #4.26 clk_adc = ~clk_adc;
  always #4.0  clk_sys = ~clk_sys;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LANE_W-1:0] rnd();
    return {4'($urandom), 32'($urandom)};
  endfunction

  // data side: pop with random stalls, compare in order
  bit reading = 0;
  always @(negedge clk_sys) begin
    if (reading) begin
      data_pop = !data_empty && ($urandom_range(0, 3) == 0);
      if (data_pop) begin
        // the head word is taken at the next rising edge
        checks++;
        if (expq.size() == 0 || data_out !== expq[0]) begin
          failures++;
          $display("FAIL: word %0d: got %h", got, data_out);
        end
        if (expq.size() > 0) void'(expq.pop_front());
        got++;
      end
    end
  end

  initial begin
    int lat;
    for (int g = 0; g < N_LANES; g++) wlanes[g] = '0;
    repeat (3) @(posedge clk_sys);
    rst_sys_n = 1'b1;
    // write one record
    for (int n = 0; n < DEPTH; n++) begin
      @(negedge clk_adc);
      we = 1'b1; wsample = SAW'(n);
      for (int g = 0; g < N_LANES; g++) begin
        wlanes[g] = rnd();
        model[n][g] = wlanes[g];
      end
    end
    @(negedge clk_adc);
    we = 1'b0;
    for (int g = 0; g < N_LANES; g++) wlanes[g] = rnd();   // not written
    // latency of a single read into idle FIFOs
    @(negedge clk_sys);
    addr_push = 1'b1; addr_sample = 6'd5; addr_lane = 4'd3;
    @(posedge clk_sys); #0.5;
    addr_push = 1'b0;
    lat = 1;
    while (data_empty && lat < 20) begin
      @(posedge clk_sys); #0.5;
      lat++;
    end
    checks++;
    if (lat != 3 || data_out !== model[5][3]) begin
      failures++;
      $display("FAIL: single read: latency %0d, data %h expected %h", lat, data_out, model[5][3]);
    end
    @(negedge clk_sys);
    data_pop = 1'b1;
    @(negedge clk_sys);
    data_pop = 1'b0;
    // bulk read-out in random order with back-pressure
    reading = 1;
    for (int n = 0; n < 600; n++) begin
      automatic int s = $urandom_range(0, DEPTH - 1);
      automatic int g = $urandom_range(0, N_LANES - 1);
      @(negedge clk_sys);
      while (addr_full) begin
        n_full++;
        addr_push = 1'b0;
        @(negedge clk_sys);
      end
      addr_push = 1'b1; addr_sample = SAW'(s); addr_lane = LANE_AW'(g);
      expq.push_back(model[s][g]);
      @(posedge clk_sys); #0.5;
      addr_push = 1'b0;
    end
    while (expq.size() > 0 && got < 2000) @(posedge clk_sys);
    repeat (10) @(posedge clk_sys);
    checks++;
    if (got != 600 || n_full == 0 || !data_empty) begin
      failures++;
      $display("FAIL: got %0d words, address FIFO full %0d times", got, n_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
