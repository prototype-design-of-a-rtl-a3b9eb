// tb_sync_fifo: random pushes and pops (never past full or empty) against
// a queue model; checks the head word, full, empty and count every cycle,
// and that the FIFO fills up and drains completely at least once.
module tb_sync_fifo;
  localparam int W = 20, DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0;
  logic [W-1:0] wdata = '0, rdata;
  logic full, empty;
  logic [$clog2(DEPTH):0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .clk (clk), .rst_n (rst_n), .push (push), .wdata (wdata), .pop (pop),
    .rdata (rdata), .full (full), .empty (empty), .count (count)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      automatic int bias = (n / 200) % 2;   // alternate filling and draining phases
      @(negedge clk);
      checks++;
      if (count != ($clog2(DEPTH)+1)'(q.size()) || full != (q.size() == DEPTH) ||
          empty != (q.size() == 0) || (q.size() > 0 && rdata !== q[0])) begin
        failures++;
        $display("FAIL: n=%0d count=%0d model=%0d full=%0b empty=%0b rdata=%h", n, count,
                 q.size(), full, empty, rdata);
      end
      if (full) n_full++;
      if (empty) n_empty++;
      push  = !full && ($urandom_range(0, 9) < (bias ? 7 : 3));
      pop   = !empty && ($urandom_range(0, 9) < (bias ? 3 : 7));
      wdata = W'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin
      failures++;
      $display("FAIL: full seen %0d times, empty %0d times", n_full, n_empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
