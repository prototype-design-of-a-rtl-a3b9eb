// tb_dpram: writes random words at random addresses with a 117.36 MHz
// write clock and reads them back with an unrelated 125 MHz read clock,
// comparing with a testbench copy of the memory; also checks the one-cycle
// read latency and that a read without re keeps the old rdata.
module tb_dpram;
  localparam int W = 36, DEPTH = 256, AW = 8;
  logic wclk = 1'b0, rclk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  dpram #(.W(W), .DEPTH(DEPTH)) dut (
    .wclk (wclk), .we (we), .waddr (waddr), .wdata (wdata),
    .rclk (rclk), .re (re), .raddr (raddr), .rdata (rdata)
  );

  always #4.26 wclk = ~wclk;
  always #4.0  rclk = ~rclk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // phase 1: fill every address, plus random overwrites
    for (int n = 0; n < DEPTH + 600; n++) begin
      @(negedge wclk);
      we    = ($urandom_range(0, 3) != 0) || n < DEPTH;
      waddr = (n < DEPTH) ? AW'(n) : AW'($urandom);
      wdata = {4'($urandom), 32'($urandom)};
      @(posedge wclk);
      if (we) begin
        model[waddr] = wdata;
        written[waddr] = 1'b1;
      end
    end
    @(negedge wclk);
    we = 1'b0;
    // phase 2: read back on the other clock
    for (int n = 0; n < 1000; n++) begin
      automatic logic [AW-1:0] a = AW'($urandom);
      automatic logic [W-1:0] held;
      @(negedge rclk);
      raddr = a; re = 1'b1;
      @(posedge rclk); #0.5;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL: addr %0d: %h expected %h", a, rdata, model[a]);
      end
      held = rdata;
      @(negedge rclk);
      raddr = a + 1'b1; re = 1'b0;
      @(posedge rclk); #0.5;
      checks++;
      if (rdata !== held) begin
        failures++;
        $display("FAIL: rdata changed without re");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
