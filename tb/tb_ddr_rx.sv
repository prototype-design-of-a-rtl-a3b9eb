// tb_ddr_rx: sends random 16-bit words over 8 double-data-rate lanes (even
// bits with the rising edge, odd bits with the falling edge) and checks
// that each word appears on q after the second rising edge.
module tb_ddr_rx;
  localparam int W = 16;
  logic clk = 1'b0;
  logic [W/2-1:0] ddr_d = '0;
  logic [W-1:0] q;
  logic [W-1:0] words [512];
  int checks = 0, failures = 0;

  ddr_rx #(.W(W)) dut (.clk (clk), .ddr_d (ddr_d), .q (q));

  always #4.26 clk = ~clk;

  function automatic logic [W/2-1:0] even_bits(input logic [W-1:0] w);
    for (int k = 0; k < W/2; k++) even_bits[k] = w[2*k];
  endfunction
  function automatic logic [W/2-1:0] odd_bits(input logic [W-1:0] w);
    for (int k = 0; k < W/2; k++) odd_bits[k] = w[2*k+1];
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 512; n++) words[n] = W'($urandom);
    @(negedge clk);
    for (int n = 0; n < 512; n++) begin
      #1 ddr_d = even_bits(words[n]);   // valid around rising edge n
      @(posedge clk);
      #1 ddr_d = odd_bits(words[n]);    // valid around the falling edge
      @(negedge clk);
      // word n-1 was completed at the rising edge just passed
      if (n >= 1) begin
        checks++;
        if (q !== words[n-1]) begin
          failures++;
          $display("FAIL: word %0d: got %h expected %h", n - 1, q, words[n-1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
