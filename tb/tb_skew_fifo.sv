// tb_skew_fifo: checks that lane i of the skewing FIFO is delayed by exactly
// i cycles, with random data on every lane every cycle.
module tb_skew_fifo;
  localparam int L = 8, W = 5;
  logic clk = 0, rst_n = 0;
  logic [L*W-1:0] d_i, d_o;
  logic [L*W-1:0] hist [64];
  int checks = 0, failures = 0;

  skew_fifo #(.LANES(L), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d_i = '0;
    for (int t = 0; t < 64; t++) hist[t] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      d_i = (L*W)'({$urandom, $urandom});
      hist[t] = d_i;
      #1;
      for (int l = 0; l < L; l++) begin
        logic [W-1:0] exp;
        exp = (t - l >= 0) ? hist[t-l][l*W +: W] : '0;
        checks++;
        if (d_o[l*W +: W] !== exp) begin
          failures++;
          $display("FAIL t=%0d lane %0d got %h exp %h", t, l, d_o[l*W +: W], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
