// tb_msa: self-checking test of the Multi-Scale Systolic Array at DIM = 8.
// Streams random INT4 and INT8 operand tiles split into channel groups, with
// one rescale bubble between groups, drains the array and compares every
// output with the reference recurrence A(i+1) = 2*A(i) + P(i+1) computed in
// the testbench. Also checks the number of drain beats and the drain latency.
module tb_msa;
  import tender_pkg::*;
  localparam int D = 8;
  localparam int KMAX = 40;
  logic clk = 0, rst_n = 0;
  prec_e mode;
  logic clear, drain, rescale, out_valid;
  logic [D*4-1:0] in_vec, w_vec;
  logic [$clog2(D)-1:0] out_row;
  logic [D*32-1:0] out_data;
  int checks = 0, failures = 0;

  msa #(.DIM(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a [D][KMAX];     // a[row][k]  (element values, 4- or 8-bit signed)
  int w [KMAX][D];     // w[k][col]
  int exp_out [D][D];
  int got_out [D][D];
  int beats;

  task automatic run(input prec_e m, input int K, input int nsplit, input int sp [4]);
    int n, s, si;
    n = (m == MODE_INT4) ? D : D/2;
    for (int r = 0; r < n; r++) for (int k = 0; k < K; k++)
      a[r][k] = (m == MODE_INT4) ? $urandom_range(0, 15) - 8 : $urandom_range(0, 255) - 128;
    for (int k = 0; k < K; k++) for (int c = 0; c < n; c++)
      w[k][c] = (m == MODE_INT4) ? $urandom_range(0, 15) - 8 : $urandom_range(0, 255) - 128;
    // reference
    for (int r = 0; r < n; r++) for (int c = 0; c < n; c++) begin
      int acc;
      acc = 0; si = 0;
      for (int k = 0; k < K; k++) begin
        if (si < nsplit && sp[si] == k) begin acc = acc * 2; si++; end
        acc += a[r][k] * w[k][c];
      end
      exp_out[r][c] = acc;
    end
    // drive
    @(negedge clk);
    mode = m; clear = 1;
    @(negedge clk);
    clear = 0;
    si = 0;
    for (int k = 0; k < K; k++) begin
      if (si < nsplit && sp[si] == k) begin
        in_vec = '0; w_vec = '0; rescale = 1; si++;
        @(negedge clk);
        rescale = 0;
      end
      for (int l = 0; l < D; l++) begin
        if (m == MODE_INT4) begin
          in_vec[l*4 +: 4] = 4'(a[l][k]);
          w_vec[l*4 +: 4]  = 4'(w[k][l]);
        end
      end
      if (m == MODE_INT8)
        for (int l = 0; l < D/2; l++) begin
          in_vec[l*8 +: 8] = 8'(a[l][k]);
          w_vec[l*8 +: 8]  = 8'(w[k][l]);
        end
      @(negedge clk);
    end
    in_vec = '0; w_vec = '0;
    repeat (2*(D-1)) @(negedge clk);
    drain = 1;
    beats = 0;
    for (int t = 0; t < D; t++) begin
      @(negedge clk);
      if (out_valid) begin
        beats++;
        for (int c = 0; c < D; c++) got_out[out_row][c] = int'(out_data[c*32 +: 32]);
      end
    end
    drain = 0;
    @(negedge clk);
    if (out_valid) begin
      beats++;
      for (int c = 0; c < D; c++) got_out[out_row][c] = int'(out_data[c*32 +: 32]);
    end
    checks++;
    if (beats != n) begin failures++; $display("FAIL beats %0d exp %0d", beats, n); end
    for (int r = 0; r < n; r++) for (int c = 0; c < n; c++) begin
      checks++;
      if (got_out[r][c] != exp_out[r][c]) begin
        failures++;
        $display("FAIL mode %0d K %0d out[%0d][%0d] got %0d exp %0d", m, K, r, c, got_out[r][c], exp_out[r][c]);
      end
    end
    if (m == MODE_INT8)
      for (int r = 0; r < n; r++) for (int c = n; c < D; c++) begin
        checks++;
        if (got_out[r][c] != 0) failures++;
      end
  endtask

  initial begin
    int sp [4];
    mode = MODE_INT4; clear = 0; drain = 0; rescale = 0; in_vec = '0; w_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    sp = '{0, 0, 0, 0};
    run(MODE_INT4, 12, 0, sp);              // one group, no rescale
    sp = '{3, 7, 20, 0};
    run(MODE_INT4, 24, 3, sp);              // four groups
    sp = '{0, 1, 2, 30};
    run(MODE_INT4, 33, 4, sp);              // bubble first, back-to-back bubbles
    sp = '{5, 9, 0, 0};
    run(MODE_INT8, 16, 2, sp);              // INT8, three groups
    sp = '{1, 2, 3, 4};
    run(MODE_INT8, 10, 4, sp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
