// tb_output_buffer: fills a small output buffer with random rows and reads
// them back while new rows are being written, checking data and latency.
module tb_output_buffer;
  localparam int DEPTH = 32, W = 8 * 32;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en;
  logic [4:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  logic [W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  output_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    {wr_en, rd_en, wr_addr, rd_addr} = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a); wr_data = rnd(); ref_mem[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      logic [4:0] ra;
      ra = 5'($urandom);
      rd_en = 1; rd_addr = ra;
      wr_en = 1; wr_addr = ra + 5'd1; wr_data = rnd();
      @(negedge clk);
      ref_mem[wr_addr] = wr_data;
      checks++;
      if (rd_data !== ref_mem[ra]) begin failures++; $display("FAIL row %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
