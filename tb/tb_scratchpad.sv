// tb_scratchpad: writes random words to a small scratchpad and reads them back
// through both read ports, checking the one-cycle read latency and that a
// read port holds its data while not enabled.
module tb_scratchpad;
  localparam int DEPTH = 64, W = 32;
  logic clk = 0, rst_n = 0;
  logic rd_en, wr_en, rd2_en;
  logic [5:0] rd_addr, wr_addr, rd2_addr;
  logic [W-1:0] rd_data, wr_data, rd2_data;
  logic [W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  scratchpad #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL got %h exp %h", got, exp); end
  endtask

  initial begin
    {rd_en, wr_en, rd2_en, rd_addr, wr_addr, rd2_addr, wr_data} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(rd_data, '0);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 6'(a); wr_data = $urandom; ref_mem[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      logic [5:0] a1, a2;
      a1 = 6'($urandom); a2 = 6'($urandom);
      rd_en = 1; rd_addr = a1; rd2_en = 1; rd2_addr = a2;
      // simultaneous write to another address
      wr_en = 1; wr_addr = 6'($urandom); wr_data = $urandom;
      if (wr_addr == a1 || wr_addr == a2) wr_en = 0;
      @(negedge clk);
      if (wr_en) ref_mem[wr_addr] = wr_data;
      chk(rd_data, ref_mem[a1]);
      chk(rd2_data, ref_mem[a2]);
      rd_en = 0; rd2_en = 0; wr_en = 0; rd_addr = 6'($urandom);
      @(negedge clk);
      chk(rd_data, ref_mem[a1]);   // held
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
