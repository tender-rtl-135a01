// tb_index_buffer: checks the double buffering of the index buffer. Lines are
// written to the shadow bank while entries are read from the active bank; after
// a swap the newly written order must be visible and the old one hidden.
module tb_index_buffer;
  import tender_pkg::*;
  localparam int DEPTH = 64, LINE_W = 64;   // 4 entries per line, 16 lines
  logic clk = 0, rst_n = 0;
  logic swap, active_bank, wr_en, rd_en;
  logic [3:0] wr_line;
  logic [LINE_W-1:0] wr_data;
  logic [5:0] rd_addr;
  logic [15:0] rd_data;
  logic [15:0] ref_b [2][DEPTH];
  int checks = 0, failures = 0;

  index_buffer #(.DEPTH(DEPTH), .LINE_W(LINE_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int bank);   // write all lines of the shadow bank
    for (int l = 0; l < DEPTH/4; l++) begin
      wr_en = 1; wr_line = 4'(l);
      for (int e = 0; e < 4; e++) begin
        wr_data[e*16 +: 16] = 16'($urandom);
        ref_b[bank][l*4+e] = wr_data[e*16 +: 16];
      end
      // read the active bank at the same time
      rd_en = 1; rd_addr = 6'($urandom);
      @(negedge clk);
      checks++;
      if (rd_data !== ref_b[1-bank][rd_addr]) begin
        failures++; $display("FAIL concurrent read bank %0d addr %0d", 1-bank, rd_addr);
      end
    end
    wr_en = 0;
  endtask

  task automatic check_all(input int bank);
    checks++;
    if (active_bank !== 1'(bank)) begin failures++; $display("FAIL active bank"); end
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = 6'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== ref_b[bank][a]) begin
        failures++; $display("FAIL bank %0d entry %0d got %h exp %h", bank, a, rd_data, ref_b[bank][a]);
      end
    end
  endtask

  initial begin
    {swap, wr_en, rd_en, wr_line, rd_addr} = '0; wr_data = '0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < DEPTH; a++) ref_b[b][a] = 'x;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // bank 0 is active after reset; program bank 1, then swap
    for (int l = 0; l < DEPTH/4; l++) begin
      wr_en = 1; wr_line = 4'(l);
      for (int e = 0; e < 4; e++) begin
        wr_data[e*16 +: 16] = 16'($urandom); ref_b[1][l*4+e] = wr_data[e*16 +: 16];
      end
      @(negedge clk);
    end
    wr_en = 0;
    swap = 1; @(negedge clk); swap = 0;
    check_all(1);
    fill(0);                          // shadow is bank 0, reads from bank 1
    swap = 1; @(negedge clk); swap = 0;
    check_all(0);
    fill(1);
    swap = 1; @(negedge clk); swap = 0;
    check_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
