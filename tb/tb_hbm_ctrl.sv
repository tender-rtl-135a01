// tb_hbm_ctrl: runs loads into the input scratchpad, the weight scratchpad and
// the index buffer, and a store back to HBM, against the HBM2 model with
// random back pressure. Every write the controller makes on its local ports
// is compared with the HBM contents, every stored beat with the scratchpad
// model, and the done pulse and the cycle count of a load (one beat per
// accepted request, LAT cycles of latency) are checked.
module tb_hbm_ctrl;
  import tender_pkg::*;
  localparam int W = 64, SPM_AW = 8, IDX_LW = 6, LAT = 6;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done;
  dma_cmd_t cmd;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [W-1:0] mem_req_wdata, mem_rsp_rdata;
  logic spm_in_wr_en, spm_w_wr_en, spm_rd_en, idx_wr_en;
  logic [SPM_AW-1:0] spm_wr_addr, spm_rd_addr;
  logic [W-1:0] spm_wr_data, spm_rd_data, idx_wr_data;
  logic [IDX_LW-1:0] idx_wr_line;
  int checks = 0, failures = 0;

  hbm_ctrl #(.W(W), .SPM_AW(SPM_AW), .IDX_LW(IDX_LW)) dut (.*);
  hbm2_model #(.W(W), .DEPTH(1024), .LAT(LAT), .STALL_PCT(25)) u_hbm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] spm_in [256], spm_w [256], idxb [64];
  int n_in, n_w, n_idx;
  always_ff @(posedge clk) begin
    if (spm_in_wr_en) begin spm_in[spm_wr_addr] <= spm_wr_data; n_in <= n_in + 1; end
    if (spm_w_wr_en)  begin spm_w[spm_wr_addr]  <= spm_wr_data; n_w  <= n_w + 1; end
    if (idx_wr_en)    begin idxb[idx_wr_line]   <= idx_wr_data; n_idx <= n_idx + 1; end
    if (spm_rd_en)    spm_rd_data <= spm_in[spm_rd_addr];
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask

  task automatic xfer(dma_op_e op, int haddr, int laddr, int len, output int cycles);
    cmd.op = op; cmd.hbm_addr = 32'(haddr); cmd.loc_addr = 16'(laddr); cmd.len = 16'(len);
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done && cycles < 5000) begin @(negedge clk); cycles++; end
    chk("cmd_ready after done", 0, int'(cmd_ready));
    @(negedge clk);
    chk("cmd_ready idle", 1, int'(cmd_ready));
  endtask

  initial begin
    int cyc;
    cmd_valid = 0; cmd = '0; n_in = 0; n_w = 0; n_idx = 0;
    for (int i = 0; i < 1024; i++) u_hbm.mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    xfer(DMA_LOAD_IN, 100, 10, 40, cyc);
    for (int i = 0; i < 40; i++) chk($sformatf("in %0d", i), spm_in[10+i], u_hbm.mem[100+i]);
    chk("in beats", n_in, 40);
    // 40 requests, each cycle ready with prob 0.75, + latency: at least 40 + LAT
    checks++; if (cyc < 40 + LAT) begin failures++; $display("FAIL load too fast %0d", cyc); end
    xfer(DMA_LOAD_W, 300, 0, 33, cyc);
    for (int i = 0; i < 33; i++) chk($sformatf("w %0d", i), spm_w[i], u_hbm.mem[300+i]);
    chk("w beats", n_w, 33);
    chk("in untouched", n_in, 40);
    xfer(DMA_LOAD_IDX, 500, 5, 12, cyc);
    for (int i = 0; i < 12; i++) chk($sformatf("idx %0d", i), idxb[5+i], u_hbm.mem[500+i]);
    chk("idx beats", n_idx, 12);
    for (int i = 0; i < 20; i++) spm_in[60+i] = {$urandom, $urandom};
    xfer(DMA_STORE_IN, 700, 60, 20, cyc);
    repeat (2) @(negedge clk);
    for (int i = 0; i < 20; i++) chk($sformatf("store %0d", i), u_hbm.mem[700+i], spm_in[60+i]);
    checks++; if (u_hbm.stalls == 0) begin failures++; $display("FAIL no back pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
