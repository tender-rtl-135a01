// tb_vpu: requantization jobs on random INT32 rows with random per-lane scale
// and bias, shift, ReLU and both precisions. Every word the VPU writes to the
// scratchpad is compared with a reference computed with 64-bit integers in the
// testbench; the job must stream one row per cycle and write row i exactly
// three cycles after reading it.
module tb_vpu;
  import tender_pkg::*;
  localparam int D = 8, OB_AW = 5, SPM_AW = 8;
  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [2:0] cfg_lane;
  logic signed [15:0] cfg_scale;
  logic signed [47:0] cfg_bias;
  logic cmd_valid, cmd_ready, done;
  vpu_cmd_t cmd;
  logic ob_rd_en, spm_wr_en;
  logic [OB_AW-1:0] ob_rd_addr;
  logic [D*32-1:0] ob_rd_data;
  logic [SPM_AW-1:0] spm_wr_addr;
  logic [D*4-1:0] spm_wr_data;
  int checks = 0, failures = 0;

  vpu #(.DIM(D), .OB_AW(OB_AW), .SPM_AW(SPM_AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [D*32-1:0] ob [32];
  always_ff @(posedge clk) if (ob_rd_en) ob_rd_data <= ob[ob_rd_addr];

  longint sc [D], bi [D];
  int cyc, rd_first, wr_first, n_wr, n_sat, n_relu;
  logic [D*4-1:0] got [256];
  logic           got_v [256];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ob_rd_en && rd_first < 0) rd_first <= cyc;
    if (spm_wr_en) begin
      if (wr_first < 0) wr_first <= cyc;
      got[spm_wr_addr] <= spm_wr_data;
      got_v[spm_wr_addr] <= 1'b1;
      n_wr <= n_wr + 1;
    end
  end

  function automatic longint ref_q(longint acc, longint s, longint b, int sh, bit relu, prec_e m);
    longint t, lo, hi;
    t = acc * s + b;
    if (relu && t < 0) t = 0;
    if (sh > 0) t = (t + (64'sd1 << (sh - 1))) >>> sh;
    lo = (m == MODE_INT4) ? -8 : -128;
    hi = (m == MODE_INT4) ? 7 : 127;
    if (t < lo) begin t = lo; n_sat++; end
    if (t > hi) begin t = hi; n_sat++; end
    return t;
  endfunction

  task automatic chk(string what, longint got_v_, longint exp);
    checks++;
    if (got_v_ != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got_v_, exp); end
  endtask

  task automatic job(prec_e m, bit relu, int sh, int src, int nrows, int dst);
    int lanes;
    lanes = (m == MODE_INT4) ? D : D/2;
    for (int l = 0; l < D; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_lane = 3'(l);
      cfg_scale = 16'($urandom_range(0, 2000) - 1000);
      cfg_bias  = 48'(longint'($urandom_range(0, 200000)) - 100000);
      sc[l] = longint'(cfg_scale); bi[l] = longint'(cfg_bias);
    end
    @(negedge clk); cfg_we = 0;
    for (int r = 0; r < nrows; r++)
      for (int l = 0; l < D; l++) ob[src + r][l*32 +: 32] = 32'($urandom_range(0, 4000) - 2000);
    for (int i = 0; i < 256; i++) got_v[i] = 0;
    rd_first = -1; wr_first = -1; n_wr = 0;
    cmd.mode = m; cmd.relu = relu; cmd.shift = 5'(sh);
    cmd.src_row = 16'(src); cmd.num_rows = 16'(nrows); cmd.dst_addr = 16'(dst);
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    chk("rows written", n_wr, nrows);
    chk("write latency", wr_first - rd_first, 3);
    for (int r = 0; r < nrows; r++) begin
      chk("written", int'(got_v[dst + r]), 1);
      for (int l = 0; l < lanes; l++) begin
        longint e, g;
        e = ref_q(longint'(signed'(ob[src + r][l*32 +: 32])), sc[l], bi[l], sh, relu, m);
        if (relu && e < 0) n_relu++;
        g = (m == MODE_INT4) ? longint'(signed'(got[dst + r][l*4 +: 4]))
                             : longint'(signed'(got[dst + r][l*8 +: 8]));
        chk($sformatf("row %0d lane %0d", r, l), g, e);
      end
    end
  endtask

  initial begin
    cfg_we = 0; cfg_lane = 0; cfg_scale = 0; cfg_bias = 0; cmd_valid = 0; cmd = '0;
    cyc = 0; n_sat = 0; n_relu = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    job(MODE_INT4, 0, 18, 0, 8, 10);
    job(MODE_INT4, 1, 19, 4, 12, 40);
    job(MODE_INT8, 0, 14, 2, 8, 100);
    job(MODE_INT8, 1, 15, 20, 5, 0);
    job(MODE_INT4, 0, 0, 1, 3, 200);     // shift 0: saturates
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    chk("relu never negative", n_relu, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
