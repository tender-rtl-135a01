// tb_exe_ctrl: checks the Execution Controller against simple memory models.
// An index list (a random permutation) and per-channel tags in both
// scratchpads let the testbench identify every step the controller forwards
// to the array: the steps must be the channels in index-list order, with one
// zero bubble carrying rescale before every split position, clear before the
// stream, drain for DIM cycles after a 2*(DIM-1)-cycle flush, and done after
// exactly clear + K + splits + 2 + 2*(DIM-1) + (DIM + 1) cycles.
module tb_exe_ctrl;
  import tender_pkg::*;
  localparam int D = 8, SPM_AW = 8, IDX_AW = 7, OB_AW = 5;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  tile_cfg_t cfg;
  logic idx_rd_en, spm_rd_en;
  logic [IDX_AW-1:0] idx_rd_addr;
  logic [15:0] idx_rd_data;
  logic [SPM_AW-1:0] spm_in_addr, spm_w_addr;
  logic [D*4-1:0] spm_in_data, spm_w_data, msa_in_vec, msa_w_vec;
  prec_e msa_mode;
  logic msa_clear, msa_drain, msa_rescale;
  logic [OB_AW-1:0] out_base;
  int checks = 0, failures = 0;

  exe_ctrl #(.DIM(D), .SPM_AW(SPM_AW), .IDX_AW(IDX_AW), .OB_AW(OB_AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory models: one cycle read latency
  logic [15:0] idx_mem [128];
  always_ff @(posedge clk) if (idx_rd_en) idx_rd_data <= idx_mem[idx_rd_addr];
  // scratchpad word at address a carries tag a (input) and ~a (weight)
  always_ff @(posedge clk) if (spm_rd_en) begin
    spm_in_data <= 32'(spm_in_addr) | 32'h1000_0000;
    spm_w_data  <= ~(32'(spm_w_addr) | 32'h1000_0000);
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic run(int K, int ns, int sp [4], logic clr, logic drn);
    int steps [$];        // observed: tag of each step, -1 for bubble
    int exp_steps [$];
    int t, t_done, n_clear, n_drain, first_drain, last_step;
    int si;
    // random permutation of 0..K-1 in idx_mem
    for (int i = 0; i < K; i++) idx_mem[i] = 16'(i);
    for (int i = K - 1; i > 0; i--) begin
      int j; logic [15:0] tmp;
      j = $urandom_range(0, i);
      tmp = idx_mem[i]; idx_mem[i] = idx_mem[j]; idx_mem[j] = tmp;
    end
    si = 0;
    for (int p = 0; p < K; p++) begin
      if (si < ns && sp[si] == p) begin exp_steps.push_back(-1); si++; end
      exp_steps.push_back(20 + int'(idx_mem[p]));   // in_base = 20
    end
    cfg = '0;
    cfg.mode = MODE_INT4; cfg.clear_acc = clr; cfg.drain = drn;
    cfg.num_ch = 16'(K); cfg.num_splits = 5'(ns);
    for (int i = 0; i < 4; i++) cfg.split_pos[i] = 16'(sp[i]);
    cfg.in_base = 16'd20; cfg.w_base = 16'd20; cfg.out_base = 16'd3;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t = 0; t_done = -1; n_clear = 0; n_drain = 0; first_drain = -1; last_step = -1;
    while (t_done < 0 && t < 1000) begin
      t++;
      if (msa_clear) n_clear++;
      if (msa_drain) begin n_drain++; if (first_drain < 0) first_drain = t; end
      if (msa_rescale) begin
        steps.push_back(-1);
        last_step = t;
        chk("bubble operands zero", int'(msa_in_vec | msa_w_vec), 0);
      end else if (msa_in_vec != 0) begin
        steps.push_back(int'(msa_in_vec & 32'h0fff_ffff));
        chk("weight tag", int'(~msa_w_vec & 32'h0fff_ffff), int'(msa_in_vec & 32'h0fff_ffff));
        last_step = t;
      end
      if (done) t_done = t;
      @(negedge clk);
    end
    chk("step count", steps.size(), exp_steps.size());
    for (int i = 0; i < exp_steps.size() && i < steps.size(); i++)
      chk($sformatf("step %0d", i), steps[i], exp_steps[i]);
    chk("clear cycles", n_clear, clr ? 1 : 0);
    chk("drain cycles", n_drain, drn ? D : 0);
    if (drn) chk("flush before drain", first_drain - last_step, 2 * (D - 1) + 1);
    chk("latency", t_done, (clr ? 1 : 0) + K + ns + 2 + 2 * (D - 1) + (drn ? D + 1 : 0) + 1);
    chk("out_base", int'(out_base), 3);
  endtask

  initial begin
    int sp [4];
    start = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    sp = '{0, 0, 0, 0};  run(16, 0, sp, 1, 1);
    sp = '{2, 5, 11, 0}; run(16, 3, sp, 1, 1);
    sp = '{0, 1, 7, 8};  run(9, 4, sp, 0, 0);
    sp = '{4, 0, 0, 0};  run(40, 1, sp, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
