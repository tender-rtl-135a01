// tb_tender_top_full: the end-to-end test of tb_tender_top run on the
// accelerator with every parameter at its default: 64x64 array, 2x256 KB
// scratchpad, 2x16 KB index buffer, 64 KB output buffer, 64 VPU lanes.
//
// Each case builds a random activation tile and weight tile, a random channel
// compute order (the calibrated grouping) and random group split points,
// places them in HBM, and then drives the accelerator as a host would:
// program the index buffer (shadow bank) and swap, load the input and weight
// channels, run one or two array passes, requantize the results with the VPU
// and store them back to HBM. The INT32 results in the output buffer are
// compared with the reference recurrence A(i+1) = 2*A(i) + P(i+1) over the
// groups, and the INT4/INT8 words stored in HBM with the reference
// requantization. The second pass of a two-pass case has its index list
// loaded into the shadow bank while the first pass is running.
//
// Mechanisms counted (a case that never triggers one is a failure): rescale
// bubbles, INT4 passes, INT8 passes, index-buffer swaps, index loads that
// overlap a running pass, passes that keep the accumulators (multi-pass),
// HBM back-pressure stalls, VPU saturation, VPU ReLU clamps.
module tb_tender_top_full;
  import tender_pkg::*;
  localparam int D = ARRAY_DIM;
  localparam int W = D * 4;
  localparam int EPL = W / 16;              // index entries per line
  localparam int KMAX = 96;
  localparam int MAXTICKS = 200000;

  logic clk = 0, rst_n = 0;
  logic dma_cmd_valid, dma_cmd_ready, dma_done;
  dma_cmd_t dma_cmd;
  logic idx_swap, idx_active_bank;
  logic exe_start, exe_busy, exe_done;
  tile_cfg_t exe_cfg;
  logic vpu_cfg_we;
  logic [$clog2(D)-1:0] vpu_cfg_lane;
  logic signed [15:0] vpu_cfg_scale;
  logic signed [47:0] vpu_cfg_bias;
  logic vpu_cmd_valid, vpu_cmd_ready, vpu_done;
  vpu_cmd_t vpu_cmd;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [W-1:0] mem_req_wdata, mem_rsp_rdata;
  int checks = 0, failures = 0;

  tender_top dut (.*);
  hbm2_model #(.W(W), .DEPTH(4096), .LAT(8), .STALL_PCT(15)) u_hbm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (MAXTICKS) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_rescale = 0, n_int4 = 0, n_int8 = 0, n_swap = 0, n_overlap = 0, n_keep = 0;
  int n_sat = 0, n_relu = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.x_rescale) n_rescale++;
    if (idx_swap) n_swap++;
    if (dut.h_idx_we && exe_busy) n_overlap++;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  // ---------------- host operations ----------------
  task automatic dma(dma_op_e op, int haddr, int laddr, int len);
    @(negedge clk);
    while (!dma_cmd_ready) @(negedge clk);
    dma_cmd.op = op; dma_cmd.hbm_addr = 32'(haddr); dma_cmd.loc_addr = 16'(laddr);
    dma_cmd.len = 16'(len);
    dma_cmd_valid = 1;
    @(negedge clk);
    dma_cmd_valid = 0;
    while (!dma_done) @(negedge clk);
  endtask

  task automatic swap_banks();
    @(negedge clk); idx_swap = 1;
    @(negedge clk); idx_swap = 0;
  endtask

  task automatic exe_go(tile_cfg_t c);
    @(negedge clk);
    exe_cfg = c; exe_start = 1;
    @(negedge clk);
    exe_start = 0;
  endtask

  task automatic exe_wait();
    while (!exe_done) @(negedge clk);
  endtask

  // ---------------- reference data ----------------
  int a [D][KMAX];          // activation element a[row][channel]
  int w [KMAX][D];          // weight element w[channel][col]
  int ord [KMAX];           // compute order: ord[p] = channel index
  int spl [MAX_GROUPS];     // global split positions (ascending)
  longint y [D][D];         // reference INT32 result
  longint sc [D], bi [D];

  function automatic longint ref_q(longint acc, longint s, longint b, int sh, bit relu, prec_e m);
    longint t, lo, hi;
    t = acc * s + b;
    if (relu && t < 0) begin t = 0; n_relu++; end
    if (sh > 0) t = (t + (64'sd1 << (sh - 1))) >>> sh;
    lo = (m == MODE_INT4) ? -8 : -128;
    hi = (m == MODE_INT4) ? 7 : 127;
    if (t < lo) begin t = lo; n_sat++; end
    if (t > hi) begin t = hi; n_sat++; end
    return t;
  endfunction

  // HBM layout of a case
  localparam int H_IN = 0, H_W = 1024, H_IDX0 = 2048, H_IDX1 = 2304, H_OUT = 3072;

  task automatic run_case(prec_e m, int K, int ns, bit two_pass, bit relu, int sh);
    int n, k1, si;
    logic [W-1:0] word;
    tile_cfg_t c;
    n = (m == MODE_INT4) ? D : D / 2;
    // operands
    for (int r = 0; r < n; r++) for (int k = 0; k < K; k++)
      a[r][k] = (m == MODE_INT4) ? $urandom_range(0, 15) - 8 : $urandom_range(0, 255) - 128;
    for (int k = 0; k < K; k++) for (int col = 0; col < n; col++)
      w[k][col] = (m == MODE_INT4) ? $urandom_range(0, 15) - 8 : $urandom_range(0, 255) - 128;
    // compute order: random permutation
    for (int p = 0; p < K; p++) ord[p] = p;
    for (int p = K - 1; p > 0; p--) begin
      int j, t;
      j = $urandom_range(0, p); t = ord[p]; ord[p] = ord[j]; ord[j] = t;
    end
    // split points: ns distinct ascending positions in 1..K-1
    begin
      int last;
      last = 0;
      for (int s = 0; s < ns; s++) begin
        spl[s] = $urandom_range(last + 1, K - ns + s);
        last = spl[s];
      end
    end
    // reference result
    for (int r = 0; r < n; r++) for (int col = 0; col < n; col++) begin
      longint acc;
      acc = 0; si = 0;
      for (int p = 0; p < K; p++) begin
        if (si < ns && spl[si] == p) begin acc = acc * 2; si++; end
        acc += longint'(a[r][ord[p]] * w[ord[p]][col]);
      end
      y[r][col] = longint'(int'(32'(acc)));
    end
    // HBM images: channel words, index lines
    for (int k = 0; k < K; k++) begin
      word = '0;
      for (int r = 0; r < n; r++)
        if (m == MODE_INT4) word[r*4 +: 4] = 4'(a[r][k]); else word[r*8 +: 8] = 8'(a[r][k]);
      u_hbm.mem[H_IN + k] = word;
      word = '0;
      for (int col = 0; col < n; col++)
        if (m == MODE_INT4) word[col*4 +: 4] = 4'(w[k][col]); else word[col*8 +: 8] = 8'(w[k][col]);
      u_hbm.mem[H_W + k] = word;
    end
    k1 = two_pass ? K / 2 : K;
    for (int p = 0; p < K; p++) begin
      int base, q;
      base = (p < k1) ? H_IDX0 : H_IDX1;
      q = (p < k1) ? p : p - k1;
      word = u_hbm.mem[base + q / EPL];
      word[(q % EPL) * 16 +: 16] = 16'(ord[p]);
      u_hbm.mem[base + q / EPL] = word;
    end
    // program the index buffer for pass 1, then load operands
    dma(DMA_LOAD_IDX, H_IDX0, 0, (k1 + EPL - 1) / EPL);
    swap_banks();
    dma(DMA_LOAD_IN, H_IN, 0, K);
    dma(DMA_LOAD_W, H_W, 0, K);
    // pass 1
    c = '0;
    c.mode = m; c.clear_acc = 1'b1; c.drain = !two_pass;
    c.num_ch = 16'(k1); c.in_base = 16'd0; c.w_base = 16'd0; c.out_base = 16'd4;
    si = 0;
    for (int s = 0; s < ns; s++) if (spl[s] < k1) begin c.split_pos[si] = 16'(spl[s]); si++; end
    c.num_splits = 5'(si);
    exe_go(c);
    if (m == MODE_INT4) n_int4++; else n_int8++;
    if (two_pass) begin
      // load the next order into the shadow bank while pass 1 runs
      dma(DMA_LOAD_IDX, H_IDX1, 0, (K - k1 + EPL - 1) / EPL);
      exe_wait();
      swap_banks();
      c.clear_acc = 1'b0; c.drain = 1'b1; c.num_ch = 16'(K - k1);
      si = 0;
      for (int s = 0; s < ns; s++) if (spl[s] >= k1) begin c.split_pos[si] = 16'(spl[s] - k1); si++; end
      c.num_splits = 5'(si);
      exe_go(c);
      n_keep++;
    end
    exe_wait();
    // INT32 results in the output buffer
    for (int r = 0; r < n; r++) for (int col = 0; col < n; col++)
      chk($sformatf("Y[%0d][%0d]", r, col),
          longint'(signed'(dut.u_output_buffer.mem[4 + r][col*32 +: 32])), y[r][col]);
    // VPU requantization into scratchpad words 200.., then store to HBM
    for (int l = 0; l < D; l++) begin
      @(negedge clk);
      vpu_cfg_we = 1; vpu_cfg_lane = $bits(vpu_cfg_lane)'(l);
      vpu_cfg_scale = 16'($urandom_range(1, 64) - 16);
      vpu_cfg_bias  = 48'(longint'($urandom_range(0, 4000)) - 2000);
      sc[l] = longint'(vpu_cfg_scale); bi[l] = longint'(vpu_cfg_bias);
    end
    @(negedge clk);
    vpu_cfg_we = 0;
    vpu_cmd.mode = m; vpu_cmd.relu = relu; vpu_cmd.shift = 5'(sh);
    vpu_cmd.src_row = 16'd4; vpu_cmd.num_rows = 16'(n); vpu_cmd.dst_addr = 16'd200;
    vpu_cmd_valid = 1;
    @(negedge clk);
    vpu_cmd_valid = 0;
    while (!vpu_done) @(negedge clk);
    dma(DMA_STORE_IN, H_OUT, 200, n);
    repeat (12) @(negedge clk);
    for (int r = 0; r < n; r++) for (int col = 0; col < n; col++) begin
      longint e, g;
      e = ref_q(y[r][col], sc[col], bi[col], sh, relu, m);
      word = u_hbm.mem[H_OUT + r];
      g = (m == MODE_INT4) ? longint'(signed'(word[col*4 +: 4])) : longint'(signed'(word[col*8 +: 8]));
      chk($sformatf("Q[%0d][%0d]", r, col), g, e);
    end
  endtask

  initial begin
    dma_cmd_valid = 0; dma_cmd = '0; idx_swap = 0; exe_start = 0; exe_cfg = '0;
    vpu_cfg_we = 0; vpu_cfg_lane = '0; vpu_cfg_scale = '0; vpu_cfg_bias = '0;
    vpu_cmd_valid = 0; vpu_cmd = '0;
    for (int i = 0; i < 4096; i++) u_hbm.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case(MODE_INT4, 40, 3, 0, 0, 8);
    run_case(MODE_INT8, 96, 7, 1, 1, 14);
    chk("mechanism: rescale bubbles", longint'(n_rescale > 0), 1);
    chk("mechanism: INT4 passes", longint'(n_int4 > 0), 1);
    chk("mechanism: INT8 passes", longint'(n_int8 > 0), 1);
    chk("mechanism: index bank swaps", longint'(n_swap > 0), 1);
    chk("mechanism: index load during pass", longint'(n_overlap > 0), 1);
    chk("mechanism: accumulate across passes", longint'(n_keep > 0), 1);
    chk("mechanism: HBM back pressure", longint'(u_hbm.stalls > 0), 1);
    chk("mechanism: VPU saturation", longint'(n_sat > 0), 1);
    chk("mechanism: VPU ReLU", longint'(n_relu > 0), 1);
    $display("mechanisms: rescale=%0d int4=%0d int8=%0d swap=%0d overlap=%0d keep=%0d stall=%0d sat=%0d relu=%0d",
             n_rescale, n_int4, n_int8, n_swap, n_overlap, n_keep, u_hbm.stalls, n_sat, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
