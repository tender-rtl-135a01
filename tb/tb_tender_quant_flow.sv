// tb_tender_quant_flow: the whole Tender quantization flow around the
// accelerator (8x8 array, reduced memories). The testbench does what offline
// calibration does: per-channel bias subtraction ((max+min)/2), grouping by
// TMax/2^g < CMax <= TMax/2^(g-1), per-group scale TMax/(2^(g-1)*k) and
// symmetric quantization, then builds the index list and split positions and
// runs the accelerator. Results must equal the integer recurrence exactly,
// and after dequantization with the smallest scale they must match the float
// product within the rounding bound sum(0.5 * s_g * |w|).
// Case 1 is the published 3x6 walking example (its printed values, INT8,
// three groups): the bias-subtracted values, the groups of all six channels
// and the scales 22.4/k, 11.2/k, 5.6/k are checked. Case 2 is a synthetic
// 8x64 INT4 tile with two outlier channels and six groups, where the
// decomposed result must have a smaller error than per-tensor INT4.
// The bias, grouping rule and scale formula follow the published method. One
// bubble per group boundary even when a group is empty (so the result is
// always in the last group's scale), and the index-list layout, are this
// design's own choices. Timing is not checked here; tb_exe_ctrl does that.
module tb_tender_quant_flow;
  import tender_pkg::*;
  localparam int D = 8, SPM_D = 256, IDX_D = 128, OB_D = 32;
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

  tender_top #(.DIM(D), .SPM_DEPTH(SPM_D), .IDXB_DEPTH(IDX_D), .OBUF_DEPTH(OB_D)) dut (.*);
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


  localparam int H_IN = 0, H_W = 1024, H_IDX0 = 2048;

  // ---------------- Tender quantization flow (testbench side) ----------------
  localparam int KC = 64;
  real xr [D][KC];          // activation (float)
  int  wi [KC][D];          // weights, already integer (weight scale 1)
  int  grp [KC];            // group of each channel (1 = largest scale)
  int  xq [D][KC];          // quantized activation
  int  order [KC];
  int  splits [MAX_GROUPS];
  real sg [MAX_GROUPS+1];   // scale factor of each group
  int  gfin;                // group whose scale the result is in

  function automatic int rnd(real v);
    return (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // bias subtraction: bias = (max + min) / 2 per channel
  task automatic subtract_bias(int rows, int K);
    for (int k = 0; k < K; k++) begin
      real mx, mn, b;
      mx = xr[0][k]; mn = xr[0][k];
      for (int r = 1; r < rows; r++) begin
        if (xr[r][k] > mx) mx = xr[r][k];
        if (xr[r][k] < mn) mn = xr[r][k];
      end
      b = (mx + mn) / 2.0;
      for (int r = 0; r < rows; r++) xr[r][k] = xr[r][k] - b;
    end
  endtask

  // grouping by TMax / 2^g < CMax <= TMax / 2^(g-1); channels below the
  // last threshold join the last group. Returns the number of splits.
  task automatic decompose(int rows, int K, int G, int kq, output int ns);
    real tmax, cmax [KC];
    int p;
    tmax = 0.0;
    for (int k = 0; k < K; k++) begin
      cmax[k] = 0.0;
      for (int r = 0; r < rows; r++) if (fabs(xr[r][k]) > cmax[k]) cmax[k] = fabs(xr[r][k]);
      if (cmax[k] > tmax) tmax = cmax[k];
    end
    for (int k = 0; k < K; k++) begin
      grp[k] = G;
      for (int g = G; g >= 1; g--)
        if (cmax[k] > tmax / (2.0 ** g) && cmax[k] <= tmax / (2.0 ** (g - 1))) grp[k] = g;
    end
    for (int g = 1; g <= G; g++) sg[g] = tmax / ((2.0 ** (g - 1)) * kq);
    // one rescale per group boundary, also across empty groups (consecutive
    // bubbles), so the final sum is in the scale of group G
    p = 0; ns = 0;
    for (int g = 1; g <= G; g++) begin
      if (g > 1) begin splits[ns] = p; ns++; end
      for (int k = 0; k < K; k++) if (grp[k] == g) begin
        order[p] = k; p++;
      end
    end
    // trailing empty groups need no bubble; the result is then in the scale
    // of the last non-empty group
    gfin = G;
    while (ns > 0 && splits[ns-1] == K) begin ns--; gfin--; end
    for (int k = 0; k < K; k++) for (int r = 0; r < rows; r++) begin
      xq[r][k] = rnd(xr[r][k] / sg[grp[k]]);
      if (xq[r][k] > kq) xq[r][k] = kq;
      if (xq[r][k] < -kq) xq[r][k] = -kq;
    end
  endtask

  // run quantized operands through the accelerator, one pass, result rows at 4..
  task automatic run_hw(prec_e m, int K, int ns);
    logic [W-1:0] word;
    tile_cfg_t c;
    int n;
    n = (m == MODE_INT4) ? D : D / 2;
    for (int i = 0; i < 4096; i++) u_hbm.mem[i] = '0;
    for (int k = 0; k < K; k++) begin
      word = '0;
      for (int r = 0; r < n; r++)
        if (m == MODE_INT4) word[r*4 +: 4] = 4'(xq[r][k]); else word[r*8 +: 8] = 8'(xq[r][k]);
      u_hbm.mem[H_IN + k] = word;
      word = '0;
      for (int col = 0; col < n; col++)
        if (m == MODE_INT4) word[col*4 +: 4] = 4'(wi[k][col]); else word[col*8 +: 8] = 8'(wi[k][col]);
      u_hbm.mem[H_W + k] = word;
    end
    for (int p = 0; p < K; p++) begin
      word = u_hbm.mem[H_IDX0 + p / EPL];
      word[(p % EPL) * 16 +: 16] = 16'(order[p]);
      u_hbm.mem[H_IDX0 + p / EPL] = word;
    end
    dma(DMA_LOAD_IDX, H_IDX0, 0, (K + EPL - 1) / EPL);
    swap_banks();
    dma(DMA_LOAD_IN, H_IN, 0, K);
    dma(DMA_LOAD_W, H_W, 0, K);
    c = '0;
    c.mode = m; c.clear_acc = 1'b1; c.drain = 1'b1; c.num_ch = 16'(K);
    c.num_splits = 5'(ns);
    for (int s = 0; s < ns; s++) c.split_pos[s] = 16'(splits[s]);
    c.out_base = 16'd4;
    exe_go(c);
    exe_wait();
  endtask

  function automatic longint hw_y(int r, int col);
    return longint'(signed'(dut.u_output_buffer.mem[4 + r][col*32 +: 32]));
  endfunction

  // integer reference of the runtime requantization recurrence
  function automatic longint ref_y(int r, int col, int K, int ns);
    longint acc;
    int si;
    acc = 0; si = 0;
    for (int p = 0; p < K; p++) begin
      while (si < ns && splits[si] == p) begin acc = acc * 2; si++; end
      acc += longint'(xq[r][order[p]] * wi[order[p]][col]);
    end
    return acc;
  endfunction

  initial begin
    int ns, G;
    real err_t, err_pt, bound;
    dma_cmd_valid = 0; dma_cmd = '0; idx_swap = 0; exe_start = 0; exe_cfg = '0;
    vpu_cfg_we = 0; vpu_cfg_lane = '0; vpu_cfg_scale = '0; vpu_cfg_bias = '0;
    vpu_cmd_valid = 0; vpu_cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. the published walking example: 3 tokens x 6 channels, INT8, 3 groups
    begin
      real ex [3][6] = '{'{1.2, 45.2, -4.1,  7.1, 1.5, 15.5},
                         '{5.2,  0.4,  2.1, -7.3, 3.9, 10.0},
                         '{2.3, 18.9, -1.8,  4.4, 2.6, 24.2}};
      real biased [3][6] = '{'{-2.0,  22.4, -3.1,  7.2, -1.2, -1.6},
                             '{ 2.0, -22.4,  3.1, -7.2,  1.2, -7.1},
                             '{-0.9,  -3.9, -0.8,  4.5, -0.1,  7.1}};
      int exp_grp [6] = '{3, 1, 3, 2, 3, 2};   // channel 2 -> A1, 4 and 6 -> A2, 1, 3, 5 -> A3
      for (int r = 0; r < D; r++) for (int k = 0; k < KC; k++) xr[r][k] = 0.0;
      for (int r = 0; r < 3; r++) for (int k = 0; k < 6; k++) xr[r][k] = ex[r][k];
      subtract_bias(3, 6);
      for (int r = 0; r < 3; r++) for (int k = 0; k < 6; k++)
        chk($sformatf("bias-subtracted x[%0d][%0d] x10", r, k), rnd(xr[r][k] * 10.0), rnd(biased[r][k] * 10.0));
      decompose(3, 6, 3, 127, ns);
      for (int k = 0; k < 6; k++) chk($sformatf("group of channel %0d", k + 1), grp[k], exp_grp[k]);
      chk("S1 x 127 x 10", rnd(sg[1] * 127.0 * 10.0), 224);
      chk("S2 x 127 x 10", rnd(sg[2] * 127.0 * 10.0), 112);
      chk("S3 x 127 x 10", rnd(sg[3] * 127.0 * 10.0), 56);
      for (int k = 0; k < 6; k++) for (int col = 0; col < D / 2; col++)
        wi[k][col] = $urandom_range(0, 254) - 127;
      for (int k = 0; k < 6; k++) for (int r = 3; r < D / 2; r++) xq[r][k] = 0;
      run_hw(MODE_INT8, 6, ns);
      for (int r = 0; r < 3; r++) for (int col = 0; col < D / 2; col++) begin
        real yf, yd;
        chk($sformatf("walk Y[%0d][%0d]", r, col), hw_y(r, col), ref_y(r, col, 6, ns));
        // dequantize with the smallest scale and compare with the float product
        yd = real'(hw_y(r, col)) * sg[gfin];
        yf = 0.0; bound = 0.0;
        for (int k = 0; k < 6; k++) begin
          yf += xr[r][k] * wi[k][col];
          bound += 0.5 * sg[grp[k]] * fabs(real'(wi[k][col]));
        end
        checks++;
        if (fabs(yd - yf) > bound + 1e-9) begin
          failures++;
          $display("FAIL walk dequant Y[%0d][%0d] %f vs %f (bound %f)", r, col, yd, yf, bound);
        end
      end
    end

    // ---- 2. synthetic outlier tile: 8 tokens x 64 channels, INT4, 6 groups
    G = 6;
    for (int r = 0; r < D; r++) for (int k = 0; k < KC; k++)
      xr[r][k] = real'($urandom_range(0, 2000)) / 1000.0 - 1.0;
    for (int r = 0; r < D; r++) begin           // outlier channels 5 and 41
      xr[r][5]  = 40.0 + real'($urandom_range(0, 2000)) / 100.0;
      xr[r][41] = -(10.0 + real'($urandom_range(0, 500)) / 100.0) * ((r % 2) ? 1.0 : -1.0);
    end
    for (int k = 0; k < KC; k++) for (int col = 0; col < D; col++)
      wi[k][col] = $urandom_range(0, 14) - 7;
    subtract_bias(D, KC);
    decompose(D, KC, G, 7, ns);
    chk("outlier channel 41 in group 1", grp[41], 1);
    run_hw(MODE_INT4, KC, ns);
    err_t = 0.0; err_pt = 0.0;
    for (int r = 0; r < D; r++) for (int col = 0; col < D; col++) begin
      real yf, ypt;
      chk($sformatf("outlier Y[%0d][%0d]", r, col), hw_y(r, col), ref_y(r, col, KC, ns));
      yf = 0.0; ypt = 0.0;
      for (int k = 0; k < KC; k++) begin
        int qpt;
        yf += xr[r][k] * wi[k][col];
        qpt = rnd(xr[r][k] / sg[1]);            // per-tensor INT4 for comparison
        ypt += real'(qpt) * sg[1] * wi[k][col];
      end
      err_t  += fabs(real'(hw_y(r, col)) * sg[gfin] - yf);
      err_pt += fabs(ypt - yf);
    end
    $display("mean |error|: decomposed %f, per-tensor %f", err_t / (D * D), err_pt / (D * D));
    checks++;
    if (!(err_t < err_pt)) begin failures++; $display("FAIL decomposition not better than per-tensor"); end
    chk("mechanism: rescale bubbles", longint'(n_rescale >= 2 + G - 1), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
