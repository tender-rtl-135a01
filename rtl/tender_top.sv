// tender_top: the Tender accelerator.
//
// Tender runs the matrix multiplications of an LLM in INT4/INT8 although the
// activations contain outlier channels. Offline calibration splits the input
// channels of each activation tile into groups whose scale factors differ by
// powers of two, and records the group order in an index list. At run time the
// groups are streamed into the systolic array largest-scale first; between two
// groups every accumulator is shifted left by one bit, which rescales the sum
// so far to the next group's scale. The final accumulator is therefore the
// whole product in the scale of the smallest group, and only one dequantization
// remains (done by the VPU).
//
// Blocks and connections follow the published overview:
//   HBM Ctrl  -> Scratchpad Memory (input and weight), Index Buffer
//   Index Buffer -> Exe Ctrl -> Scratchpad addresses (base + index)
//   Scratchpad -> Multi-Scale Systolic Array (via Exe Ctrl gating and FIFOs)
//   MSA -> Output Buffer -> VPU -> input Scratchpad
// HBM2 itself is off chip; its request/response channel is brought out as
// ports. The three engines are driven by an external sequencer (host) through
// their command ports: dma_* (HBM Ctrl), exe_* (one array pass) and vpu_*
// (one requantization job), plus idx_swap to exchange the index buffer banks.
// The HBM Controller and the VPU share the input scratchpad write port; the
// sequencer must not run a VPU job and a load into the input scratchpad at the
// same time (checked by an assertion). All state is reset by rst_n (async,
// active low) except memory contents.
module tender_top
  import tender_pkg::*;
#(
  parameter int unsigned DIM        = tender_pkg::ARRAY_DIM,
  parameter int unsigned SPM_DEPTH  = tender_pkg::SPM_WORDS,
  parameter int unsigned IDXB_DEPTH = tender_pkg::IDXB_ENTRIES,
  parameter int unsigned OBUF_DEPTH = tender_pkg::OBUF_ROWS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // HBM controller commands
  input  logic                   dma_cmd_valid,
  output logic                   dma_cmd_ready,
  input  dma_cmd_t               dma_cmd,
  output logic                   dma_done,
  // index buffer bank swap
  input  logic                   idx_swap,
  output logic                   idx_active_bank,
  // execution controller
  input  logic                   exe_start,
  input  tile_cfg_t              exe_cfg,
  output logic                   exe_busy,
  output logic                   exe_done,
  // VPU
  input  logic                   vpu_cfg_we,
  input  logic [$clog2(DIM)-1:0] vpu_cfg_lane,
  input  logic signed [15:0]     vpu_cfg_scale,
  input  logic signed [47:0]     vpu_cfg_bias,
  input  logic                   vpu_cmd_valid,
  output logic                   vpu_cmd_ready,
  input  vpu_cmd_t               vpu_cmd,
  output logic                   vpu_done,
  // HBM2 channel
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_write,
  output logic [31:0]            mem_req_addr,
  output logic [DIM*NIB_W-1:0]   mem_req_wdata,
  input  logic                   mem_rsp_valid,
  input  logic [DIM*NIB_W-1:0]   mem_rsp_rdata
);

  localparam int unsigned W      = DIM * NIB_W;
  localparam int unsigned SPM_AW = $clog2(SPM_DEPTH);
  localparam int unsigned IDX_AW = $clog2(IDXB_DEPTH);
  localparam int unsigned IDX_LW = $clog2(IDXB_DEPTH / (W / IDX_W));
  localparam int unsigned OB_AW  = $clog2(OBUF_DEPTH);

  // ---------------- HBM controller ----------------
  logic              h_in_we, h_w_we, h_rd_en, h_idx_we;
  logic [SPM_AW-1:0] h_wr_addr, h_rd_addr;
  logic [W-1:0]      h_wr_data, h_rd_data, h_idx_data;
  logic [IDX_LW-1:0] h_idx_line;

  hbm_ctrl #(.W(W), .SPM_AW(SPM_AW), .IDX_LW(IDX_LW)) u_hbm_ctrl (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd(dma_cmd), .done(dma_done),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .spm_in_wr_en(h_in_we), .spm_w_wr_en(h_w_we), .spm_wr_addr(h_wr_addr), .spm_wr_data(h_wr_data),
    .spm_rd_en(h_rd_en), .spm_rd_addr(h_rd_addr), .spm_rd_data(h_rd_data),
    .idx_wr_en(h_idx_we), .idx_wr_line(h_idx_line), .idx_wr_data(h_idx_data)
  );

  // ---------------- index buffer ----------------
  logic              ib_rd_en;
  logic [IDX_AW-1:0] ib_rd_addr;
  logic [IDX_W-1:0]  ib_rd_data;

  index_buffer #(.DEPTH(IDXB_DEPTH), .LINE_W(W)) u_index_buffer (
    .clk, .rst_n, .swap(idx_swap), .active_bank(idx_active_bank),
    .wr_en(h_idx_we), .wr_line(h_idx_line), .wr_data(h_idx_data),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data)
  );

  // ---------------- execution controller ----------------
  logic              x_spm_rd_en;
  logic [SPM_AW-1:0] x_in_addr, x_w_addr;
  logic [W-1:0]      sp_in_rd, sp_w_rd, x_in_vec, x_w_vec;
  prec_e             x_mode;
  logic              x_clear, x_drain, x_rescale;
  logic [OB_AW-1:0]  x_out_base;

  exe_ctrl #(.DIM(DIM), .SPM_AW(SPM_AW), .IDX_AW(IDX_AW), .OB_AW(OB_AW)) u_exe_ctrl (
    .clk, .rst_n, .start(exe_start), .cfg(exe_cfg), .busy(exe_busy), .done(exe_done),
    .idx_rd_en(ib_rd_en), .idx_rd_addr(ib_rd_addr), .idx_rd_data(ib_rd_data),
    .spm_rd_en(x_spm_rd_en), .spm_in_addr(x_in_addr), .spm_w_addr(x_w_addr),
    .spm_in_data(sp_in_rd), .spm_w_data(sp_w_rd),
    .msa_mode(x_mode), .msa_clear(x_clear), .msa_drain(x_drain), .msa_rescale(x_rescale),
    .msa_in_vec(x_in_vec), .msa_w_vec(x_w_vec), .out_base(x_out_base)
  );

  // ---------------- scratchpad memory ----------------
  logic              v_wr_en;
  logic [SPM_AW-1:0] v_wr_addr;
  logic [W-1:0]      v_wr_data;
  logic [W-1:0]      sp_w_rd2_unused;

  scratchpad #(.DEPTH(SPM_DEPTH), .W(W)) u_spm_in (
    .clk, .rst_n,
    .rd_en(x_spm_rd_en), .rd_addr(x_in_addr), .rd_data(sp_in_rd),
    .wr_en(h_in_we || v_wr_en),
    .wr_addr(v_wr_en ? v_wr_addr : h_wr_addr),
    .wr_data(v_wr_en ? v_wr_data : h_wr_data),
    .rd2_en(h_rd_en), .rd2_addr(h_rd_addr), .rd2_data(h_rd_data)
  );

  scratchpad #(.DEPTH(SPM_DEPTH), .W(W)) u_spm_w (
    .clk, .rst_n,
    .rd_en(x_spm_rd_en), .rd_addr(x_w_addr), .rd_data(sp_w_rd),
    .wr_en(h_w_we), .wr_addr(h_wr_addr), .wr_data(h_wr_data),
    .rd2_en(1'b0), .rd2_addr('0), .rd2_data(sp_w_rd2_unused)
  );

  // ---------------- multi-scale systolic array ----------------
  logic                   m_out_valid;
  logic [$clog2(DIM)-1:0] m_out_row;
  logic [DIM*ACC_W-1:0]   m_out_data;

  msa #(.DIM(DIM)) u_msa (
    .clk, .rst_n, .mode(x_mode), .clear(x_clear), .drain(x_drain),
    .in_vec(x_in_vec), .w_vec(x_w_vec), .rescale(x_rescale),
    .out_valid(m_out_valid), .out_row(m_out_row), .out_data(m_out_data)
  );

  // ---------------- output buffer ----------------
  logic                 ob_rd_en;
  logic [OB_AW-1:0]     ob_rd_addr;
  logic [DIM*ACC_W-1:0] ob_rd_data;

  output_buffer #(.DEPTH(OBUF_DEPTH), .W(DIM*ACC_W)) u_output_buffer (
    .clk, .rst_n,
    .wr_en(m_out_valid), .wr_addr(x_out_base + OB_AW'(m_out_row)), .wr_data(m_out_data),
    .rd_en(ob_rd_en), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data)
  );

  // ---------------- vector processing unit ----------------
  vpu #(.DIM(DIM), .OB_AW(OB_AW), .SPM_AW(SPM_AW)) u_vpu (
    .clk, .rst_n,
    .cfg_we(vpu_cfg_we), .cfg_lane(vpu_cfg_lane), .cfg_scale(vpu_cfg_scale), .cfg_bias(vpu_cfg_bias),
    .cmd_valid(vpu_cmd_valid), .cmd_ready(vpu_cmd_ready), .cmd(vpu_cmd), .done(vpu_done),
    .ob_rd_en, .ob_rd_addr, .ob_rd_data,
    .spm_wr_en(v_wr_en), .spm_wr_addr(v_wr_addr), .spm_wr_data(v_wr_data)
  );

`ifndef SYNTHESIS
  a_spm_port: assert property (@(posedge clk) disable iff (!rst_n) !(h_in_we && v_wr_en))
    else $error("tender_top: HBM load and VPU write to the input scratchpad in the same cycle");
`endif

endmodule
