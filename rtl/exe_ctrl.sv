// exe_ctrl: Execution Controller.
//
// Runs one pass of the systolic array over an output tile. For each position
// p = 0 .. num_ch-1 of the calibrated compute order it
//   1. reads channel index idx = IndexBuffer[p]          (cycle 1)
//   2. reads input and weight scratchpads at base + idx  (cycle 2)
//   3. forwards both channel vectors to the array        (cycle 3)
// one channel per cycle. Before every position listed in the split table it
// issues one bubble step instead: zero operands with rescale = 1, so all
// accumulators are shifted left one bit between channel groups (runtime
// requantization, one cycle per group boundary as published). After the last
// step it waits 2*(DIM-1) cycles for the wavefront to leave the array, then
// holds drain for DIM cycles so the array writes its results into the Output
// Buffer at out_base + row, and pulses done.
//
// Timing of one pass (start accepted in cycle 0):
//   clear (if cfg.clear_acc) 1 cycle, streaming num_ch + num_splits cycles,
//   pipeline 2 cycles, flush 2*(DIM-1) cycles, drain DIM cycles plus one cycle
//   for the last Output Buffer write (if cfg.drain), then done; when done is
//   high every result of the pass is in the Output Buffer. Each extra channel group costs exactly one cycle.
// The split table, the flags clear_acc/drain and this exact sequencing are
// this implementation's choices; the published controller is described only
// by its job (index lookup, base + index addressing, enable/rescale/done
// signals, metadata of split points).
module exe_ctrl
  import tender_pkg::*;
#(
  parameter int unsigned DIM      = tender_pkg::ARRAY_DIM,
  parameter int unsigned SPM_AW   = $clog2(tender_pkg::SPM_WORDS),
  parameter int unsigned IDX_AW   = $clog2(tender_pkg::IDXB_ENTRIES),
  parameter int unsigned OB_AW    = $clog2(tender_pkg::OBUF_ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  start,
  input  tile_cfg_t             cfg,
  output logic                  busy,
  output logic                  done,
  // index buffer read port
  output logic                  idx_rd_en,
  output logic [IDX_AW-1:0]     idx_rd_addr,
  input  logic [IDX_W-1:0]      idx_rd_data,
  // scratchpad read ports (input and weight)
  output logic                  spm_rd_en,
  output logic [SPM_AW-1:0]     spm_in_addr,
  output logic [SPM_AW-1:0]     spm_w_addr,
  input  logic [DIM*NIB_W-1:0]  spm_in_data,
  input  logic [DIM*NIB_W-1:0]  spm_w_data,
  // array control and operands
  output prec_e                 msa_mode,
  output logic                  msa_clear,
  output logic                  msa_drain,
  output logic                  msa_rescale,
  output logic [DIM*NIB_W-1:0]  msa_in_vec,
  output logic [DIM*NIB_W-1:0]  msa_w_vec,
  output logic [OB_AW-1:0]      out_base
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_STREAM, S_FLUSH, S_DRAIN, S_WB, S_DONE} state_e;

  localparam int unsigned FLUSH_CYC = 2 + 2 * (DIM - 1);   // pipeline + wavefront
  localparam int unsigned CW        = $clog2(FLUSH_CYC + DIM + 1);

  state_e     state;
  tile_cfg_t  cfg_q;
  logic [15:0] pos;        // next compute-order position to fetch
  logic [4:0]  sp;         // next split table entry
  logic [CW-1:0] cnt;
  // pipeline flags: s1 = index read issued, s2 = scratchpad read issued
  logic s1_valid, s1_bubble, s2_valid, s2_bubble;

  logic split_here, stream_last;
  always_comb begin
    split_here  = (sp < cfg_q.num_splits) && (cfg_q.split_pos[sp[3:0]] == pos);
    stream_last = !split_here && (pos == cfg_q.num_ch - 16'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cfg_q     <= '0;
      pos       <= '0;
      sp        <= '0;
      cnt       <= '0;
      s1_valid  <= 1'b0;
      s1_bubble <= 1'b0;
      s2_valid  <= 1'b0;
      s2_bubble <= 1'b0;
    end else begin
      // pipeline advance
      s2_valid  <= s1_valid;
      s2_bubble <= s1_bubble;
      s1_valid  <= 1'b0;
      s1_bubble <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          pos   <= '0;
          sp    <= '0;
          state <= cfg.clear_acc ? S_CLEAR : S_STREAM;
        end
        S_CLEAR: state <= S_STREAM;
        S_STREAM: begin
          if (split_here) begin
            s1_bubble <= 1'b1;
            sp        <= sp + 1'b1;
          end else begin
            s1_valid  <= 1'b1;
            pos       <= pos + 16'd1;
          end
          if (stream_last) begin
            state <= S_FLUSH;
            cnt   <= '0;
          end
        end
        S_FLUSH: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(FLUSH_CYC - 1)) begin
            cnt   <= '0;
            state <= cfg_q.drain ? S_DRAIN : S_DONE;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DIM - 1)) state <= S_WB;
        end
        S_WB: state <= S_DONE;   // last result row is written to the Output Buffer
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // index buffer lookup in S_STREAM (step 2 of the published dataflow)
  assign idx_rd_en   = (state == S_STREAM) && !split_here;
  assign idx_rd_addr = IDX_AW'(pos);

  // base + index addressing (step 3)
  assign spm_rd_en   = s1_valid;
  assign spm_in_addr = SPM_AW'(cfg_q.in_base + idx_rd_data);
  assign spm_w_addr  = SPM_AW'(cfg_q.w_base  + idx_rd_data);

  // forward data to the array (step 4); bubbles and idle cycles carry zeros
  assign msa_in_vec  = s2_valid ? spm_in_data : '0;
  assign msa_w_vec   = s2_valid ? spm_w_data  : '0;
  assign msa_rescale = s2_bubble;
  assign msa_mode    = cfg_q.mode;
  assign msa_clear   = (state == S_CLEAR);
  assign msa_drain   = (state == S_DRAIN);
  assign out_base    = OB_AW'(cfg_q.out_base);
  assign busy        = (state != S_IDLE);
  assign done        = (state == S_DONE);

`ifndef SYNTHESIS
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("exe_ctrl: start while busy");
  a_splits_sorted: assert property (@(posedge clk) disable iff (!rst_n)
      (start && cfg.num_splits > 1) |-> cfg.split_pos[1] > cfg.split_pos[0])
    else $error("exe_ctrl: split table not ascending");
`endif

endmodule
