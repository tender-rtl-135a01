// hbm_ctrl: HBM Controller, the DMA engine between off-chip HBM2 and the
// on-chip buffers.
//
// It executes one dma_cmd_t at a time:
//   DMA_LOAD_IN / DMA_LOAD_W  copy len beats from HBM to the input / weight
//                             scratchpad, starting at word loc_addr
//   DMA_LOAD_IDX              copy len beats into the shadow bank of the Index
//                             Buffer, starting at line loc_addr ("Program")
//   DMA_STORE_IN              copy len words of the input scratchpad (where
//                             the VPU leaves its results) back to HBM
// One beat is one 256-bit scratchpad word (or 16 channel indices). As
// published the controller works independently of the Execution Controller
// so that transfers overlap computation; which memory port it uses is
// separate from the array's ports.
//
// Memory-side interface (this implementation's choice, a minimal split
// request/response channel): a request is accepted when mem_req_valid and
// mem_req_ready are both high; read responses return in order on
// mem_rsp_valid with any latency; writes get no response. Loads keep issuing
// requests while responses are outstanding, so a load streams at one beat per
// cycle when the memory allows it. Stores take three cycles per beat
// (scratchpad read, data, request). Command handshake: cmd_valid/cmd_ready;
// done pulses for one cycle when the last beat has been written.
module hbm_ctrl
  import tender_pkg::*;
#(
  parameter int unsigned W      = tender_pkg::WORD_W,
  parameter int unsigned SPM_AW = $clog2(tender_pkg::SPM_WORDS),
  parameter int unsigned IDX_LW = $clog2(tender_pkg::IDXB_ENTRIES / (tender_pkg::WORD_W / tender_pkg::IDX_W))
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  dma_cmd_t           cmd,
  output logic               done,
  // HBM side
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_write,
  output logic [31:0]        mem_req_addr,
  output logic [W-1:0]       mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [W-1:0]       mem_rsp_rdata,
  // scratchpad write port (shared by the two scratchpads, selected by enable)
  output logic               spm_in_wr_en,
  output logic               spm_w_wr_en,
  output logic [SPM_AW-1:0]  spm_wr_addr,
  output logic [W-1:0]       spm_wr_data,
  // input scratchpad read port for stores
  output logic               spm_rd_en,
  output logic [SPM_AW-1:0]  spm_rd_addr,
  input  logic [W-1:0]       spm_rd_data,
  // index buffer write port
  output logic               idx_wr_en,
  output logic [IDX_LW-1:0]  idx_wr_line,
  output logic [W-1:0]       idx_wr_data
);

  typedef enum logic [2:0] {H_IDLE, H_LOAD, H_ST_RD, H_ST_WAIT, H_ST_REQ, H_DONE} hstate_e;

  hstate_e     state;
  dma_cmd_t    c_q;
  logic [15:0] issued, received;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= H_IDLE;
      c_q      <= '0;
      issued   <= '0;
      received <= '0;
    end else begin
      case (state)
        H_IDLE: if (cmd_valid) begin
          c_q      <= cmd;
          issued   <= '0;
          received <= '0;
          if (cmd.len == 16'd0)            state <= H_DONE;
          else if (cmd.op == DMA_STORE_IN) state <= H_ST_RD;
          else                             state <= H_LOAD;
        end
        H_LOAD: begin
          if (mem_req_valid && mem_req_ready) issued <= issued + 16'd1;
          if (mem_rsp_valid) begin
            received <= received + 16'd1;
            if (received == c_q.len - 16'd1) state <= H_DONE;
          end
        end
        H_ST_RD:   state <= H_ST_WAIT;
        H_ST_WAIT: state <= H_ST_REQ;
        H_ST_REQ: if (mem_req_ready) begin
          issued <= issued + 16'd1;
          state  <= (issued == c_q.len - 16'd1) ? H_DONE : H_ST_RD;
        end
        H_DONE:  state <= H_IDLE;
        default: state <= H_IDLE;
      endcase
    end
  end

  // store data captured from the scratchpad read port
  logic [W-1:0] st_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_data_q <= '0;
    else if (state == H_ST_WAIT) st_data_q <= spm_rd_data;
  end

  assign cmd_ready     = (state == H_IDLE);
  assign done          = (state == H_DONE);

  assign mem_req_valid = (state == H_LOAD && issued != c_q.len) || (state == H_ST_REQ);
  assign mem_req_write = (state == H_ST_REQ);
  assign mem_req_addr  = c_q.hbm_addr + 32'(issued);
  assign mem_req_wdata = st_data_q;

  assign spm_rd_en     = (state == H_ST_RD);
  assign spm_rd_addr   = SPM_AW'(c_q.loc_addr + issued);

  logic load_beat;
  assign load_beat     = (state == H_LOAD) && mem_rsp_valid;
  assign spm_in_wr_en  = load_beat && (c_q.op == DMA_LOAD_IN);
  assign spm_w_wr_en   = load_beat && (c_q.op == DMA_LOAD_W);
  assign idx_wr_en     = load_beat && (c_q.op == DMA_LOAD_IDX);
  assign spm_wr_addr   = SPM_AW'(c_q.loc_addr + received);
  assign idx_wr_line   = IDX_LW'(c_q.loc_addr + received);
  assign spm_wr_data   = mem_rsp_rdata;
  assign idx_wr_data   = mem_rsp_rdata;

`ifndef SYNTHESIS
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (mem_req_valid && !mem_req_ready) |=> (mem_req_valid && $stable(mem_req_addr)))
    else $error("hbm_ctrl: request dropped or changed before acceptance");
`endif

endmodule
