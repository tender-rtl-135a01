// vpu: Vector Processing Unit, requantization path.
//
// Turns INT32 rows from the Output Buffer back into INT4/INT8 operands for the
// next layer and writes them to the input scratchpad. Each of the DIM lanes
// (one per output column, i.e. per output channel) applies the calibrated
// per-channel scale and bias held in lane registers:
//     t = acc * scale + bias                  (scale: signed 16-bit, bias: signed 48-bit)
//     t = relu ? max(t, 0) : t
//     q = sat((t + 2^(shift-1)) >>> shift)    (round half up; no rounding for shift = 0)
// with sat() clamping to [-8, 7] (INT4, DIM lanes) or [-128, 127] (INT8, the
// first DIM/2 lanes). Result lane c is packed at bits [4c +: 4] resp.
// [8c +: 8] of the written word, the same packing the array reads.
//
// The published VPU is a 64-lane SIMD floating-point unit that also runs
// softmax, LayerNorm and GeLU. This block implements only the requantization
// job, and in fixed point: scale and bias are fixed-point numbers whose binary
// point is given by shift. That choice, the lane registers' format and the
// command format are this implementation's.
//
// Interface: lane registers are written through cfg_we/cfg_lane/cfg_scale/
// cfg_bias. A job (vpu_cmd_t) is accepted on cmd_valid && cmd_ready; it reads
// rows src_row .. src_row+num_rows-1 at one row per cycle and writes word
// dst_addr + i three cycles after row i is read (read, multiply, quantize).
// done pulses in the cycle after the last write.
module vpu
  import tender_pkg::*;
#(
  parameter int unsigned DIM    = tender_pkg::ARRAY_DIM,
  parameter int unsigned OB_AW  = $clog2(tender_pkg::OBUF_ROWS),
  parameter int unsigned SPM_AW = $clog2(tender_pkg::SPM_WORDS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // lane registers
  input  logic                   cfg_we,
  input  logic [$clog2(DIM)-1:0] cfg_lane,
  input  logic signed [15:0]     cfg_scale,
  input  logic signed [47:0]     cfg_bias,
  // job
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  vpu_cmd_t               cmd,
  output logic                   done,
  // output buffer read port
  output logic                   ob_rd_en,
  output logic [OB_AW-1:0]       ob_rd_addr,
  input  logic [DIM*ACC_W-1:0]   ob_rd_data,
  // scratchpad write port
  output logic                   spm_wr_en,
  output logic [SPM_AW-1:0]      spm_wr_addr,
  output logic [DIM*NIB_W-1:0]   spm_wr_data
);

  logic signed [15:0] scale_q [DIM];
  logic signed [47:0] bias_q  [DIM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < DIM; l++) begin
        scale_q[l] <= 16'sd1;
        bias_q[l]  <= '0;
      end
    end else if (cfg_we) begin
      scale_q[cfg_lane] <= cfg_scale;
      bias_q[cfg_lane]  <= cfg_bias;
    end
  end

  // ---------------- job sequencing ----------------
  vpu_cmd_t    c_q;
  logic        running;
  logic [15:0] rd_cnt;
  logic        v1, v2, v3;            // row read issued / data in / product in
  logic [15:0] wr_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q     <= '0;
      running <= 1'b0;
      rd_cnt  <= '0;
      wr_cnt  <= '0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else begin
      v2 <= v1;
      v3 <= v2;
      v1 <= 1'b0;
      if (!running) begin
        if (cmd_valid && cmd.num_rows != 16'd0) begin
          c_q     <= cmd;
          running <= 1'b1;
          rd_cnt  <= '0;
          wr_cnt  <= '0;
        end
      end else begin
        if (rd_cnt != c_q.num_rows) begin
          v1     <= 1'b1;
          rd_cnt <= rd_cnt + 16'd1;
        end
        if (v3) begin
          wr_cnt <= wr_cnt + 16'd1;
          if (wr_cnt == c_q.num_rows - 16'd1) running <= 1'b0;
        end
      end
    end
  end

  assign cmd_ready  = !running;
  assign ob_rd_en   = running && (rd_cnt != c_q.num_rows);
  assign ob_rd_addr = OB_AW'(c_q.src_row + rd_cnt);

  // ---------------- lane datapath ----------------
  logic signed [47:0] t_q [DIM];        // valid while v2: scaled and biased

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < DIM; l++) t_q[l] <= '0;
    end else if (v1) begin
      for (int l = 0; l < DIM; l++)
        t_q[l] <= 48'(signed'(ob_rd_data[l*ACC_W +: ACC_W])) * 48'(scale_q[l]) + bias_q[l];
    end
  end

  function automatic logic [7:0] quantize(input logic signed [47:0] t, input logic relu,
                                          input logic [4:0] sh, input prec_e mode);
    logic signed [47:0] v, r;
    v = (relu && t < 0) ? 48'sd0 : t;
    r = (sh == 5'd0) ? v : ((v + (48'sd1 <<< (sh - 5'd1))) >>> sh);
    if (mode == MODE_INT4) begin
      if (r > 48'sd7)         return 8'd7;
      else if (r < -48'sd8)   return 8'hf8;
      else                    return r[7:0];
    end else begin
      if (r > 48'sd127)       return 8'd127;
      else if (r < -48'sd128) return 8'h80;
      else                    return r[7:0];
    end
  endfunction

  logic [DIM*NIB_W-1:0] packed_d, packed_q;   // packed_q valid while v3
  always_comb begin
    packed_d = '0;
    for (int l = 0; l < DIM; l++) begin
      if (c_q.mode == MODE_INT4)
        packed_d[l*4 +: 4] = quantize(t_q[l], c_q.relu, c_q.shift, c_q.mode)[3:0];
      else if (l < DIM/2)
        packed_d[l*8 +: 8] = quantize(t_q[l], c_q.relu, c_q.shift, c_q.mode);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  packed_q <= '0;
    else if (v2) packed_q <= packed_d;
  end

  logic done_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= v3 && (wr_cnt == c_q.num_rows - 16'd1);
  end

  assign spm_wr_en   = v3;
  assign spm_wr_addr = SPM_AW'(c_q.dst_addr + wr_cnt);
  assign spm_wr_data = packed_q;
  assign done        = done_q;

endmodule
