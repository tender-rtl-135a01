// msa: Multi-Scale Systolic Array (MSA).
//
// A DIM x DIM output-stationary mesh of 4-bit PEs fed through two skewing
// FIFOs. Every cycle the controller presents one reduction step: a channel
// column of the activation tile (in_vec, one 4-bit element per array row) and
// the matching channel row of the weight tile (w_vec, one element per array
// column). PE(r,c) works on a step r + c cycles after it is presented (the
// FIFOs add r resp. c cycles, each PE hop one more), so the last PE finishes
// the last step 2*(DIM-1) cycles after it was presented.
//
// Runtime requantization: a step presented with rescale = 1 is a bubble. Its
// rescale bit is skewed like row r's input and forwarded PE to PE along the
// row, so every PE shifts its accumulator left by one bit exactly between the
// last channel of one group and the first channel of the next. The caller
// must present zero operands in a bubble step.
//
// Precision modes (as published: four PEs form one INT8 multiplier, each PE
// taking the upper or lower 4 bits of input and weight):
//   MODE_INT4  every PE holds one output; DIM x DIM INT4 outputs.
//   MODE_INT8  element r of an 8-bit vector occupies nibble lanes 2r (low
//              nibble, unsigned) and 2r+1 (high nibble, signed), for inputs
//              and weights alike. PE(2r+i, 2c+j) accumulates x_i * w_j and the
//              drain recombines the four partial sums as
//              (HH << 8) + ((HL + LH) << 4) + LL, giving DIM/2 x DIM/2 outputs.
//              Because the 1-bit shift is linear it commutes with this sum.
// The 2x2 block placement and the recombination in the drain path are this
// implementation's choices.
//
// Readout (this implementation's choice): clear zeroes all accumulators in one
// cycle; while drain is held the accumulators of each column shift down one
// row per cycle and the bottom row is captured into out_data one cycle later.
// INT4: DIM beats, rows DIM-1 down to 0. INT8: DIM/2 beats, rows DIM/2-1 down
// to 0 (one beat every second drain cycle), lanes DIM/2.. are zero.
module msa
  import tender_pkg::*;
#(
  parameter int unsigned DIM = tender_pkg::ARRAY_DIM
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  prec_e                 mode,
  input  logic                  clear,
  input  logic                  drain,
  input  logic [DIM*NIB_W-1:0]  in_vec,    // one activation channel (rows)
  input  logic [DIM*NIB_W-1:0]  w_vec,     // one weight channel (columns)
  input  logic                  rescale,   // this step is a rescale bubble
  output logic                  out_valid,
  output logic [$clog2(DIM)-1:0] out_row,
  output logic [DIM*ACC_W-1:0]  out_data
);

  localparam int unsigned RW = $clog2(DIM);

  // ---------------- skewing FIFOs ----------------
  logic [DIM*(NIB_W+1)-1:0] in_pack, in_skew;
  logic [DIM*NIB_W-1:0]     w_skew;

  always_comb
    for (int r = 0; r < DIM; r++)
      in_pack[r*(NIB_W+1) +: NIB_W+1] = {rescale, in_vec[r*NIB_W +: NIB_W]};

  skew_fifo #(.LANES(DIM), .W(NIB_W+1)) u_in_fifo (
    .clk, .rst_n, .d_i(in_pack), .d_o(in_skew));
  skew_fifo #(.LANES(DIM), .W(NIB_W))   u_w_fifo (
    .clk, .rst_n, .d_i(w_vec),   .d_o(w_skew));

  // ---------------- PE mesh ----------------
  // h_*[r][c] is the value entering PE(r,c) from the left; v_*[r][c] from above.
  logic [NIB_W-1:0] h_in  [DIM][DIM+1];
  logic             h_rs  [DIM][DIM+1];
  logic [NIB_W-1:0] v_w   [DIM+1][DIM];
  logic [ACC_W-1:0] acc   [DIM][DIM];

  for (genvar r = 0; r < DIM; r++) begin : g_row
    assign h_in[r][0] = in_skew[r*(NIB_W+1) +: NIB_W];
    assign h_rs[r][0] = in_skew[r*(NIB_W+1) + NIB_W];
    for (genvar c = 0; c < DIM; c++) begin : g_col
      if (r == 0) begin : g_top
        assign v_w[0][c] = w_skew[c*NIB_W +: NIB_W];
      end
      logic [ACC_W-1:0] acc_above;
      if (r == 0) begin : g_acc0
        assign acc_above = '0;
      end else begin : g_accn
        assign acc_above = acc[r-1][c];
      end
      pe u_pe (
        .clk, .rst_n, .clear, .drain,
        .in_uns   (mode == MODE_INT8 && (r % 2) == 0),
        .w_uns    (mode == MODE_INT8 && (c % 2) == 0),
        .in_i     (h_in[r][c]),
        .w_i      (v_w[r][c]),
        .rescale_i(h_rs[r][c]),
        .acc_i    (acc_above),
        .in_o     (h_in[r][c+1]),
        .w_o      (v_w[r+1][c]),
        .rescale_o(h_rs[r][c+1]),
        .acc_o    (acc[r][c])
      );
    end
  end

  // Forwarded values leaving the right and bottom edges are not used.
  logic unused_edge;
  always_comb begin
    unused_edge = 1'b0;
    for (int r = 0; r < DIM; r++) unused_edge ^= ^{h_in[r][DIM], h_rs[r][DIM]};
    for (int c = 0; c < DIM; c++) unused_edge ^= ^v_w[DIM][c];
  end

  // ---------------- drain and INT8 recombination ----------------
  logic [RW-1:0]        drain_cnt;            // drain cycles so far
  logic [DIM*ACC_W-1:0] hi_row_q;             // held odd row (INT8)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_cnt <= '0;
      hi_row_q  <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!drain) begin
        drain_cnt <= '0;
      end else begin
        drain_cnt <= drain_cnt + 1'b1;
        if (mode == MODE_INT4) begin
          out_valid <= 1'b1;
          out_row   <= RW'(DIM - 1) - drain_cnt;
          for (int c = 0; c < DIM; c++) out_data[c*ACC_W +: ACC_W] <= acc[DIM-1][c];
        end else if (!drain_cnt[0]) begin
          // bottom row is an odd (high-nibble) row: hold it
          for (int c = 0; c < DIM; c++) hi_row_q[c*ACC_W +: ACC_W] <= acc[DIM-1][c];
        end else begin
          out_valid <= 1'b1;
          out_row   <= (RW'(DIM - 1) - drain_cnt) >> 1;
          out_data  <= '0;
          for (int c = 0; c < DIM/2; c++)
            out_data[c*ACC_W +: ACC_W] <=
                (hi_row_q[(2*c+1)*ACC_W +: ACC_W] << 8)
              + ((hi_row_q[(2*c)*ACC_W +: ACC_W] + acc[DIM-1][2*c+1]) << 4)
              + acc[DIM-1][2*c];
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_clear_drain: assert property (@(posedge clk) disable iff (!rst_n) !(clear && drain))
    else $error("msa: clear and drain asserted together");
`endif

endmodule
