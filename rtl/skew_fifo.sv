// skew_fifo: the Input FIFO / Weight FIFO at the edges of the systolic array.
//
// A systolic array needs lane i of a vector to arrive i cycles after lane 0 so
// that the operands of one reduction step meet in every PE on the same
// wavefront. This block takes a whole vector (LANES lanes of W bits) per cycle
// and delays lane i by i register stages; lane 0 passes through combinationally
// (zero delay). Lanes hold zero after reset, so an idle array multiplies
// zeros. One instance skews the input rows, another the weight columns; the
// input instance also skews the rescale bit of every row (W = 5: nibble plus
// rescale), which is how the rescale command follows the input wavefront.
// The published design names these FIFOs and their count (64 per side); the
// shift-register structure is this implementation's choice.
module skew_fifo #(
  parameter int unsigned LANES = 64,
  parameter int unsigned W     = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LANES*W-1:0]  d_i,
  output logic [LANES*W-1:0]  d_o
);

  assign d_o[W-1:0] = d_i[W-1:0];

  for (genvar l = 1; l < LANES; l++) begin : g_lane
    logic [W-1:0] sr [l];   // l stages for lane l
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < l; s++) sr[s] <= '0;
      end else begin
        sr[0] <= d_i[l*W +: W];
        for (int s = 1; s < l; s++) sr[s] <= sr[s-1];
      end
    end
    assign d_o[l*W +: W] = sr[l-1];
  end

endmodule
