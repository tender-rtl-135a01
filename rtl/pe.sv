// pe: one processing element of the Multi-Scale Systolic Array.
//
// Output stationary: the PE keeps one 32-bit partial sum (acc). Each cycle it
// takes a 4-bit input from the left and a 4-bit weight from above, and either
//   rescale = 0: acc <= acc + input * weight          (normal MAC)
//   rescale = 1: acc <= acc << 1                       (runtime requantization)
// The 2:1 mux in front of the accumulator and the 1-bit left shifter follow
// the published PE diagram; input, weight and rescale are registered and
// forwarded right / down / right with one cycle of delay, so the rescale bit
// travels with the input wavefront along the row.
//
// Additions of this implementation: in_uns / w_uns select whether a nibble is
// unsigned (used for the low nibbles when four PEs form one INT8 multiplier),
// clear zeroes the accumulator before a tile, and drain turns the accumulators
// of a column into a shift register (acc <= acc_in from the PE above) so the
// results can be read out at the bottom of the array. All register updates are
// on the rising clock edge; rst_n is asynchronous, active low.
module pe
  import tender_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,      // zero acc (tile start)
  input  logic                    drain,      // shift acc down the column
  input  logic                    in_uns,     // input nibble is unsigned
  input  logic                    w_uns,      // weight nibble is unsigned
  input  logic [NIB_W-1:0]        in_i,       // input from the left
  input  logic [NIB_W-1:0]        w_i,        // weight from above
  input  logic                    rescale_i,  // rescale from the left
  input  logic [ACC_W-1:0]        acc_i,      // acc of the PE above (drain)
  output logic [NIB_W-1:0]        in_o,       // forwarded input
  output logic [NIB_W-1:0]        w_o,        // forwarded weight
  output logic                    rescale_o,  // forwarded rescale
  output logic [ACC_W-1:0]        acc_o       // accumulator
);

  logic signed [NIB_W:0]   a_ext, b_ext;
  logic signed [2*NIB_W+1:0] prod;

  always_comb begin
    a_ext = in_uns ? signed'({1'b0, in_i}) : signed'({in_i[NIB_W-1], in_i});
    b_ext = w_uns  ? signed'({1'b0, w_i})  : signed'({w_i[NIB_W-1], w_i});
    prod  = a_ext * b_ext;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_o     <= '0;
      in_o      <= '0;
      w_o       <= '0;
      rescale_o <= 1'b0;
    end else begin
      in_o      <= in_i;
      w_o       <= w_i;
      rescale_o <= rescale_i;
      if (clear)
        acc_o <= '0;
      else if (drain)
        acc_o <= acc_i;
      else if (rescale_i)
        acc_o <= {acc_o[ACC_W-2:0], 1'b0};
      else
        acc_o <= acc_o + ACC_W'(prod);
    end
  end

endmodule
