// scratchpad: one Scratchpad Memory (input banks or weight banks).
//
// Holds INT4/INT8 operands organised by channel: word a is one channel vector
// of WORD_W bits, i.e. one 4-bit (or 8-bit) element per array row for an
// activation tile, or per array column for a weight tile. Because every
// channel is a whole word, the Execution Controller can fetch channels in any
// order simply by address (base + channel index); no data is ever reordered
// in memory. Two instances of 256 KB (8192 words of 256 bits) form the
// published 2 x 256 KB Scratchpad Memory; assigning one to inputs and one to
// weights is this implementation's reading of the published dataflow figure.
//
// Ports (all synchronous to clk, reads have one cycle of latency):
//   rd_*  : read port used by the Execution Controller to feed the array
//   wr_*  : write port (HBM Controller loads, VPU results)
//   rd2_* : second read port used by the HBM Controller to store data back
// The words of the 256-bit wide array play the role of the banks: all
// DIM lanes of a channel are read in one access.
module scratchpad
  import tender_pkg::*;
#(
  parameter int unsigned DEPTH = tender_pkg::SPM_WORDS,
  parameter int unsigned W     = tender_pkg::WORD_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic [W-1:0]              rd_data,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [W-1:0]              wr_data,
  input  logic                      rd2_en,
  input  logic [$clog2(DEPTH)-1:0]  rd2_addr,
  output logic [W-1:0]              rd2_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data  <= '0;
      rd2_data <= '0;
    end else begin
      if (rd_en)  rd_data  <= mem[rd_addr];
      if (rd2_en) rd2_data <= mem[rd2_addr];
    end
  end

endmodule
