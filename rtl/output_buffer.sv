// output_buffer: INT32 Output Buffer between the systolic array and the VPU.
//
// Stores the matrix-multiplication results drained from the array, one row of
// DIM 32-bit values per word, and hands them to the VPU for requantization.
// The published buffer is 64 KB and "highly banked" to keep up with the VPU;
// here each 32-bit lane is one bank and a whole row of all lanes is written
// (by the array drain) or read (by the VPU) per cycle, so both sides run at
// one row per cycle. 64 KB / (64 x 4 B) = 256 rows. Reads have one cycle of
// latency.
module output_buffer
  import tender_pkg::*;
#(
  parameter int unsigned DEPTH = tender_pkg::OBUF_ROWS,
  parameter int unsigned W     = tender_pkg::ARRAY_DIM * tender_pkg::ACC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [W-1:0]              wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic [W-1:0]              rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
