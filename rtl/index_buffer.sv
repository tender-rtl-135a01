// index_buffer: double-buffered Index Buffer holding the channel compute order.
//
// Tender processes the channel groups of an activation tile in order of
// decreasing scale factor, which is not the order of the channels in memory.
// Instead of moving data, the calibrated compute order (a list of channel
// indices) is kept here and the Execution Controller fetches channels
// indirectly through it. As published, the buffer is double-buffered (2 x 16
// KB) so that the order for the next row chunk can be loaded while the current
// one is in use.
//
// Organisation (this implementation's choice): each bank holds DEPTH entries
// of IDX_W bits (8192 x 16 bit = 16 KB). The HBM Controller writes whole lines
// of LINE_W bits (16 entries, entry e of a line in bits [e*IDX_W +: IDX_W])
// into the shadow bank; the Execution Controller reads single entries of the
// active bank with one cycle of latency. A one-cycle pulse on swap exchanges
// active and shadow banks. Reset makes bank 0 active.
module index_buffer
  import tender_pkg::*;
#(
  parameter int unsigned DEPTH  = tender_pkg::IDXB_ENTRIES,
  parameter int unsigned LINE_W = tender_pkg::WORD_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  swap,
  output logic                                  active_bank,
  // write port: shadow bank, one line per cycle
  input  logic                                  wr_en,
  input  logic [$clog2(DEPTH/(LINE_W/IDX_W))-1:0] wr_line,
  input  logic [LINE_W-1:0]                     wr_data,
  // read port: active bank, one entry per cycle
  input  logic                                  rd_en,
  input  logic [$clog2(DEPTH)-1:0]              rd_addr,
  output logic [IDX_W-1:0]                      rd_data
);

  localparam int unsigned PER_LINE = LINE_W / IDX_W;
  localparam int unsigned LINES    = DEPTH / PER_LINE;
  localparam int unsigned OW       = $clog2(PER_LINE);

  logic [LINE_W-1:0] bank0 [LINES];
  logic [LINE_W-1:0] bank1 [LINES];
  logic [LINE_W-1:0] line_q;
  logic [OW-1:0]     off_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) active_bank <= 1'b0;
    else if (swap) active_bank <= ~active_bank;
  end

  always_ff @(posedge clk) begin
    if (wr_en && active_bank)  bank0[wr_line] <= wr_data;
    if (wr_en && !active_bank) bank1[wr_line] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_q <= '0;
      off_q  <= '0;
    end else if (rd_en) begin
      line_q <= active_bank ? bank1[rd_addr[$clog2(DEPTH)-1:OW]]
                            : bank0[rd_addr[$clog2(DEPTH)-1:OW]];
      off_q  <= rd_addr[OW-1:0];
    end
  end

  assign rd_data = line_q[off_q*IDX_W +: IDX_W];

endmodule
