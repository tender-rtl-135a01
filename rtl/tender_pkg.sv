// tender_pkg: types and constants shared by the Tender accelerator RTL.
//
// The accelerator multiplies activation tensors whose channels have been split
// into groups with scale factors a power of two apart. Channels are streamed
// into an output-stationary systolic array in group order (largest scale
// first); between groups a one-cycle bubble shifts every accumulator left by
// one bit, so the partial sums of all groups end up in the scale of the last
// (smallest) group without any floating-point rescaling.
//
// Sizes that follow the published configuration: a 64x64 array of 4-bit PEs,
// 32-bit accumulators, 2x256 KB scratchpad, 2x16 KB index buffer, 64 KB output
// buffer, 64 VPU lanes. Everything else here (index width, group table size,
// HBM beat width, command encodings) is a choice of this implementation.
package tender_pkg;

  // Array and datapath sizes
  localparam int unsigned ARRAY_DIM = 64;   // PEs per side of the array
  localparam int unsigned NIB_W     = 4;    // operand width of one PE
  localparam int unsigned ACC_W     = 32;   // accumulator width
  localparam int unsigned WORD_W    = ARRAY_DIM * NIB_W;  // one channel vector: 256 bits
  localparam int unsigned IDX_W     = 16;   // channel index width
  localparam int unsigned MAX_GROUPS = 16;  // channel groups per pass

  // Memories (words of WORD_W bits unless noted)
  localparam int unsigned SPM_BYTES   = 256 * 1024;                 // per scratchpad
  localparam int unsigned SPM_WORDS   = SPM_BYTES * 8 / WORD_W;     // 8192 words
  localparam int unsigned IDXB_BYTES  = 16 * 1024;                  // per index bank
  localparam int unsigned IDXB_ENTRIES = IDXB_BYTES * 8 / IDX_W;     // 8192 entries
  localparam int unsigned OBUF_BYTES  = 64 * 1024;
  localparam int unsigned OBUF_ROWS   = OBUF_BYTES * 8 / (ARRAY_DIM * ACC_W);  // 256 rows

  // Precision mode of the array and the VPU
  typedef enum logic {
    MODE_INT4 = 1'b0,   // every PE is one 4-bit x 4-bit MAC
    MODE_INT8 = 1'b1    // a 2x2 block of PEs forms one 8-bit x 8-bit MAC
  } prec_e;

  // HBM controller transfer kinds
  typedef enum logic [1:0] {
    DMA_LOAD_IN  = 2'd0,  // HBM -> input scratchpad
    DMA_LOAD_W   = 2'd1,  // HBM -> weight scratchpad
    DMA_LOAD_IDX = 2'd2,  // HBM -> index buffer (shadow bank)
    DMA_STORE_IN = 2'd3   // input scratchpad -> HBM (e.g. results written by the VPU)
  } dma_op_e;

  // One pass of the Execution Controller over an output tile.
  // split_pos[i], i < num_splits, are ascending positions in the compute
  // order; a rescale bubble is inserted right before the channel at that
  // position (a split at position 0 rescales what earlier passes left in the
  // accumulators). G channel groups in one pass need G-1 splits.
  typedef struct packed {
    prec_e                          mode;
    logic                           clear_acc;  // zero accumulators first
    logic                           drain;      // drain results at the end
    logic [15:0]                    num_ch;     // channels in this pass (1..)
    logic [4:0]                     num_splits; // 0..MAX_GROUPS
    logic [MAX_GROUPS-1:0][15:0]    split_pos;
    logic [15:0]                    in_base;    // input scratchpad base
    logic [15:0]                    w_base;     // weight scratchpad base
    logic [15:0]                    out_base;   // output buffer base row
  } tile_cfg_t;

  // One transfer of the HBM controller; len counts 256-bit beats.
  typedef struct packed {
    dma_op_e      op;
    logic [31:0]  hbm_addr;   // in beats
    logic [15:0]  loc_addr;   // scratchpad word or index buffer line
    logic [15:0]  len;
  } dma_cmd_t;

  // One VPU requantization job over consecutive output buffer rows.
  typedef struct packed {
    prec_e        mode;       // INT4: 64 lanes -> 4 bit, INT8: 32 lanes -> 8 bit
    logic         relu;       // apply ReLU before quantization
    logic [4:0]   shift;      // arithmetic right shift after scaling
    logic [15:0]  src_row;    // first output buffer row
    logic [15:0]  num_rows;
    logic [15:0]  dst_addr;   // first input scratchpad word written
  } vpu_cmd_t;

endpackage
