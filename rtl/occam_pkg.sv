// occam_pkg: types and constants shared by the Occam stage (one chip of the
// Occam pipeline). The lane count (64), the subvector length (128) and the
// 18-bit operand width follow the FPGA cluster the design is based on; the
// accumulator width, memory sizes, field widths and the command encoding are
// this design's own choices.
package occam_pkg;

  // Field widths. The datapath and memory sizes are module parameters
  // (lanes 64, subvector 128, operands 18 bits, accumulator 48 bits,
  // filter RAM 3072 words per lane, closure buffer 1024 words).
  localparam int unsigned FRAM_AW      = 12;    // filter RAM address width
  localparam int unsigned CB_AW        = 12;    // closure-buffer address width (room for 4096)
  localparam int unsigned MAX_LAYERS   = 8;     // layer descriptors in the closure buffer
  localparam int unsigned LAYER_W      = $clog2(MAX_LAYERS);
  localparam int unsigned ROW_W        = 12;    // absolute row / column index width
  localparam int unsigned CHUNK_W      = 4;     // 128-channel chunk index width
  localparam int unsigned EXT_AW       = 26;    // off-chip element address width
  localparam int unsigned LEN_W        = 13;    // DMA transfer length width
  localparam int unsigned MB_W         = 8;     // mini-batch id width
  localparam int unsigned REP_W        = 2;     // replica count field (up to 3)

  // Position of one closure-buffer word: 128 channels of one pixel of one
  // layer's feature map. row is the absolute row of the map; the buffer maps
  // it onto its circular slots.
  typedef struct packed {
    logic [LAYER_W-1:0] layer;
    logic [ROW_W-1:0]   row;
    logic [ROW_W-1:0]   col;
    logic [CHUNK_W-1:0] chunk;
  } cb_pos_t;

  // Per-layer circular buffer descriptor.
  typedef struct packed {
    logic [CB_AW-1:0]   base;    // first word of the layer's region
    logic [7:0]         rows;    // row-planes held (size of the closure at this layer)
    logic [ROW_W-1:0]   width;   // pixels per row
    logic [CHUNK_W-1:0] chunks;  // 128-channel chunks per pixel
  } layer_desc_t;

  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_SET_LAYER = 4'd1,  // write a closure-buffer layer descriptor
    OP_SET_MB    = 4'd2,  // set the current mini-batch id and downstream replica count
    OP_DMA_FRAM  = 4'd3,  // off-chip -> filter RAM (filter warm-up)
    OP_DMA_CB    = 4'd4,  // off-chip -> closure buffer (one input-map word)
    OP_LOAD_W    = 4'd5,  // filter RAM -> lanes' filter subvector buffer
    OP_LOAD_X    = 4'd6,  // closure buffer -> input subvector buffer
    OP_LOAD_BIAS = 4'd7,  // filter RAM -> lanes' bias registers
    OP_MAC       = 4'd8   // one subvector-subvector multiply in every lane
  } opcode_e;

  // Host command. Fields not used by an opcode are ignored.
  typedef struct packed {
    opcode_e            op;
    cb_pos_t            pos;        // LOAD_X source, DMA_CB destination, SET_LAYER layer
    cb_pos_t            dst;        // MAC (last) destination in the closure buffer
    layer_desc_t        desc;       // SET_LAYER
    logic [EXT_AW-1:0]  ext_addr;   // DMA source
    logic [LEN_W-1:0]   len;        // DMA length in elements
    logic [FRAM_AW-1:0] fram_addr;  // LOAD_W / LOAD_BIAS source, DMA_FRAM destination
    logic [5:0]         lane;       // DMA_FRAM destination bank
    logic               first;      // MAC: first subvector of an output cell
    logic               last;       // MAC: last subvector, results leave the lanes
    logic               dst_onchip; // MAC last: write closure buffer (1) or send off chip (0)
    logic               dst_half;   // MAC last: which 64-channel half of the word
    logic               relu;       // MAC last: apply ReLU
    logic [4:0]         shift;      // MAC last: requantisation right shift
    logic [MB_W-1:0]    mb;         // SET_MB
    logic [REP_W-1:0]   nrep;       // SET_MB
  } cmd_t;

  // One-cycle event pulses, for observation and performance counting.
  typedef struct packed {
    logic mac_step;        // a MAC step was issued
    logic overlap;         // a subvector load ran in the same cycle as a MAC step
    logic stall_buffer;    // a load or MAC waited for a double-buffer bank
    logic stall_raw;       // an input load waited for a pending result write
    logic stall_dma;       // a command waited for the DMA engine
    logic port_conflict;   // a DMA write lost the closure-buffer write port
    logic backpressure;    // a result beat waited for a downstream replica
    logic result_onchip;   // a result was written to the closure buffer
    logic result_offchip;  // a result was sent off chip
  } events_t;

endpackage
