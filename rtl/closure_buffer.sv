// closure_buffer: on-chip storage for the dependence closure of one stage.
//
// Every layer of the stage's partition owns a region of this memory that acts
// as a circular buffer of row-planes. A layer only needs the row-planes that
// the next final-output row-plane still depends on (its part of the
// dependence closure); when computation moves down by one output row-plane,
// the new row-planes overwrite the oldest ones, which are no longer needed.
// Absolute row r of a layer therefore lives in slot (r mod rows) of the
// layer's region, where rows is the closure size at that layer.
//
// A word holds VEC_LEN consecutive channels (a chunk) of one pixel. The
// address of (layer, row, col, chunk) is
//   base + ((row mod rows) * width + col) * chunks + chunk
// with base, rows, width, chunks taken from the layer's descriptor, written by
// cfg_en. Reads return the word one cycle after rd_en. Writes carry a
// per-element mask so that the 64 results of the cluster can fill half a word.
//
// The per-layer circular buffers follow the source design; the word layout,
// the descriptor format, the capacity (1024 words, about 295 KB) and the
// single read and single write port are this design's choices.
//
// Lint notes: positions and addresses use the package-wide 12-bit fields, so
// at the default 1024 words the top address bits and the upper bits of the
// address arithmetic are unused. They are kept so that a larger WORDS needs
// no change to the command format.
module closure_buffer
  import occam_pkg::*;
#(
  parameter int unsigned VEC_LEN    = 128,
  parameter int unsigned DATA_W     = 18,
  parameter int unsigned WORDS      = 1024,
  localparam int unsigned WA        = $clog2(WORDS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           cfg_en,
  input  logic [LAYER_W-1:0]             cfg_layer,
  input  layer_desc_t                    cfg_desc,
  input  logic                           rd_en,
  input  cb_pos_t                        rd_pos,
  output logic [VEC_LEN-1:0][DATA_W-1:0] rd_data,
  input  logic                           wr_en,
  input  cb_pos_t                        wr_pos,
  input  logic [VEC_LEN-1:0][DATA_W-1:0] wr_data,
  input  logic [VEC_LEN-1:0]             wr_mask
);

  layer_desc_t                    desc [MAX_LAYERS];
  logic [VEC_LEN-1:0][DATA_W-1:0] mem  [WORDS];
  logic [CB_AW-1:0]               rd_addr, wr_addr;

  function automatic logic [CB_AW-1:0] word_addr(layer_desc_t d, cb_pos_t p);
    logic [ROW_W-1:0]    slot;
    logic [2*ROW_W+CHUNK_W-1:0] off;
    slot = (d.rows == '0) ? '0 : p.row % ROW_W'(d.rows);
    off  = ((slot * d.width) + (2*ROW_W+CHUNK_W)'(p.col)) * d.chunks
           + (2*ROW_W+CHUNK_W)'(p.chunk);
    return d.base + CB_AW'(off);
  endfunction

  assign rd_addr = word_addr(desc[rd_pos.layer], rd_pos);
  assign wr_addr = word_addr(desc[wr_pos.layer], wr_pos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_LAYERS; i++) desc[i] <= '0;
    end else if (cfg_en) begin
      desc[cfg_layer] <= cfg_desc;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr[WA-1:0]];
    if (wr_en) begin
      for (int e = 0; e < VEC_LEN; e++)
        if (wr_mask[e]) mem[wr_addr[WA-1:0]][e] <= wr_data[e];
    end
  end

endmodule
