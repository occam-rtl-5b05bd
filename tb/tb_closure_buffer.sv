// tb_closure_buffer: checks the per-layer circular row-plane buffers.
// Two layers are configured (3 row-planes x 4 pixels x 2 chunks, and
// 2 row-planes x 3 pixels x 1 chunk). Rows 0..7 of each layer are written in
// order, as a sliding closure would; after each row the rows still held
// (the last `rows` ones) are read back and compared with a reference, which
// also checks that the regions of the two layers do not overlap. Finally a
// masked write (half a word) is checked.
module tb_closure_buffer;
  import occam_pkg::*;
  localparam int VL = 8, DW = 18, WORDS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_en, rd_en, wr_en;
  logic [LAYER_W-1:0] cfg_layer;
  layer_desc_t cfg_desc;
  cb_pos_t rd_pos, wr_pos;
  logic [VL-1:0][DW-1:0] rd_data, wr_data;
  logic [VL-1:0] wr_mask;
  int checks = 0, failures = 0;

  closure_buffer #(.VEC_LEN(VL), .DATA_W(DW), .WORDS(WORDS)) dut (.*);

  function automatic logic [VL-1:0][DW-1:0] pattern(int layer, int row, int col, int chunk);
    logic [VL-1:0][DW-1:0] v;
    for (int e = 0; e < VL; e++) v[e] = DW'(layer * 50000 + row * 1000 + col * 100 + chunk * 10 + e);
    return v;
  endfunction

  task automatic wr(int layer, int row, int col, int chunk, logic [VL-1:0][DW-1:0] d, logic [VL-1:0] m);
    @(negedge clk); wr_en = 1; wr_pos = '{layer: LAYER_W'(layer), row: ROW_W'(row), col: ROW_W'(col), chunk: CHUNK_W'(chunk)};
    wr_data = d; wr_mask = m;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check(int layer, int row, int col, int chunk, logic [VL-1:0][DW-1:0] expv);
    @(negedge clk); rd_en = 1; rd_pos = '{layer: LAYER_W'(layer), row: ROW_W'(row), col: ROW_W'(col), chunk: CHUNK_W'(chunk)};
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data !== expv) begin failures++; $display("FAIL L%0d r%0d c%0d k%0d", layer, row, col, chunk); end
  endtask

  int rows [2] = '{3, 2};
  int width [2] = '{4, 3};
  int chunks [2] = '{2, 1};

  initial begin
    cfg_en = 0; rd_en = 0; wr_en = 0; cfg_layer = 0; cfg_desc = '0; rd_pos = '0; wr_pos = '0; wr_data = '0; wr_mask = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); cfg_en = 1; cfg_layer = 0; cfg_desc = '{base: 0, rows: 3, width: 4, chunks: 2};
    @(negedge clk); cfg_layer = 1; cfg_desc = '{base: 24, rows: 2, width: 3, chunks: 1};
    @(negedge clk); cfg_en = 0;
    for (int r = 0; r < 8; r++) begin
      for (int ly = 0; ly < 2; ly++)
        for (int c = 0; c < width[ly]; c++)
          for (int k = 0; k < chunks[ly]; k++) wr(ly, r, c, k, pattern(ly, r, c, k), '1);
      for (int ly = 0; ly < 2; ly++)
        for (int rr = r - rows[ly] + 1; rr <= r; rr++) if (rr >= 0)
          for (int c = 0; c < width[ly]; c++)
            for (int k = 0; k < chunks[ly]; k++) check(ly, rr, c, k, pattern(ly, rr, c, k));
    end
    // masked write: upper half only
    begin
      logic [VL-1:0][DW-1:0] e, d;
      e = pattern(0, 7, 1, 1);
      for (int i = 0; i < VL; i++) d[i] = (i < VL/2) ? DW'('h2abc) : DW'(i + 7);
      for (int i = VL/2; i < VL; i++) e[i] = DW'(i + 7);
      wr(0, 7, 1, 1, d, {{(VL/2){1'b1}}, {(VL/2){1'b0}}});
      check(0, 7, 1, 1, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
