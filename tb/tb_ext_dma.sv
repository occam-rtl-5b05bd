// tb_ext_dma: runs filter transfers (into a captured filter-RAM image) and
// input-word transfers (into captured closure-buffer writes) from a random
// off-chip memory with random request stalls. Checks every filter element,
// every packed word (including zero padding of a short word), that a word
// write is held until granted, and that busy drops when done.
module tb_ext_dma;
  import occam_pkg::*;
  localparam int DW = 18, VL = 16, L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, to_fram, busy, fram_busy;
  logic [EXT_AW-1:0] ext_addr;
  logic [LEN_W-1:0] len;
  logic [1:0] lane;
  logic [FRAM_AW-1:0] fram_addr;
  cb_pos_t pos, cb_wr_pos;
  logic ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [EXT_AW-1:0] ext_req_addr;
  logic [DW-1:0] ext_rsp_data, fram_wr_data;
  logic fram_wr_en, cb_wr_valid, cb_wr_grant;
  logic [1:0] fram_wr_lane;
  logic [FRAM_AW-1:0] fram_wr_addr;
  logic [VL-1:0][DW-1:0] cb_wr_data;
  int checks = 0, failures = 0;

  ext_dma #(.DATA_W(DW), .VEC_LEN(VL), .LANES(L)) dut (.*);
  ext_mem_model #(.DW(DW), .AW(EXT_AW), .WORDS(4096), .LAT(3)) mem (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data));

  logic [DW-1:0] fimg [L][256];
  always @(posedge clk) if (fram_wr_en) fimg[fram_wr_lane][fram_wr_addr] <= fram_wr_data;

  int held = 0;
  initial begin
    start = 0; to_fram = 0; ext_addr = 0; len = 0; lane = 0; fram_addr = 0; pos = '0; cb_wr_grant = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = DW'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    // filter transfers: 4 lanes x 40 elements
    for (int l = 0; l < L; l++) begin
      @(negedge clk); start = 1; to_fram = 1; ext_addr = EXT_AW'(100 + 40*l); len = 40; lane = 2'(l); fram_addr = FRAM_AW'(10);
      @(negedge clk); start = 0;
      while (busy || fram_busy) @(negedge clk);
      for (int i = 0; i < 40; i++) begin
        checks++;
        if (fimg[l][10+i] !== mem.mem[100+40*l+i]) begin failures++; $display("FAIL fram lane %0d elem %0d", l, i); end
      end
    end
    // input words, full and short (len 5 -> zero padded)
    for (int t = 0; t < 6; t++) begin
      int n; n = (t == 3) ? 5 : VL;
      @(negedge clk); start = 1; to_fram = 0; ext_addr = EXT_AW'(1000 + 37*t); len = LEN_W'(n);
      pos = '{layer: 3'(t), row: 12'(t+1), col: 12'(2*t), chunk: 4'(t)};
      @(negedge clk); start = 0;
      while (!cb_wr_valid) @(negedge clk);
      // hold off the grant for a few cycles: the word must stay put
      repeat (3) begin @(negedge clk); if (cb_wr_valid) held++; end
      cb_wr_grant = 1;
      checks++;
      if (cb_wr_pos != pos) begin failures++; $display("FAIL pos"); end
      for (int e = 0; e < VL; e++) begin
        logic [DW-1:0] ev; ev = (e < n) ? mem.mem[1000+37*t+e] : '0;
        checks++;
        if (cb_wr_data[e] !== ev) begin failures++; $display("FAIL word %0d elem %0d", t, e); end
      end
      @(negedge clk); cb_wr_grant = 0;
      checks++; if (busy) begin failures++; $display("FAIL busy after grant"); end
    end
    checks++; if (held != 18) begin failures++; $display("FAIL word not held (%0d)", held); end
    checks++; if (mem.stalls == 0) begin failures++; $display("FAIL no request stalls seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
