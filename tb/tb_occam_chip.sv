// tb_occam_chip: end-to-end test of one Occam stage at its default size
// (64 lanes, 128-element subvectors, 18-bit data).
//
// The stage runs a two-layer partition on two images:
//   input map  8 x 6 pixels x 128 channels (off chip)
//   layer A    3x3 conv, 128 -> 64 channels, bias, ReLU, shift 4 -> 6 x 4 map,
//              kept on chip in the closure buffer
//   layer B    3x3 conv, 64 -> 64 channels, bias, shift 10 -> 4 x 2 map,
//              sent off chip
// The filters of both layers are made resident once and reused for both
// images. The closure buffer holds 4 input row-planes and 3 layer-A
// row-planes as circular buffers: the host streams the input row by row
// (prefetching the next row while computing), computes a layer-A row as soon
// as its 3 input rows are present and a final row as soon as its 3 layer-A
// rows are present. Images carry mini-batch ids 0 and 1 and two downstream
// replicas are configured, so image i must leave on replica i.
//
// Checks: every output cell against a reference convolution computed here,
// the replica and tag of every beat, the MAC rate (one step per cycle per
// lane while computing), and that each mechanism happened at least once:
// overlap of loads and MACs, double-buffer stalls, read-after-write stalls,
// DMA stalls, write-port conflicts, link backpressure, on-chip and off-chip
// results, both replicas. Write-port conflicts depend on the exact cycle at
// which a DMA word and a MAC result meet, so after the two images the test
// recomputes one layer-A pixel, each time followed by an input DMA of a
// different length, until a conflict has been seen; the extra results are
// counted in the expected on-chip result and MAC-step totals.
//
// Timing: the host side is driven at the falling clock edge and commands are
// counted as taken when cmd_ready is high at that edge. The off-chip memory
// model answers with a fixed latency and random request stalls.
module tb_occam_chip;
  import occam_pkg::*;
  localparam int L = 64, VL = 128, DW = 18;
  localparam int H = 8, W = 6, K = 3;
  localparam int HA = H - K + 1, WA = W - K + 1, HB = HA - K + 1, WB = WA - K + 1;
  localparam int CB_L = 64;              // layer B input channels
  localparam int FA = 0, BIAS_A = 9*VL, FB = 1280, BIAS_B = 1280 + 9*VL;
  localparam int EXT_FA = 0, EXT_FB = 100000, EXT_IN = 200000;
  localparam int NIMG = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy;
  cmd_t cmd;
  logic ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [EXT_AW-1:0] ext_req_addr;
  logic [DW-1:0] ext_rsp_data;
  logic [1:0] link_valid, link_ready;
  logic [L-1:0][DW-1:0] link_data;
  logic [MB_W-1:0] link_mb;
  events_t events;

  occam_chip dut (.*);
  ext_mem_model #(.DW(DW), .AW(EXT_AW), .WORDS(262144), .LAT(4)) mem (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data));

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ data
  int wa [L][K][K][VL];   // layer A filters [out][dy][dx][in]
  int wb [L][K][K][VL];   // layer B filters (channels >= 64 are zero)
  int ba [L], bb [L];
  int xin [NIMG][H][W][VL];
  int ya [NIMG][HA][WA][L];
  int yb [NIMG][HB][WB][L];

  function automatic int sat(longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return int'(v);
  endfunction

  function automatic int srnd(int m);
    return $urandom_range(0, 2*m) - m;
  endfunction

  initial begin
    for (int o = 0; o < L; o++) begin
      ba[o] = srnd(50); bb[o] = srnd(50);
      for (int dy = 0; dy < K; dy++) for (int dx = 0; dx < K; dx++) for (int i = 0; i < VL; i++) begin
        wa[o][dy][dx][i] = srnd(8);
        wb[o][dy][dx][i] = (i < CB_L) ? srnd(8) : 0;
      end
    end
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int i = 0; i < VL; i++) xin[n][r][c][i] = srnd(8);
    // reference
    for (int n = 0; n < NIMG; n++) begin
      for (int r = 0; r < HA; r++) for (int c = 0; c < WA; c++) for (int o = 0; o < L; o++) begin
        longint a; a = ba[o];
        for (int dy = 0; dy < K; dy++) for (int dx = 0; dx < K; dx++) for (int i = 0; i < VL; i++)
          a += longint'(wa[o][dy][dx][i]) * xin[n][r+dy][c+dx][i];
        a = a >>> 4; if (a < 0) a = 0;
        ya[n][r][c][o] = sat(a);
      end
      for (int r = 0; r < HB; r++) for (int c = 0; c < WB; c++) for (int o = 0; o < L; o++) begin
        longint a; a = bb[o];
        for (int dy = 0; dy < K; dy++) for (int dx = 0; dx < K; dx++) for (int i = 0; i < CB_L; i++)
          a += longint'(wb[o][dy][dx][i]) * ya[n][r+dy][c+dx][i];
        yb[n][r][c][o] = sat(a >>> 10);
      end
    end
    // off-chip memory image: per lane, 9 subvectors then the bias
    for (int o = 0; o < L; o++) begin
      for (int s = 0; s < K*K; s++) for (int i = 0; i < VL; i++) begin
        mem.mem[EXT_FA + o*(9*VL+1) + s*VL + i] = DW'(wa[o][s/3][s%3][i]);
        mem.mem[EXT_FB + o*(9*VL+1) + s*VL + i] = DW'(wb[o][s/3][s%3][i]);
      end
      mem.mem[EXT_FA + o*(9*VL+1) + 9*VL] = DW'(ba[o]);
      mem.mem[EXT_FB + o*(9*VL+1) + 9*VL] = DW'(bb[o]);
    end
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int i = 0; i < VL; i++)
        mem.mem[EXT_IN + ((n*H + r)*W + c)*VL + i] = DW'(xin[n][r][c][i]);
  end

  // ------------------------------------------------------------ host
  function automatic cb_pos_t P(int layer, int row, int col);
    return '{layer: LAYER_W'(layer), row: ROW_W'(row), col: ROW_W'(col), chunk: '0};
  endfunction

  // fast issue: keep cmd_valid high across commands
  cmd_t q [$];
  task automatic flush();
    while (q.size() > 0) begin
      bit r;
      cmd = q[0]; cmd_valid = 1;
      @(negedge clk); r = cmd_ready;   // sampled before the edge that takes it
      @(posedge clk);
      if (r) void'(q.pop_front());
      #1;
    end
    cmd_valid = 0; cmd = '0;
  endtask

  function automatic cmd_t c_op(opcode_e op);
    cmd_t c; c = '0; c.op = op; return c;
  endfunction

  // pending input prefetch words
  cmd_t pre [$];
  function automatic void prefetch_row(int n, int r);
    for (int c = 0; c < W; c++) begin
      cmd_t d; d = c_op(OP_DMA_CB);
      d.ext_addr = EXT_AW'(EXT_IN + ((n*H + r)*W + c)*VL); d.len = LEN_W'(VL); d.pos = P(0, r, c);
      pre.push_back(d);
    end
  endfunction

  function automatic void pixel(int layer, int r, int c);
    cmd_t b; b = c_op(OP_LOAD_BIAS);
    b.fram_addr = FRAM_AW'(layer == 0 ? BIAS_A : BIAS_B);
    q.push_back(b);
    for (int k = 0; k < K*K; k++) begin
      int s; cmd_t w, x, m;
      s = (layer == 0) ? k : K*K-1-k;     // layer B walks its window backwards
      w = c_op(OP_LOAD_W); w.fram_addr = FRAM_AW'((layer == 0 ? FA : FB) + s*VL);
      x = c_op(OP_LOAD_X); x.pos = P(layer, r + s/3, c + s%3);
      m = c_op(OP_MAC);    m.first = (k == 0); m.last = (k == K*K-1);
      if (layer == 0) begin m.dst_onchip = 1; m.dst = P(1, r, c); m.relu = 1; m.shift = 4; end
      else            begin m.dst_onchip = 0; m.relu = 0; m.shift = 10; end
      q.push_back(w); q.push_back(x); q.push_back(m);
      if (pre.size() > 0) q.push_back(pre.pop_front());
    end
  endfunction

  // ------------------------------------------------------------ output side
  int nbeat = 0, nrep_seen [2] = '{0, 0};
  int expect_n [$], expect_r [$], expect_c [$];
  always @(posedge clk) begin
    link_ready <= 2'($urandom_range(0, 3));
    if (rst_n && (link_valid & link_ready) != 0) begin
      int n, r, c, rep;
      rep = link_valid[1] ? 1 : 0;
      n = expect_n.pop_front(); r = expect_r.pop_front(); c = expect_c.pop_front();
      nrep_seen[rep]++;
      checks++;
      if (int'(link_mb) != n || rep != n % 2) begin failures++; $display("FAIL beat %0d mb %0d replica %0d", nbeat, link_mb, rep); end
      for (int o = 0; o < L; o++) begin
        checks++;
        if ($signed(link_data[o]) != yb[n][r][c][o]) begin
          failures++;
          if (failures < 10) $display("FAIL img %0d out(%0d,%0d) ch %0d: %0d vs %0d", n, r, c, o, $signed(link_data[o]), yb[n][r][c][o]);
        end
      end
      nbeat++;
    end
  end

  // ------------------------------------------------------------ event counters
  int n_extra = 0;
  longint cyc = 0, n_step = 0, n_overlap = 0, n_sbuf = 0, n_raw = 0, n_sdma = 0, n_conf = 0, n_bp = 0, n_on = 0, n_off = 0;
  bit counting = 0;
  longint ccyc = 0, cstep = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_step    += events.mac_step;
    n_overlap += events.overlap;
    n_sbuf    += events.stall_buffer;
    n_raw     += events.stall_raw;
    n_sdma    += events.stall_dma;
    n_conf    += events.port_conflict;
    n_bp      += events.backpressure;
    n_on      += events.result_onchip;
    n_off     += events.result_offchip;
    if (counting) begin ccyc++; cstep += events.mac_step; end
  end

  // ------------------------------------------------------------ run
  initial begin
    cmd_valid = 0; cmd = '0; link_ready = 0;
    repeat (5) @(negedge clk); rst_n = 1;
    begin
      cmd_t c;
      c = c_op(OP_SET_LAYER); c.pos = P(0, 0, 0); c.desc = '{base: 0, rows: 4, width: W, chunks: 1}; q.push_back(c);
      c = c_op(OP_SET_LAYER); c.pos = P(1, 0, 0); c.desc = '{base: 32, rows: 3, width: WA, chunks: 1}; q.push_back(c);
      // filters made resident once (warm-up)
      for (int o = 0; o < L; o++) begin
        c = c_op(OP_DMA_FRAM); c.lane = 6'(o); c.len = LEN_W'(9*VL+1);
        c.ext_addr = EXT_AW'(EXT_FA + o*(9*VL+1)); c.fram_addr = FRAM_AW'(FA); q.push_back(c);
        c.ext_addr = EXT_AW'(EXT_FB + o*(9*VL+1)); c.fram_addr = FRAM_AW'(FB); q.push_back(c);
      end
      flush();
    end
    for (int n = 0; n < NIMG; n++) begin
      cmd_t c;
      c = c_op(OP_SET_MB); c.mb = MB_W'(n); c.nrep = 2; q.push_back(c);
      for (int r = 0; r < K; r++) prefetch_row(n, r);
      while (pre.size() > 0) q.push_back(pre.pop_front());
      if (n == 0) begin flush(); while (busy) @(negedge clk); counting = 1; end
      for (int j = 0; j < HA; j++) begin
        if (j + K < H) prefetch_row(n, j + K);
        for (int cc = 0; cc < WA; cc++) pixel(0, j, cc);
        if (j >= K - 1)
          for (int cc = WB - 1; cc >= 0; cc--) begin
            pixel(1, j - (K-1), cc);
            expect_n.push_back(n); expect_r.push_back(j - (K-1)); expect_c.push_back(cc);
          end
        while (pre.size() > 0) q.push_back(pre.pop_front());
        flush();
      end
    end
    while (busy || nbeat < NIMG*HB*WB) @(negedge clk);
    counting = 0;
    // Write-port sharing: recompute one layer-A pixel several times, each
    // time followed by an input-word DMA of a different length, so that the
    // DMA word meets the MAC result at the closure buffer's write port.
    for (int len = 60; len <= VL && n_conf == 0; len += 2) begin
      cmd_t d;
      pixel(0, HA-1, 0);
      d = c_op(OP_DMA_CB); d.ext_addr = EXT_AW'(EXT_IN); d.len = LEN_W'(len); d.pos = P(0, 0, 0);
      q.push_back(d);
      flush();
      while (busy) @(negedge clk);
      n_extra++;
    end
    // results
    checks++; if (nbeat != NIMG*HB*WB) begin failures++; $display("FAIL beats %0d", nbeat); end
    checks++; if (n_step != longint'((NIMG*(HA*WA + HB*WB) + n_extra)*K*K*VL)) begin failures++; $display("FAIL steps %0d", n_step); end
    // rate: while computing, the cluster does one step per cycle almost always
    $display("compute phase: %0d cycles, %0d MAC steps (%0.1f%%)", ccyc, cstep, 100.0*cstep/ccyc);
    checks++; if (cstep * 100 < ccyc * 80) begin failures++; $display("FAIL MAC rate below 80%%"); end
    $display("events: overlap %0d stall_buffer %0d stall_raw %0d stall_dma %0d port_conflict %0d backpressure %0d onchip %0d offchip %0d replicas %0d/%0d",
             n_overlap, n_sbuf, n_raw, n_sdma, n_conf, n_bp, n_on, n_off, nrep_seen[0], nrep_seen[1]);
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL no overlap"); end
    checks++; if (n_sbuf == 0) begin failures++; $display("FAIL no buffer stall"); end
    checks++; if (n_raw == 0) begin failures++; $display("FAIL no RAW stall"); end
    checks++; if (n_sdma == 0) begin failures++; $display("FAIL no DMA stall"); end
    checks++; if (n_conf == 0) begin failures++; $display("FAIL no port conflict"); end
    checks++; if (n_bp == 0) begin failures++; $display("FAIL no backpressure"); end
    checks++; if (n_on != NIMG*HA*WA + n_extra) begin failures++; $display("FAIL onchip %0d", n_on); end
    checks++; if (n_off != NIMG*HB*WB) begin failures++; $display("FAIL offchip %0d", n_off); end
    checks++; if (nrep_seen[0] == 0 || nrep_seen[1] == 0) begin failures++; $display("FAIL replica unused"); end
    $display("total cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
