// tb_occam_ctrl: tests the command sequencer alone (subvector length 8).
// The testbench plays the memories: it records which filter-RAM address and
// which closure-buffer position were loaded into each double-buffer bank, and
// checks at each MAC that the steps use the banks loaded by that MAC's own
// LOAD_W and LOAD_X, that steps are consecutive, that first/last are honoured,
// that results appear after the drain with the right destination or
// mini-batch tag, that a LOAD_X of a word a pending result will write waits
// for the write (read-after-write), that loads wait while the DMA holds the
// filter RAM, and that with double buffering N subvectors take about
// N*(VEC_LEN+1) cycles instead of 2*N*VEC_LEN.
module tb_occam_ctrl;
  import occam_pkg::*;
  localparam int VL = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy;
  cmd_t cmd;
  logic cfg_en, cb_rd_en, dma_start, dma_busy, dma_fram_busy, fr_rd_en;
  logic [LAYER_W-1:0] cfg_layer;
  layer_desc_t cfg_desc;
  cb_pos_t cb_rd_pos, res_wr_pos;
  logic [FRAM_AW-1:0] fr_rd_addr;
  logic x_wr_en, x_wr_bank, w_wr_en, w_wr_bank, bias_wr_en, step_valid, step_bank, step_first;
  logic [2:0] w_wr_idx, step_idx;
  logic po_in_valid, po_relu, res_wr_en, res_wr_half, res_out_valid, res_out_ready;
  logic [4:0] po_shift;
  logic [MB_W-1:0] res_out_mb;
  logic [REP_W-1:0] nrep;
  events_t events;

  occam_ctrl #(.VEC_LEN(VL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // ---- memory side models
  logic [FRAM_AW-1:0] fr_addr_q [$];
  logic               fr_q;
  logic [FRAM_AW-1:0] fr_last;
  int                 wtag [2], xtag [2];
  cb_pos_t            rdpos_q;
  int                 wcount = 0;
  always @(posedge clk) begin
    fr_q    <= fr_rd_en;
    fr_last <= fr_rd_addr;
    rdpos_q <= cb_rd_pos;
    if (w_wr_en) begin
      // element idx must come from address base+idx
      if (w_wr_idx == 3'(VL-1)) wtag[w_wr_bank] <= int'(fr_last) - (VL-1);
    end
    if (x_wr_en) xtag[x_wr_bank] <= int'(rdpos_q.col);
  end

  // ---- expected MAC sequence
  int exp_w [$], exp_x [$];
  bit exp_first [$], exp_last [$];
  int nmac = 0, step_run = 0;
  int last_step_t = -100, po_t = -100;
  longint cyc = 0;
  int n_raw = 0, n_buf = 0, n_dma = 0, n_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_raw += events.stall_raw; n_buf += events.stall_buffer; n_dma += events.stall_dma; n_overlap += events.overlap;
    if (step_valid) begin
      if (step_idx == 0) begin
        chk(exp_w.size() > 0, "unexpected MAC");
        if (exp_w.size() > 0) begin
          chk(wtag[step_bank] == exp_w[0], $sformatf("MAC %0d W bank tag %0d vs %0d", nmac, wtag[step_bank], exp_w[0]));
          chk(xtag[step_bank] == exp_x[0], $sformatf("MAC %0d X bank tag %0d vs %0d", nmac, xtag[step_bank], exp_x[0]));
          chk(step_first == exp_first[0], "first flag");
        end
        step_run = 0;
      end else begin
        chk(step_first == 0, "first only on step 0");
      end
      chk(int'(step_idx) == step_run, "consecutive step index");
      step_run++;
      if (step_idx == 3'(VL-1)) begin
        if (exp_last[0]) last_step_t = int'(cyc);
        void'(exp_w.pop_front()); void'(exp_x.pop_front()); void'(exp_first.pop_front()); void'(exp_last.pop_front());
        nmac++;
      end
    end
    if (po_in_valid) begin
      chk(int'(cyc) == last_step_t + 2, "post_op two cycles after the last step");
      po_t = int'(cyc);
    end
  end

  task automatic send(cmd_t c);
    // ready is sampled half a cycle before the edge that takes the command
    @(negedge clk); cmd = c; cmd_valid = 1; #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 cmd_valid = 0; cmd = '0;
  endtask

  function automatic cmd_t op(opcode_e o);
    cmd_t c; c = '0; c.op = o; return c;
  endfunction

  task automatic triple(int waddr, int xcol, bit first, bit last, bit onchip, int dcol);
    cmd_t c;
    c = op(OP_LOAD_W); c.fram_addr = FRAM_AW'(waddr); send(c);
    c = op(OP_LOAD_X); c.pos.col = ROW_W'(xcol); send(c);
    c = op(OP_MAC); c.first = first; c.last = last; c.dst_onchip = onchip; c.dst.col = ROW_W'(dcol); c.shift = 5'd3;
    exp_w.push_back(waddr); exp_x.push_back(xcol); exp_first.push_back(first); exp_last.push_back(last);
    send(c);
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; dma_busy = 0; dma_fram_busy = 0; res_out_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    // 1. sixteen subvectors back to back: double buffering keeps ~1 step/cycle
    begin
      longint t0, t1;
      cmd_t c;
      c = op(OP_SET_MB); c.mb = 8'd7; c.nrep = 2; send(c);
      chk(nrep == 2, "nrep");
      c = op(OP_LOAD_BIAS); c.fram_addr = 12'd999; send(c);
      t0 = cyc;
      for (int k = 0; k < 16; k++) triple(16*k, 100+k, k == 0, k == 15, 0, 0);
      // off-chip result: held until ready
      repeat (3) @(posedge clk);
      while (!res_out_valid) @(posedge clk);
      chk(res_out_mb == 8'd7, "result tagged with mini-batch");
      chk(int'(cyc) >= po_t, "result after post_op");
      repeat (4) begin @(posedge clk); chk(res_out_valid, "result held without ready"); end
      #1 res_out_ready = 1;
      @(posedge clk); #1 res_out_ready = 0;
      while (busy) @(posedge clk);
      t1 = cyc;
      $display("16 subvectors of %0d: %0d cycles", VL, t1 - t0);
      chk(t1 - t0 < 2*16*VL*8/10, "double-buffered rate (well under 2 x VEC_LEN per subvector)");
      chk(n_overlap > 0, "loads overlapped MAC steps");
      chk(n_buf > 0, "buffer-full stalls seen");
    end
    // 2. read-after-write: LOAD_X of the word a pending result writes
    begin
      cmd_t c;
      int wr_t, rd_t;
      triple(0, 1, 1, 0, 1, 55);
      c = op(OP_LOAD_W); c.fram_addr = 12'd200; send(c);
      c = op(OP_LOAD_X); c.pos.col = 12'd2; send(c);
      c = op(OP_MAC); c.first = 0; c.last = 1; c.dst_onchip = 1; c.dst.col = 12'd55;
      exp_w.push_back(200); exp_x.push_back(2); exp_first.push_back(0); exp_last.push_back(1);
      send(c);
      fork
        begin @(posedge clk iff res_wr_en); wr_t = int'(cyc); chk(res_wr_pos.col == 12'd55, "result position"); end
        begin @(posedge clk iff cb_rd_en && cb_rd_pos.col == 12'd55); rd_t = int'(cyc); end
        begin c = op(OP_LOAD_X); c.pos.col = 12'd55; send(c); end
      join
      chk(rd_t > wr_t, $sformatf("RAW order read %0d after write %0d", rd_t, wr_t));
      chk(n_raw > 0, "RAW stall seen");
      // consume the buffered X with a matching W/MAC
      c = op(OP_LOAD_W); c.fram_addr = 12'd300; send(c);
      c = op(OP_MAC); c.first = 1; c.last = 1; c.dst_onchip = 1;
      exp_w.push_back(300); exp_x.push_back(55); exp_first.push_back(1); exp_last.push_back(1);
      send(c);
      while (busy) @(posedge clk);
    end
    // 3. LOAD_W waits while the DMA writes the filter RAM
    begin
      cmd_t c;
      int issue_t;
      dma_busy = 1; dma_fram_busy = 1;
      fork
        begin c = op(OP_LOAD_W); c.fram_addr = 12'd400; send(c); issue_t = int'(cyc); end
        begin repeat (10) @(posedge clk); #1 dma_busy = 0; dma_fram_busy = 0; end
      join
      chk(issue_t >= 10, "LOAD_W held during DMA");
      chk(n_dma > 0, "DMA stall seen");
      c = op(OP_LOAD_X); c.pos.col = 12'd9; send(c);
      c = op(OP_MAC); c.first = 1; c.last = 0;
      exp_w.push_back(400); exp_x.push_back(9); exp_first.push_back(1); exp_last.push_back(0);
      send(c);
      while (busy) @(posedge clk);
    end
    chk(exp_w.size() == 0, "all MACs ran");
    chk(nmac == 20, $sformatf("MAC count %0d", nmac));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule


