// occam_ctrl: command sequencer of one Occam stage.
//
// The host sends commands (cmd_t) on a valid/ready port; they are issued in
// order, one per cycle at most, to four engines that then run concurrently:
//   - the filter loader (LOAD_W, LOAD_BIAS) streams a filter subvector from
//     the filter RAM into a free bank of every lane, one element per cycle;
//   - the input loader (LOAD_X) copies a 128-channel word of the closure
//     buffer into a free bank of the cluster's input double buffer;
//   - the MAC engine (MAC) runs VEC_LEN steps on the oldest full pair of
//     banks, one step per cycle, then frees them; for the last subvector of an
//     output cell it drains the lanes through post_op and either writes the 64
//     results into the closure buffer (the next layer's input, dst) or sends
//     them off chip tagged with the current mini-batch id;
//   - the DMA engine (DMA_FRAM, DMA_CB), in ext_dma.
// Because each double buffer has two banks, the loads for subvector j+1 run
// while subvector j is multiplied, so the cluster sustains one step per cycle.
//
// Hazards that hold a command back (each reported as an event pulse):
//   stall_buffer  LOAD_W/LOAD_X target bank still full, or MAC banks not yet
//                 loaded;
//   stall_raw     LOAD_X reads the word a pending MAC result will write;
//   stall_dma     LOAD_X reads the word the DMA is filling, DMA_FRAM or
//                 LOAD_W/LOAD_BIAS would share the filter RAM with the DMA, or
//                 a DMA command finds the DMA busy.
// A LOAD_BIAS must precede the MAC with first=1 that uses it; a MAC waits
// until the bias write is done.
//
// Timing: LOAD_W takes VEC_LEN+1 cycles, LOAD_X 2, MAC VEC_LEN cycles plus 3
// to drain and post-process when last=1, plus the output handshake.
//
// The command set (subvector multiply, filter and input subvector fetches)
// and the double buffering follow the source design; the encoding, the
// hazard rules and the engine split are this design's choices.
//
// Lint notes: the command struct is shared by all opcodes, so each engine
// uses only some of its fields and the rest are reported unused. Reset is
// asynchronous for the flops; the assertions also use rst_n, in their
// disable condition, which lint reports as a net used both ways. That use is
// for checking only and adds no logic.
module occam_ctrl
  import occam_pkg::*;
#(
  parameter int unsigned VEC_LEN = 128,
  localparam int unsigned IDX_W  = $clog2(VEC_LEN)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host commands
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_t                cmd,
  output logic                busy,
  // closure buffer descriptors and read port
  output logic                cfg_en,
  output logic [LAYER_W-1:0]  cfg_layer,
  output layer_desc_t         cfg_desc,
  output logic                cb_rd_en,
  output cb_pos_t             cb_rd_pos,
  // DMA
  output logic                dma_start,
  input  logic                dma_busy,
  input  logic                dma_fram_busy,
  // filter RAM read port
  output logic                fr_rd_en,
  output logic [FRAM_AW-1:0]  fr_rd_addr,
  // cluster
  output logic                x_wr_en,
  output logic                x_wr_bank,
  output logic                w_wr_en,
  output logic                w_wr_bank,
  output logic [IDX_W-1:0]    w_wr_idx,
  output logic                bias_wr_en,
  output logic                step_valid,
  output logic                step_bank,
  output logic [IDX_W-1:0]    step_idx,
  output logic                step_first,
  // post_op
  output logic                po_in_valid,
  output logic [4:0]          po_shift,
  output logic                po_relu,
  // results
  output logic                res_wr_en,     // write post_op result to closure buffer
  output cb_pos_t             res_wr_pos,
  output logic                res_wr_half,
  output logic                res_out_valid, // send post_op result off chip
  input  logic                res_out_ready,
  output logic [MB_W-1:0]     res_out_mb,
  output logic [REP_W-1:0]    nrep,
  output events_t             events
);

  typedef enum logic [2:0] {M_IDLE, M_RUN, M_DRAIN, M_POST, M_OUT} mstate_e;
  typedef enum logic [1:0] {W_IDLE, W_LOAD, W_BIAS} wstate_e;

  // filter loader
  wstate_e            w_state;
  logic [IDX_W-1:0]   w_cnt;
  logic [FRAM_AW-1:0] w_addr;
  logic               w_bank;
  logic               wv_q, wlast_q, wbank_q, bv_q;
  logic [IDX_W-1:0]   widx_q;
  // input loader
  logic               x_busy, x_bank;
  cb_pos_t            x_pos;
  // double-buffer scoreboard
  logic [1:0]         wfull, xfull;
  logic               wlp, xlp, mp;
  // MAC engine
  mstate_e            m_state;
  logic [IDX_W-1:0]   m_cnt;
  logic               m_bank, m_first, m_last, m_onchip, m_half, m_relu;
  logic [4:0]         m_shift;
  cb_pos_t            m_dst;
  logic [MB_W-1:0]    m_mb;
  // configuration
  logic [MB_W-1:0]    mb_q;
  logic [REP_W-1:0]   nrep_q;
  cb_pos_t            dma_pos;

  // ---------------------------------------------------------------- issue
  logic ok, st_buf, st_raw, st_dma;
  logic res_pending;
  assign res_pending = (m_state != M_IDLE) && m_last && m_onchip;

  always_comb begin
    ok = 1'b0; st_buf = 1'b0; st_raw = 1'b0; st_dma = 1'b0;
    unique case (cmd.op)
      OP_NOP, OP_SET_MB: ok = 1'b1;
      OP_SET_LAYER: ok = !dma_busy && !x_busy && (m_state == M_IDLE);
      OP_DMA_FRAM: begin
        ok = !dma_busy && (w_state == W_IDLE) && !wv_q && !bv_q;
        st_dma = !ok;
      end
      OP_DMA_CB: begin
        ok = !dma_busy;
        st_dma = !ok;
      end
      OP_LOAD_W: begin
        st_buf = wfull[wlp];
        st_dma = dma_fram_busy;
        ok = (w_state == W_IDLE) && !st_buf && !st_dma;
      end
      OP_LOAD_BIAS: begin
        st_dma = dma_fram_busy;
        ok = (w_state == W_IDLE) && !st_dma;
      end
      OP_LOAD_X: begin
        st_buf = xfull[xlp];
        st_raw = res_pending && (m_dst == cmd.pos);
        st_dma = dma_busy && (dma_pos == cmd.pos);
        ok = !x_busy && !st_buf && !st_raw && !st_dma;
      end
      OP_MAC: begin
        st_buf = !(wfull[mp] && xfull[mp]);
        ok = (m_state == M_IDLE) && !st_buf && !bv_q && (w_state != W_BIAS);
      end
      default: ok = 1'b1;
    endcase
  end

  logic go;
  assign cmd_ready = ok;
  assign go        = cmd_valid && ok;

  assign cfg_en    = go && (cmd.op == OP_SET_LAYER);
  assign cfg_layer = cmd.pos.layer;
  assign cfg_desc  = cmd.desc;
  assign dma_start = go && (cmd.op == OP_DMA_FRAM || cmd.op == OP_DMA_CB);

  // ---------------------------------------------------------------- engines
  assign fr_rd_en   = (w_state != W_IDLE);
  assign fr_rd_addr = w_addr + FRAM_AW'(w_cnt);
  assign w_wr_en    = wv_q;
  assign w_wr_bank  = wbank_q;
  assign w_wr_idx   = widx_q;
  assign bias_wr_en = bv_q;

  assign cb_rd_en   = x_busy;
  assign cb_rd_pos  = x_pos;

  assign step_valid = (m_state == M_RUN);
  assign step_bank  = m_bank;
  assign step_idx   = m_cnt;
  assign step_first = m_first && (m_cnt == '0);

  assign po_in_valid   = (m_state == M_POST);
  assign po_shift      = m_shift;
  assign po_relu       = m_relu;
  assign res_wr_en     = (m_state == M_OUT) && m_onchip;
  assign res_wr_pos    = m_dst;
  assign res_wr_half   = m_half;
  assign res_out_valid = (m_state == M_OUT) && !m_onchip;
  assign res_out_mb    = m_mb;
  assign nrep          = nrep_q;

  assign busy = (w_state != W_IDLE) || wv_q || bv_q || x_busy || x_wr_en ||
                (m_state != M_IDLE) || dma_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_state <= W_IDLE; w_cnt <= '0; w_addr <= '0; w_bank <= 1'b0;
      wv_q <= 1'b0; wlast_q <= 1'b0; wbank_q <= 1'b0; widx_q <= '0; bv_q <= 1'b0;
      x_busy <= 1'b0; x_bank <= 1'b0; x_pos <= '0; x_wr_en <= 1'b0; x_wr_bank <= 1'b0;
      wfull <= '0; xfull <= '0; wlp <= 1'b0; xlp <= 1'b0; mp <= 1'b0;
      m_state <= M_IDLE; m_cnt <= '0; m_bank <= 1'b0; m_first <= 1'b0; m_last <= 1'b0;
      m_onchip <= 1'b0; m_half <= 1'b0; m_relu <= 1'b0; m_shift <= '0; m_dst <= '0; m_mb <= '0;
      mb_q <= '0; nrep_q <= '0; dma_pos <= '0;
    end else begin
      // -------- issue
      if (go) begin
        unique case (cmd.op)
          OP_SET_MB: begin mb_q <= cmd.mb; nrep_q <= cmd.nrep; end
          OP_DMA_CB: dma_pos <= cmd.pos;
          OP_LOAD_W: begin
            w_state <= W_LOAD; w_cnt <= '0; w_addr <= cmd.fram_addr; w_bank <= wlp; wlp <= ~wlp;
          end
          OP_LOAD_BIAS: begin
            w_state <= W_BIAS; w_cnt <= '0; w_addr <= cmd.fram_addr;
          end
          OP_LOAD_X: begin
            x_busy <= 1'b1; x_pos <= cmd.pos; x_bank <= xlp; xlp <= ~xlp;
          end
          OP_MAC: begin
            m_state <= M_RUN; m_cnt <= '0; m_bank <= mp; mp <= ~mp;
            m_first <= cmd.first; m_last <= cmd.last; m_onchip <= cmd.dst_onchip;
            m_half <= cmd.dst_half; m_relu <= cmd.relu; m_shift <= cmd.shift;
            m_dst <= cmd.dst; m_mb <= mb_q;
          end
          default: ;
        endcase
      end

      // -------- filter loader: read in cycle c, write the lanes in c+1
      wv_q    <= (w_state == W_LOAD);
      widx_q  <= w_cnt;
      wbank_q <= w_bank;
      wlast_q <= (w_state == W_LOAD) && (w_cnt == IDX_W'(VEC_LEN-1));
      bv_q    <= (w_state == W_BIAS);
      if (w_state == W_LOAD) begin
        w_cnt <= w_cnt + 1'b1;
        if (w_cnt == IDX_W'(VEC_LEN-1)) w_state <= W_IDLE;
      end else if (w_state == W_BIAS) begin
        w_state <= W_IDLE;
      end
      if (wv_q && wlast_q) wfull[wbank_q] <= 1'b1;

      // -------- input loader: read in cycle c, write the buffer in c+1
      x_wr_en   <= x_busy;
      x_wr_bank <= x_bank;
      if (x_busy) x_busy <= 1'b0;
      if (x_wr_en) xfull[x_wr_bank] <= 1'b1;

      // -------- MAC engine
      unique case (m_state)
        M_RUN: begin
          m_cnt <= m_cnt + 1'b1;
          if (m_cnt == IDX_W'(VEC_LEN-1)) begin
            wfull[m_bank] <= 1'b0;
            xfull[m_bank] <= 1'b0;
            m_state <= m_last ? M_DRAIN : M_IDLE;
          end
        end
        M_DRAIN: m_state <= M_POST;
        M_POST:  m_state <= M_OUT;
        M_OUT:   if (m_onchip || res_out_ready) m_state <= M_IDLE;
        default: ;
      endcase
    end
  end

  always_comb begin
    events               = '0;
    events.mac_step      = step_valid;
    events.overlap       = step_valid && ((w_state == W_LOAD) || x_busy);
    events.stall_buffer  = cmd_valid && !ok && st_buf;
    events.stall_raw     = cmd_valid && !ok && st_raw;
    events.stall_dma     = cmd_valid && !ok && st_dma;
    events.backpressure  = res_out_valid && !res_out_ready;
    events.result_onchip = res_wr_en;
    events.result_offchip = res_out_valid && res_out_ready;
  end

  // Banks are only loaded when empty and only multiplied when full.
  a_wload: assert property (@(posedge clk) disable iff (!rst_n)
                            wv_q |-> !wfull[wbank_q]);
  a_xload: assert property (@(posedge clk) disable iff (!rst_n)
                            x_wr_en |-> !xfull[x_wr_bank]);
  a_mac:   assert property (@(posedge clk) disable iff (!rst_n)
                            step_valid |-> wfull[m_bank] && xfull[m_bank]);

endmodule
