// ext_dma: reads off-chip memory for one pipeline stage.
//
// Two transfers exist. A filter transfer (to_fram = 1) copies len elements
// from ext_addr into filter-RAM bank lane, starting at fram_addr; it is how
// the stage's filters are made resident once, before images stream through.
// An input transfer (to_fram = 0) reads len (<= VEC_LEN) elements, the
// channels of one pixel of the stage's input map, packs them into one word
// (missing channels are zero) and writes the word into the closure buffer at
// pos, holding cb_wr_valid until cb_wr_grant.
//
// Interface: a read request is sent on ext_req_* (valid/ready, one element
// address per beat); responses come back in order on ext_rsp_*, one element
// per beat, and are always accepted. start is taken only while busy is low.
// Requests are issued back to back, so the rate is the memory's.
//
// Reading the input map and the filters from off chip follows the source
// design; the element-wide bus and the packing are this design's choices.
//
// Lint notes: the assertions use rst_n in their disable condition; lint
// reports that as a synchronous use of the asynchronous reset, but it adds
// no logic.
module ext_dma
  import occam_pkg::*;
#(
  parameter int unsigned DATA_W  = 18,
  parameter int unsigned VEC_LEN = 128,
  parameter int unsigned LANES   = 64,
  localparam int unsigned LW     = $clog2(LANES),
  localparam int unsigned IDX_W  = $clog2(VEC_LEN)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic                           to_fram,
  input  logic [EXT_AW-1:0]              ext_addr,
  input  logic [LEN_W-1:0]               len,
  input  logic [LW-1:0]                  lane,
  input  logic [FRAM_AW-1:0]             fram_addr,
  input  cb_pos_t                        pos,
  output logic                           busy,
  output logic                           fram_busy,
  // off-chip memory
  output logic                           ext_req_valid,
  input  logic                           ext_req_ready,
  output logic [EXT_AW-1:0]              ext_req_addr,
  input  logic                           ext_rsp_valid,
  input  logic [DATA_W-1:0]              ext_rsp_data,
  // filter RAM write
  output logic                           fram_wr_en,
  output logic [LW-1:0]                  fram_wr_lane,
  output logic [FRAM_AW-1:0]             fram_wr_addr,
  output logic [DATA_W-1:0]              fram_wr_data,
  // closure buffer write
  output logic                           cb_wr_valid,
  input  logic                           cb_wr_grant,
  output cb_pos_t                        cb_wr_pos,
  output logic [VEC_LEN-1:0][DATA_W-1:0] cb_wr_data
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WRITE} state_e;
  state_e            state;
  logic              mode_fram;
  logic [EXT_AW-1:0] req_addr;
  logic [LEN_W-1:0]  req_left, rsp_cnt, total;
  logic [LW-1:0]     lane_q;
  logic [FRAM_AW-1:0] fbase;

  assign busy          = (state != S_IDLE);
  assign fram_busy     = (busy && mode_fram) || fram_wr_en;
  assign ext_req_valid = (state == S_RUN) && (req_left != '0);
  assign ext_req_addr  = req_addr;
  assign cb_wr_valid   = (state == S_WRITE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      mode_fram    <= 1'b0;
      req_addr     <= '0;
      req_left     <= '0;
      rsp_cnt      <= '0;
      total        <= '0;
      lane_q       <= '0;
      fbase        <= '0;
      cb_wr_pos    <= '0;
      cb_wr_data   <= '0;
      fram_wr_en   <= 1'b0;
      fram_wr_lane <= '0;
      fram_wr_addr <= '0;
      fram_wr_data <= '0;
    end else begin
      fram_wr_en <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_fram  <= to_fram;
          req_addr   <= ext_addr;
          req_left   <= len;
          total      <= len;
          rsp_cnt    <= '0;
          lane_q     <= lane;
          fbase      <= fram_addr;
          cb_wr_pos  <= pos;
          cb_wr_data <= '0;
          state      <= (len == '0) ? (to_fram ? S_IDLE : S_WRITE) : S_RUN;
        end
        S_RUN: begin
          if (ext_req_valid && ext_req_ready) begin
            req_addr <= req_addr + 1'b1;
            req_left <= req_left - 1'b1;
          end
          if (ext_rsp_valid) begin
            if (mode_fram) begin
              fram_wr_en   <= 1'b1;
              fram_wr_lane <= lane_q;
              fram_wr_addr <= fbase + FRAM_AW'(rsp_cnt);
              fram_wr_data <= ext_rsp_data;
            end else if (rsp_cnt < LEN_W'(VEC_LEN)) begin
              cb_wr_data[IDX_W'(rsp_cnt)] <= ext_rsp_data;
            end
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt + 1'b1 == total) state <= mode_fram ? S_IDLE : S_WRITE;
          end
        end
        S_WRITE: if (cb_wr_grant) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // An input transfer fills at most one word.
  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          start && !busy && !to_fram |-> len <= LEN_W'(VEC_LEN));

endmodule
