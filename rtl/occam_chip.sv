// occam_chip: one stage (chip) of an Occam pipeline.
//
// A CNN is cut into partitions of consecutive layers; each partition runs on
// its own chip, which keeps the partition's filters resident in its filter
// RAM and its part of the dependence closure (a few row-planes per layer) in
// its closure buffer. Images stream through: the chip reads only its input
// map from off chip (ext_*), computes all its layers row-plane by row-plane,
// and sends only its output map on (link_*). When a downstream stage is
// replicated (staggered asynchronous pipelining), the link steering sends
// mini-batch i to replica i mod nrep.
//
// Inside: occam_ctrl issues the host's commands to the filter loader, the
// input loader, the MAC engine and ext_dma; lane_cluster holds 64 lanes that
// each compute one output channel of the same output pixel from 128-element
// subvectors; post_op applies requantisation and ReLU; results either go back
// into the closure buffer as the next layer's input or out through
// stap_steer. The closure buffer's single write port is shared by MAC
// results (priority) and DMA words.
//
// Interfaces: cmd_* is the host command stream (valid/ready, cmd_t);
// ext_req_*/ext_rsp_* is an element-wide read port to off-chip memory with
// in-order responses; link_* is one valid/ready stream per downstream replica,
// each beat the 64 results of one output pixel plus its mini-batch id.
// events gives one-cycle pulses for stalls, overlap and results.
//
// The partitioned, filter-resident stage, the 64-lane x 128-element cluster,
// the closure buffer and STAP steering follow the source design; memory sizes,
// word layout, command set encoding and port protocols are this design's.
//
// Lint notes: post_op's valid output and stap_steer's replica index are not
// needed here. The controller already knows when post_op's result is ready,
// and the replica index is visible on link_valid. The assertions use rst_n in
// their disable condition; lint reports that as a synchronous use of the
// asynchronous reset, but it adds no logic.
module occam_chip
  import occam_pkg::*;
#(
  parameter int unsigned LANES        = 64,
  parameter int unsigned VEC_LEN      = 128,
  parameter int unsigned DATA_W       = 18,
  parameter int unsigned ACC_W        = 48,
  parameter int unsigned FILTER_DEPTH = 3072,
  parameter int unsigned CB_WORDS     = 1024,
  parameter int unsigned MAX_REP      = 2
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               cmd_valid,
  output logic                               cmd_ready,
  input  cmd_t                               cmd,
  output logic                               busy,
  output logic                               ext_req_valid,
  input  logic                               ext_req_ready,
  output logic [EXT_AW-1:0]                  ext_req_addr,
  input  logic                               ext_rsp_valid,
  input  logic [DATA_W-1:0]                  ext_rsp_data,
  output logic [MAX_REP-1:0]                 link_valid,
  input  logic [MAX_REP-1:0]                 link_ready,
  output logic [LANES-1:0][DATA_W-1:0]       link_data,
  output logic [MB_W-1:0]                    link_mb,
  output events_t                            events
);

  localparam int unsigned IDX_W = $clog2(VEC_LEN);
  localparam int unsigned FAW   = $clog2(FILTER_DEPTH);
  localparam int unsigned GROUPS = VEC_LEN / LANES;

  // controller <-> datapath
  logic                cfg_en;
  logic [LAYER_W-1:0]  cfg_layer;
  layer_desc_t         cfg_desc;
  logic                cb_rd_en;
  cb_pos_t             cb_rd_pos;
  logic                dma_start, dma_busy, dma_fram_busy;
  logic                fr_rd_en;
  logic [FRAM_AW-1:0]  fr_rd_addr;
  logic                x_wr_en, x_wr_bank, w_wr_en, w_wr_bank, bias_wr_en;
  logic [IDX_W-1:0]    w_wr_idx, step_idx;
  logic                step_valid, step_bank, step_first;
  logic                po_in_valid, po_relu, po_out_valid;
  logic [4:0]          po_shift;
  logic                res_wr_en, res_wr_half, res_out_valid, res_out_ready;
  cb_pos_t             res_wr_pos;
  logic [MB_W-1:0]     res_out_mb;
  logic [REP_W-1:0]    nrep;
  events_t             ctrl_events;

  logic [LANES-1:0][DATA_W-1:0]   fr_rd_data, po_out_data;
  logic [LANES-1:0][ACC_W-1:0]    acc;
  logic [VEC_LEN-1:0][DATA_W-1:0] cb_rd_data, cb_wr_data, dma_cb_data, res_word;
  logic [VEC_LEN-1:0]             cb_wr_mask, res_mask;
  cb_pos_t                        cb_wr_pos, dma_cb_pos;
  logic                           cb_wr_en, dma_cb_valid, dma_cb_grant;
  logic                           fw_en;
  logic [5:0]                     fw_lane;
  logic [FRAM_AW-1:0]             fw_addr;
  logic [DATA_W-1:0]              fw_data;

  occam_ctrl #(.VEC_LEN(VEC_LEN)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .cfg_en, .cfg_layer, .cfg_desc, .cb_rd_en, .cb_rd_pos,
    .dma_start, .dma_busy, .dma_fram_busy,
    .fr_rd_en, .fr_rd_addr,
    .x_wr_en, .x_wr_bank, .w_wr_en, .w_wr_bank, .w_wr_idx, .bias_wr_en,
    .step_valid, .step_bank, .step_idx, .step_first,
    .po_in_valid, .po_shift, .po_relu,
    .res_wr_en, .res_wr_pos, .res_wr_half,
    .res_out_valid, .res_out_ready, .res_out_mb, .nrep,
    .events(ctrl_events)
  );

  ext_dma #(.DATA_W(DATA_W), .VEC_LEN(VEC_LEN), .LANES(LANES)) u_dma (
    .clk, .rst_n, .start(dma_start), .to_fram(cmd.op == OP_DMA_FRAM),
    .ext_addr(cmd.ext_addr), .len(cmd.len), .lane(cmd.lane[$clog2(LANES)-1:0]),
    .fram_addr(cmd.fram_addr), .pos(cmd.pos),
    .busy(dma_busy), .fram_busy(dma_fram_busy),
    .ext_req_valid, .ext_req_ready, .ext_req_addr, .ext_rsp_valid, .ext_rsp_data,
    .fram_wr_en(fw_en), .fram_wr_lane(fw_lane[$clog2(LANES)-1:0]), .fram_wr_addr(fw_addr),
    .fram_wr_data(fw_data),
    .cb_wr_valid(dma_cb_valid), .cb_wr_grant(dma_cb_grant), .cb_wr_pos(dma_cb_pos),
    .cb_wr_data(dma_cb_data)
  );
  if ($clog2(LANES) < 6) begin : g_lane_pad
    assign fw_lane[5:$clog2(LANES)] = '0;
  end

  filter_ram #(.LANES(LANES), .DATA_W(DATA_W), .DEPTH(FILTER_DEPTH)) u_fram (
    .clk, .wr_en(fw_en), .wr_lane(fw_lane[$clog2(LANES)-1:0]), .wr_addr(fw_addr[FAW-1:0]),
    .wr_data(fw_data), .rd_en(fr_rd_en), .rd_addr(fr_rd_addr[FAW-1:0]), .rd_data(fr_rd_data)
  );

  lane_cluster #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W), .VEC_LEN(VEC_LEN)) u_cluster (
    .clk, .rst_n,
    .x_wr_en, .x_wr_bank, .x_wr_data(cb_rd_data),
    .w_wr_en, .w_wr_bank, .w_wr_idx, .w_wr_data(fr_rd_data),
    .bias_wr_en, .bias_wr_data(fr_rd_data),
    .step_valid, .step_bank, .step_idx, .step_first,
    .acc
  );

  post_op #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_post (
    .clk, .rst_n, .in_valid(po_in_valid), .acc, .shift(po_shift), .relu(po_relu),
    .out_valid(po_out_valid), .out_data(po_out_data)
  );

  // Result word: the 64 results placed in the selected group of channels.
  always_comb begin
    res_word = '0;
    res_mask = '0;
    for (int g = 0; g < GROUPS; g++) begin
      if (g == int'(res_wr_half)) begin
        for (int l = 0; l < LANES; l++) begin
          res_word[g*LANES + l] = po_out_data[l];
          res_mask[g*LANES + l] = 1'b1;
        end
      end
    end
  end

  // Closure-buffer write port: MAC results first, DMA words otherwise.
  assign dma_cb_grant = dma_cb_valid && !res_wr_en;
  assign cb_wr_en     = res_wr_en || dma_cb_valid;
  assign cb_wr_pos    = res_wr_en ? res_wr_pos : dma_cb_pos;
  assign cb_wr_data   = res_wr_en ? res_word   : dma_cb_data;
  assign cb_wr_mask   = res_wr_en ? res_mask   : '1;

  closure_buffer #(.VEC_LEN(VEC_LEN), .DATA_W(DATA_W), .WORDS(CB_WORDS)) u_cb (
    .clk, .rst_n, .cfg_en, .cfg_layer, .cfg_desc,
    .rd_en(cb_rd_en), .rd_pos(cb_rd_pos), .rd_data(cb_rd_data),
    .wr_en(cb_wr_en), .wr_pos(cb_wr_pos), .wr_data(cb_wr_data), .wr_mask(cb_wr_mask)
  );

  logic [$clog2(MAX_REP+1)-1:0] steer_sel;
  stap_steer #(.W(LANES*DATA_W), .MB_W(MB_W), .MAX_REP(MAX_REP)) u_steer (
    .in_valid(res_out_valid), .in_ready(res_out_ready), .in_data(po_out_data),
    .in_mb(res_out_mb), .nrep($clog2(MAX_REP+1)'(nrep)),
    .out_valid(link_valid), .out_ready(link_ready), .out_data(link_data),
    .out_mb(link_mb), .out_sel(steer_sel)
  );

  always_comb begin
    events               = ctrl_events;
    events.port_conflict = dma_cb_valid && res_wr_en;
  end

endmodule
