// lane_cluster: the cluster of LANES multiply-accumulate lanes.
//
// The cluster keeps the input-map subvector in a double buffer of two banks of
// VEC_LEN elements; a whole subvector is written into one bank in a single
// cycle. Each MAC step reads element step_idx of bank step_bank and broadcasts
// it to every lane, which multiplies it with its own filter element (see
// mac_lane). All lanes therefore work on the same output pixel, each lane on a
// different output channel (filter). Filter subvectors are written one element
// per lane per cycle, all lanes in parallel, from the lane-banked filter RAM.
//
// Timing: the broadcast element is read in the step's own cycle, so the
// latency from step to accumulator is the lane's, 2 cycles.
//
// The lane count, subvector length and broadcast follow the source design; the
// single-cycle input-bank write is this design's choice.
module lane_cluster #(
  parameter int unsigned LANES   = 64,
  parameter int unsigned DATA_W  = 18,
  parameter int unsigned ACC_W   = 48,
  parameter int unsigned VEC_LEN = 128,
  localparam int unsigned IDX_W  = $clog2(VEC_LEN)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input subvector double buffer
  input  logic                          x_wr_en,
  input  logic                          x_wr_bank,
  input  logic [VEC_LEN-1:0][DATA_W-1:0] x_wr_data,
  // filter subvector writes, one element per lane
  input  logic                          w_wr_en,
  input  logic                          w_wr_bank,
  input  logic [IDX_W-1:0]              w_wr_idx,
  input  logic [LANES-1:0][DATA_W-1:0]  w_wr_data,
  // bias, one per lane
  input  logic                          bias_wr_en,
  input  logic [LANES-1:0][DATA_W-1:0]  bias_wr_data,
  // MAC steps
  input  logic                          step_valid,
  input  logic                          step_bank,
  input  logic [IDX_W-1:0]              step_idx,
  input  logic                          step_first,
  output logic [LANES-1:0][ACC_W-1:0]   acc
);

  logic [VEC_LEN-1:0][DATA_W-1:0] xbuf [2];
  logic signed [DATA_W-1:0]       x_bcast;

  always_ff @(posedge clk) begin
    if (x_wr_en) xbuf[x_wr_bank] <= x_wr_data;
  end

  assign x_bcast = xbuf[step_bank][step_idx];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mac_lane #(.DATA_W(DATA_W), .ACC_W(ACC_W), .VEC_LEN(VEC_LEN)) u_lane (
      .clk, .rst_n,
      .w_wr_en, .w_wr_bank, .w_wr_idx, .w_wr_data(w_wr_data[l]),
      .bias_wr_en, .bias_wr_data(bias_wr_data[l]),
      .step_valid, .step_bank, .step_idx, .step_first,
      .x_data(x_bcast),
      .acc(acc[l])
    );
  end

endmodule
