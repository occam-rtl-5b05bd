// mac_lane: one multiply-accumulate lane of the cluster.
//
// The lane holds a filter subvector (VEC_LEN elements) in one of two banks,
// so that the next subvector can be written while the current one is used
// (double buffering). Each step multiplies the bank's element idx by the input
// element broadcast to all lanes and adds the product to the accumulator. The
// accumulator carries over from one subvector to the next, so a lane builds
// the whole dot product of an output cell from several subvectors; on the
// first step of an output cell it restarts from the lane's bias.
//
// Timing: a step presented in cycle t is multiplied in t and accumulated in
// t+1, so acc shows it after the clock edge ending cycle t+1 (latency 2), and
// one step is accepted every cycle.
//
// Following the source design: 64 such lanes, 128-element filter subvectors,
// 18-bit multipliers. The two-stage pipeline, the 48-bit accumulator and the
// bias preload are this design's choices.
module mac_lane #(
  parameter int unsigned DATA_W  = 18,
  parameter int unsigned ACC_W   = 48,
  parameter int unsigned VEC_LEN = 128,
  localparam int unsigned IDX_W  = $clog2(VEC_LEN)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // filter subvector writes
  input  logic                     w_wr_en,
  input  logic                     w_wr_bank,
  input  logic [IDX_W-1:0]         w_wr_idx,
  input  logic signed [DATA_W-1:0] w_wr_data,
  // bias
  input  logic                     bias_wr_en,
  input  logic signed [DATA_W-1:0] bias_wr_data,
  // MAC steps
  input  logic                     step_valid,
  input  logic                     step_bank,
  input  logic [IDX_W-1:0]         step_idx,
  input  logic                     step_first,
  input  logic signed [DATA_W-1:0] x_data,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [DATA_W-1:0]   wbuf [2][VEC_LEN];
  logic signed [DATA_W-1:0]   bias;
  logic signed [2*DATA_W-1:0] prod;
  logic                       prod_valid, prod_first;

  always_ff @(posedge clk) begin
    if (w_wr_en) wbuf[w_wr_bank][w_wr_idx] <= w_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias       <= '0;
      prod       <= '0;
      prod_valid <= 1'b0;
      prod_first <= 1'b0;
      acc        <= '0;
    end else begin
      if (bias_wr_en) bias <= bias_wr_data;
      prod_valid <= step_valid;
      prod_first <= step_valid & step_first;
      if (step_valid) prod <= wbuf[step_bank][step_idx] * x_data;
      if (prod_valid)
        acc <= (prod_first ? ACC_W'(bias) : acc) + ACC_W'(prod);
    end
  end

endmodule
