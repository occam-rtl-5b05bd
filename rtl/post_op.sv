// post_op: local operations on the cluster's results as they leave the lanes.
//
// For each lane the accumulator (which already includes the bias) is shifted
// right arithmetically by shift (requantisation to the operand scale), set to
// zero if negative when relu is set (ReLU), and saturated to a signed
// DATA_W-bit value. The result is registered: out_valid/out_data follow
// in_valid/acc by one cycle.
//
// Applying local operations as part of each layer's computation follows the
// source design; the shift-and-saturate requantisation is this design's
// choice. Batch normalisation and pooling are not built.
module post_op #(
  parameter int unsigned LANES  = 64,
  parameter int unsigned DATA_W = 18,
  parameter int unsigned ACC_W  = 48
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [LANES-1:0][ACC_W-1:0]  acc,
  input  logic [4:0]                   shift,
  input  logic                         relu,
  output logic                         out_valid,
  output logic [LANES-1:0][DATA_W-1:0] out_data
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (DATA_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(64'sd1 <<< (DATA_W-1));

  logic [LANES-1:0][DATA_W-1:0] res;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] v;
      v = $signed(acc[l]) >>> shift;
      if (relu && v < 0) v = '0;
      if (v > MAXV)      res[l] = MAXV[DATA_W-1:0];
      else if (v < MINV) res[l] = MINV[DATA_W-1:0];
      else               res[l] = v[DATA_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= res;
    end
  end

endmodule
