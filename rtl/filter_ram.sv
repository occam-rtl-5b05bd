// filter_ram: the on-chip filter store of one pipeline stage.
//
// A stage keeps all filters of its partition resident, so that they are read
// from off chip once and reused for every image that passes through. The RAM
// has one bank per lane. Writes (filter warm-up from off chip) go to one
// element of one bank; a read returns the same address of every bank, one
// element per lane, one cycle after rd_en. This is how a filter subvector is
// streamed into all lanes in parallel.
//
// Chip-resident filters and one filter subvector per lane follow the source
// design; the bank organisation and the depth (64 x 3072 x 18 bits, about
// 442 KB of the FPGA's 820 KB) are this design's choices.
module filter_ram #(
  parameter int unsigned LANES  = 64,
  parameter int unsigned DATA_W = 18,
  parameter int unsigned DEPTH  = 3072,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned LW    = $clog2(LANES)
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [LW-1:0]                wr_lane,
  input  logic [AW-1:0]                wr_addr,
  input  logic [DATA_W-1:0]            wr_data,
  input  logic                         rd_en,
  input  logic [AW-1:0]                rd_addr,
  output logic [LANES-1:0][DATA_W-1:0] rd_data
);

  for (genvar l = 0; l < LANES; l++) begin : g_bank
    logic [DATA_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_lane == LW'(l)) mem[wr_addr] <= wr_data;
      if (rd_en) rd_data[l] <= mem[rd_addr];
    end
  end

endmodule
