// ext_mem_model: behavioural stand-in for the off-chip SDRAM and its
// controller, for simulation only. Element-wide reads: a request (valid/ready,
// ready dropped at random when STALL is set) is answered in order LAT cycles
// later. Contents are set by the testbench through the mem array.
module ext_mem_model #(
  parameter int unsigned DW = 18,
  parameter int unsigned AW = 26,
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT = 4,
  parameter bit STALL = 1'b1
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data
);
  logic [DW-1:0] mem [WORDS];
  logic          pv [LAT];
  logic [DW-1:0] pd [LAT];
  int            stalls = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    req_ready = 1'b1;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= req_valid && req_ready;
    pd[0] <= mem[req_addr % WORDS];
    if (req_valid && !req_ready) stalls++;
    req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
endmodule
