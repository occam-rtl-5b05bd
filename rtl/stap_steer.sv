// stap_steer: output steering for staggered asynchronous pipelining (STAP).
//
// When a bottleneck stage of the chip pipeline is replicated, the stage before
// it sends whole mini-batches to the replicas in turn: mini-batch i goes to
// replica (i mod nrep). This keeps every replica on complete mini-batches and
// leaves the partitioning of the network unchanged. Each result beat carries
// the id of its mini-batch; the beat is offered on the stream of the selected
// replica only and in_ready follows that stream's ready. nrep = 0 or 1 means
// no replication (replica 0). The path is combinational (no added latency).
//
// The assignment rule follows the source design; the valid/ready streams and
// the tag are this design's choices (the link between chips is not designed).
module stap_steer #(
  parameter int unsigned W       = 1152,
  parameter int unsigned MB_W    = 8,
  parameter int unsigned MAX_REP = 2,
  localparam int unsigned REP_W  = $clog2(MAX_REP + 1)
) (
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [W-1:0]            in_data,
  input  logic [MB_W-1:0]         in_mb,
  input  logic [REP_W-1:0]        nrep,
  output logic [MAX_REP-1:0]      out_valid,
  input  logic [MAX_REP-1:0]      out_ready,
  output logic [W-1:0]            out_data,
  output logic [MB_W-1:0]         out_mb,
  output logic [REP_W-1:0]        out_sel
);

  always_comb begin
    if (nrep <= REP_W'(1) || nrep > REP_W'(MAX_REP)) out_sel = '0;
    else                                             out_sel = REP_W'(in_mb % MB_W'(nrep));
    out_valid = '0;
    in_ready  = 1'b0;
    for (int r = 0; r < MAX_REP; r++) begin
      if (out_sel == REP_W'(r)) begin
        out_valid[r] = in_valid;
        in_ready     = out_ready[r];
      end
    end
    out_data  = in_data;
    out_mb    = in_mb;
  end

endmodule
