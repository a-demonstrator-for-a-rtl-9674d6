// msg_aggregator: per-node message accumulation (sum aggregation).
//
// Holds one message vector m[n] of EMB_DIM ap_fixed<21,9> values per node.
// An accumulate request adds an edge embedding (ap_fixed<18,6>, sign-extended
// to 21 bits; both have 12 fraction bits) to the message of its destination
// node: m[dst] += e. The read-modify-write is done in the same cycle on a
// register array, so back-to-back requests to the same node need no
// forwarding and the aggregator accepts one edge every cycle. The sum wraps
// on overflow (ap_fixed default). clr writes zero to one node's message; the
// core clears node n while it writes node n's embedding, so no extra pass is
// needed. The read port registers m[rd_idx] every cycle (one cycle latency).
// Sum aggregation and the in-place clear are this design's choices.
module msg_aggregator
  import gnn_pkg::*;
#(
  parameter int unsigned MAX_N = MAX_NODES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic [$clog2(MAX_N)-1:0] clr_idx,
  input  logic                     acc,
  input  logic [$clog2(MAX_N)-1:0] acc_idx,
  input  emb_t                     acc_val [EMB_DIM],
  input  logic [$clog2(MAX_N)-1:0] rd_idx,
  output msg_vec_t                 rd_msg
);
  msg_vec_t mem [MAX_N];

  always_ff @(posedge clk) begin
    if (acc) begin
      for (int k = 0; k < EMB_DIM; k++)
        mem[acc_idx][k] <= mem[acc_idx][k] + msg_t'(acc_val[k]);
    end
    if (clr && !(acc && acc_idx == clr_idx)) mem[clr_idx] <= '0;
    rd_msg <= mem[rd_idx];
  end

  a_no_clr_acc_clash: assert property (@(posedge clk) disable iff (!rst_n)
      !(clr && acc && clr_idx == acc_idx));
endmodule
