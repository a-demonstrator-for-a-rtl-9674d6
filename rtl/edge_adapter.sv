// edge_adapter: routes node embeddings to the edge-embedding network.
//
// After start, the adapter walks the edge list 0..n_edges-1, one edge per
// cycle, in a three-stage pipeline:
//   stage 0  read edge e from the edge-list RAM;
//   stage 1  the RAM returns (src, dst); read the node-embedding RAM at src on
//            port a and at dst on port b;
//   stage 2  both embeddings are back; present the edge-network input
//            x = {h_src[0..7], h_dst[0..7]} with the edge index and dst.
// This is the "adapter" of the message-passing dataflow: node embeddings are
// computed first, then orchestrated to the edge processing unit. The design
// has one edge processing unit, fully pipelined, so the adapter never stalls
// and presents n_edges vectors in n_edges + 2 cycles. Both RAMs are external,
// with one cycle of read latency. busy is high from start until the last
// vector is out; flush stops the walk and empties the pipeline. The input
// order (source embedding first) and the single unit are this design's choice.
module edge_adapter
  import gnn_pkg::*;
#(
  parameter int unsigned MAX_N = MAX_NODES,
  parameter int unsigned MAX_E = MAX_EDGES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush,
  input  logic                       start,
  input  logic [$clog2(MAX_E+1)-1:0] n_edges,
  // edge-list RAM read port
  output logic                       edge_re,
  output logic [$clog2(MAX_E)-1:0]   edge_raddr,
  input  logic [$clog2(MAX_N)-1:0]   edge_src,
  input  logic [$clog2(MAX_N)-1:0]   edge_dst,
  // node-embedding RAM read ports
  output logic                       emb_re,
  output logic [$clog2(MAX_N)-1:0]   emb_raddr_a,
  output logic [$clog2(MAX_N)-1:0]   emb_raddr_b,
  input  emb_vec_t                   emb_a,
  input  emb_vec_t                   emb_b,
  // to the edge-embedding network
  output logic                       out_valid,
  output emb_t                       out_x [2*EMB_DIM],
  output logic [$clog2(MAX_E)-1:0]   out_eidx,
  output logic [$clog2(MAX_N)-1:0]   out_dst,
  output logic                       busy
);
  localparam int unsigned NW = $clog2(MAX_N);
  localparam int unsigned EW = $clog2(MAX_E);
  localparam int unsigned CW = $clog2(MAX_E + 1);

  logic          running;
  logic [CW-1:0] idx, total;
  logic          s1_v, s2_v;
  logic [EW-1:0] s1_e, s2_e;
  logic [NW-1:0] s2_dst;

  assign edge_re    = running;
  assign edge_raddr = idx[EW-1:0];

  // stage 1: addresses for the embedding RAM come straight from the edge RAM
  assign emb_re      = s1_v;
  assign emb_raddr_a = edge_src;
  assign emb_raddr_b = edge_dst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      idx     <= '0;
      total   <= '0;
      s1_v    <= 1'b0;
      s2_v    <= 1'b0;
    end else if (flush) begin
      running <= 1'b0;
      s1_v    <= 1'b0;
      s2_v    <= 1'b0;
    end else begin
      if (start && !running) begin
        running <= (n_edges != '0);
        idx     <= '0;
        total   <= n_edges;
      end else if (running) begin
        idx <= idx + 1'b1;
        if (idx + 1'b1 == total) running <= 1'b0;
      end
      s1_v <= running;
      s2_v <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    s1_e   <= idx[EW-1:0];
    s2_e   <= s1_e;
    s2_dst <= edge_dst;
  end

  always_comb begin
    for (int k = 0; k < EMB_DIM; k++) begin
      out_x[k]           = emb_a[k];
      out_x[EMB_DIM + k] = emb_b[k];
    end
  end

  assign out_valid = s2_v;
  assign out_eidx  = s2_e;
  assign out_dst   = s2_dst;
  assign busy      = running || s1_v || s2_v;
endmodule
