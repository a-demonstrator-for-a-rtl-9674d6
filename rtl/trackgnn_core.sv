// trackgnn_core: one-layer message-passing GNN engine (TrackGNN) for one
// event graph at a time.
//
// Dataflow (node embeddings first, then an adapter feeding the edge unit,
// then message aggregation):
//   LOAD   hits (node features, ap_fixed<21,9> x NODE_FEAT) arrive on the hit
//          stream and edges (src, dst node indices) on the edge stream, both
//          with a last flag; they are written into the feature and edge-list
//          RAMs. The two streams load in parallel. Hits beyond MAX_N and edges
//          beyond MAX_E are dropped and flag overflow for the event.
//   NODE   every node's features go through the node MLP (4 layers, width 8);
//          the embedding h[n] is written to the node-embedding RAM and the
//          node's message m[n] is cleared. One node enters per cycle.
//   EDGE   the edge adapter reads (src, dst) and h[src], h[dst] and feeds
//          {h[src], h[dst]} to the edge MLP (4 layers, width 8). Each edge
//          embedding e is streamed out (eo_*) and added to m[dst].
//   READ   m[n] (ap_fixed<21,9> x 8) is read back for n = 0..N-1 on the res_*
//          stream (valid/ready), the last node flagged.
// Then done pulses and the core returns to LOAD.
// Weights of both MLPs are loaded through wt_* at any time outside an event
// (wt_sel picks the network; address map in mlp4).
// Cycle count for N nodes and E edges, after both streams are loaded:
// NODE takes N + 6 cycles, EDGE E + 7, READ 2N (with res_ready held high),
// plus one cycle for DONE.
// drop_ev (from the fixed-latency logic) abandons the current event: the
// pipelines are flushed, hits and edges of the event still to come are
// consumed and discarded (FLUSH), and the core returns to LOAD.
// What follows the model: one GNN layer, 4-layer MLPs of width 8 for nodes and
// edges, the number formats, the size limits and the node-first dataflow with
// an adapter. This design's own choices: the stream formats, sum aggregation
// into the destination node only, one fully pipelined edge unit, and the
// overflow and drop behaviour.
module trackgnn_core
  import gnn_pkg::*;
#(
  parameter int unsigned MAX_N = MAX_NODES,
  parameter int unsigned MAX_E = MAX_EDGES,
  localparam int unsigned NW  = $clog2(MAX_N),
  localparam int unsigned EW  = $clog2(MAX_E),
  localparam int unsigned NCW = $clog2(MAX_N + 1),
  localparam int unsigned ECW = $clog2(MAX_E + 1),
  localparam int unsigned WAW = $clog2(mlp_n_param(2*EMB_DIM))
) (
  input  logic            clk,
  input  logic            rst_n,
  // parameter loading
  input  logic            wt_we,
  input  wsel_e           wt_sel,
  input  logic [WAW-1:0]  wt_addr,
  input  emb_t            wt_data,
  // hit (node) stream
  input  logic            hit_valid,
  output logic            hit_ready,
  input  hit_t            hit,
  // edge stream
  input  logic            edge_valid,
  output logic            edge_ready,
  input  logic [NW-1:0]   edge_src,
  input  logic [NW-1:0]   edge_dst,
  input  logic            edge_last,
  // abandon the current event
  input  logic            drop_ev,
  // edge-embedding stream
  output logic            eo_valid,
  output logic [EW-1:0]   eo_idx,
  output emb_vec_t        eo_emb,
  // per-node message readback
  output logic            res_valid,
  input  logic            res_ready,
  output logic [NW-1:0]   res_node,
  output msg_vec_t        res_msg,
  output logic            res_last,
  // status
  output logic            busy,
  output logic            done,
  output logic            overflow,
  output logic [NCW-1:0]  n_nodes,
  output logic [ECW-1:0]  n_edges
);
  typedef enum logic [2:0] {S_LOAD, S_NODE, S_EDGE, S_READ, S_DONE, S_FLUSH} state_e;
  state_e state;

  localparam int unsigned FW = NODE_FEAT * MSG_W;

  logic hits_done, edges_done;
  logic hit_acc, edge_acc;

  // ---------------------------------------------------------------- memories
  logic          feat_re;
  logic [NW-1:0] feat_raddr;
  logic [FW-1:0] feat_rdata, feat_unused;

  dp_ram #(.DEPTH(MAX_N), .WIDTH(FW)) u_feat (
    .clk, .we(hit_acc && n_nodes < NCW'(MAX_N)), .waddr(n_nodes[NW-1:0]), .wdata(hit.feat),
    .re_a(feat_re), .raddr_a(feat_raddr), .rdata_a(feat_rdata),
    .re_b(1'b0), .raddr_b('0), .rdata_b(feat_unused)
  );

  logic          el_re;
  logic [EW-1:0] el_raddr;
  logic [2*NW-1:0] el_rdata, el_unused;

  dp_ram #(.DEPTH(MAX_E), .WIDTH(2*NW)) u_edges (
    .clk, .we(edge_acc && n_edges < ECW'(MAX_E)), .waddr(n_edges[EW-1:0]), .wdata({edge_src, edge_dst}),
    .re_a(el_re), .raddr_a(el_raddr), .rdata_a(el_rdata),
    .re_b(1'b0), .raddr_b('0), .rdata_b(el_unused)
  );

  logic          nm_out_valid;
  emb_t          nm_y [EMB_DIM];
  logic [NW-1:0] nm_tag;
  emb_vec_t      nm_y_vec;
  logic          emb_re;
  logic [NW-1:0] emb_ra, emb_rb;
  emb_vec_t      emb_a, emb_b;

  always_comb for (int k = 0; k < EMB_DIM; k++) nm_y_vec[k] = nm_y[k];

  dp_ram #(.DEPTH(MAX_N), .WIDTH(EMB_DIM*EMB_W)) u_emb (
    .clk, .we(nm_out_valid && state == S_NODE), .waddr(nm_tag), .wdata(nm_y_vec),
    .re_a(emb_re), .raddr_a(emb_ra), .rdata_a(emb_a),
    .re_b(emb_re), .raddr_b(emb_rb), .rdata_b(emb_b)
  );

  // ---------------------------------------------------------------- node MLP
  logic          nm_in_valid;
  logic [NW-1:0] nm_in_tag;
  logic signed [MSG_W-1:0] nm_x [NODE_FEAT];

  always_comb for (int k = 0; k < NODE_FEAT; k++) nm_x[k] = feat_rdata[k*MSG_W +: MSG_W];

  mlp4 #(.IN_DIM(NODE_FEAT), .IN_W(MSG_W), .TAG_W(NW)) u_node_mlp (
    .clk, .rst_n, .flush(drop_ev),
    .wt_we(wt_we && wt_sel == WSEL_NODE), .wt_addr(wt_addr[$clog2(mlp_n_param(NODE_FEAT))-1:0]),
    .wt_data,
    .in_valid(nm_in_valid), .x(nm_x), .in_tag(nm_in_tag),
    .out_valid(nm_out_valid), .y(nm_y), .out_tag(nm_tag)
  );

  // ---------------------------------------------------------------- adapter
  logic          ad_start, ad_valid, ad_busy;
  emb_t          ad_x [2*EMB_DIM];
  logic [EW-1:0] ad_eidx;
  logic [NW-1:0] ad_dst;

  edge_adapter #(.MAX_N(MAX_N), .MAX_E(MAX_E)) u_adapter (
    .clk, .rst_n, .flush(drop_ev), .start(ad_start), .n_edges(n_edges),
    .edge_re(el_re), .edge_raddr(el_raddr),
    .edge_src(el_rdata[2*NW-1:NW]), .edge_dst(el_rdata[NW-1:0]),
    .emb_re(emb_re), .emb_raddr_a(emb_ra), .emb_raddr_b(emb_rb), .emb_a(emb_a), .emb_b(emb_b),
    .out_valid(ad_valid), .out_x(ad_x), .out_eidx(ad_eidx), .out_dst(ad_dst), .busy(ad_busy)
  );

  // ---------------------------------------------------------------- edge MLP
  logic          em_valid;
  emb_t          em_y [EMB_DIM];
  logic [EW+NW-1:0] em_tag;

  mlp4 #(.IN_DIM(2*EMB_DIM), .IN_W(EMB_W), .TAG_W(EW+NW)) u_edge_mlp (
    .clk, .rst_n, .flush(drop_ev),
    .wt_we(wt_we && wt_sel == WSEL_EDGE), .wt_addr(wt_addr), .wt_data,
    .in_valid(ad_valid), .x(ad_x), .in_tag({ad_eidx, ad_dst}),
    .out_valid(em_valid), .y(em_y), .out_tag(em_tag)
  );

  // ---------------------------------------------------------------- aggregator
  logic [NW-1:0] rb_idx;
  msg_vec_t      agg_rd;

  msg_aggregator #(.MAX_N(MAX_N)) u_agg (
    .clk, .rst_n,
    .clr(nm_out_valid && state == S_NODE), .clr_idx(nm_tag),
    .acc(em_valid && state == S_EDGE), .acc_idx(em_tag[NW-1:0]), .acc_val(em_y),
    .rd_idx(rb_idx), .rd_msg(agg_rd)
  );

  assign eo_valid = em_valid && state == S_EDGE;
  assign eo_idx   = em_tag[EW+NW-1:NW];
  always_comb for (int k = 0; k < EMB_DIM; k++) eo_emb[k] = em_y[k];

  // ---------------------------------------------------------------- control
  logic [NCW-1:0] issue_idx, wr_cnt;
  logic [ECW-1:0] e_cnt;
  logic           rb_phase;

  assign hit_ready  = (state == S_LOAD || state == S_FLUSH) && !hits_done;
  assign edge_ready = (state == S_LOAD || state == S_FLUSH) && !edges_done;
  assign hit_acc    = hit_valid && hit_ready && state == S_LOAD;
  assign edge_acc   = edge_valid && edge_ready && state == S_LOAD;

  assign feat_re    = state == S_NODE && issue_idx < n_nodes;
  assign feat_raddr = issue_idx[NW-1:0];

  assign res_valid = state == S_READ && rb_phase;
  assign res_node  = rb_idx;
  assign res_msg   = agg_rd;
  assign res_last  = NCW'(rb_idx) == n_nodes - 1'b1;

  assign busy = state != S_LOAD;
  assign ad_start = state == S_NODE && wr_cnt == n_nodes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_LOAD;
      hits_done   <= 1'b0;
      edges_done  <= 1'b0;
      n_nodes     <= '0;
      n_edges     <= '0;
      overflow    <= 1'b0;
      issue_idx   <= '0;
      wr_cnt      <= '0;
      e_cnt       <= '0;
      rb_idx      <= '0;
      rb_phase    <= 1'b0;
      nm_in_valid <= 1'b0;
      nm_in_tag   <= '0;
      done        <= 1'b0;
    end else begin
      done        <= 1'b0;
      nm_in_valid <= feat_re && !drop_ev;
      nm_in_tag   <= issue_idx[NW-1:0];
      if (drop_ev) begin
        state <= S_FLUSH;
      end else begin
        unique case (state)
          S_LOAD: begin
            if (hit_acc) begin
              if (n_nodes < NCW'(MAX_N)) n_nodes <= n_nodes + 1'b1;
              else                       overflow <= 1'b1;
              if (hit.last) hits_done <= 1'b1;
            end
            if (edge_acc) begin
              if (n_edges < ECW'(MAX_E)) n_edges <= n_edges + 1'b1;
              else                       overflow <= 1'b1;
              if (edge_last) edges_done <= 1'b1;
            end
            if (hits_done && edges_done) begin
              state     <= S_NODE;
              issue_idx <= '0;
              wr_cnt    <= '0;
            end
          end
          S_NODE: begin
            if (feat_re) issue_idx <= issue_idx + 1'b1;
            if (nm_out_valid) wr_cnt <= wr_cnt + 1'b1;
            if (ad_start) begin
              state <= S_EDGE;
              e_cnt <= '0;
            end
          end
          S_EDGE: begin
            if (em_valid) e_cnt <= e_cnt + 1'b1;
            if (e_cnt == n_edges) begin
              state    <= S_READ;
              rb_idx   <= '0;
              rb_phase <= 1'b0;
            end
          end
          S_READ: begin
            if (!rb_phase) begin
              rb_phase <= 1'b1;
            end else if (res_ready) begin
              rb_phase <= 1'b0;
              if (res_last) state <= S_DONE;
              else          rb_idx <= rb_idx + 1'b1;
            end
          end
          S_DONE: begin
            done       <= 1'b1;
            state      <= S_LOAD;
            hits_done  <= 1'b0;
            edges_done <= 1'b0;
            n_nodes    <= '0;
            n_edges    <= '0;
            overflow   <= 1'b0;
          end
          S_FLUSH: begin
            if (hit_valid && hit_ready && hit.last)     hits_done  <= 1'b1;
            if (edge_valid && edge_ready && edge_last)  edges_done <= 1'b1;
            if ((hits_done || (hit_valid && hit_ready && hit.last)) &&
                (edges_done || (edge_valid && edge_ready && edge_last))) begin
              state      <= S_LOAD;
              hits_done  <= 1'b0;
              edges_done <= 1'b0;
              n_nodes    <= '0;
              n_edges    <= '0;
              overflow   <= 1'b0;
            end
          end
          default: state <= S_LOAD;
        endcase
      end
    end
  end

  // parameters must not change while an event is being computed
  a_no_wt_during_compute: assert property (@(posedge clk) disable iff (!rst_n)
      wt_we |-> (state == S_LOAD || state == S_FLUSH));
  a_adapter_idle: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_READ |-> !ad_busy);
  a_res_stable: assert property (@(posedge clk) disable iff (!rst_n)
      res_valid && !res_ready && !drop_ev |=> res_valid && $stable(res_node));

endmodule
