// tb_trackgnn_core: self-checking end-to-end test of the TrackGNN core at
// its default sizes (up to 200 nodes, 500 edges). Random parameters are
// loaded into both MLPs; random graphs are streamed in, with random gaps on
// the hit and edge streams and random back-pressure on the result stream.
// The integer reference model computes every node embedding, every edge
// embedding and every node's message sum; the edge-embedding stream and the
// message readback are compared with it. With res_ready held high, the core
// must take exactly 3N + E + 14 cycles from leaving LOAD to done. Also
// covered: a graph of the average size (92 nodes, 142 edges), the largest
// graph, a graph with more hits and edges than fit (overflow, extra ones
// dropped), and an event dropped in the middle of the edge phase, after which
// the next graph must come out right. A final sweep of ten graph sizes, from
// 16 nodes / 20 edges to 200 nodes / 500 edges, checks results and cycle
// count across the size range of the measured event sample.
module tb_trackgnn_core;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N  = MAX_NODES;
  localparam int E  = MAX_EDGES;
  localparam int NW = $clog2(N);
  localparam int EW = $clog2(E);
  localparam int WAW = $clog2(mlp_n_param(16));

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic           wt_we;
  wsel_e          wt_sel;
  logic [WAW-1:0] wt_addr;
  emb_t           wt_data;
  logic           hit_valid, hit_ready;
  hit_t           hit;
  logic           edge_valid, edge_ready, edge_last;
  logic [NW-1:0]  edge_src, edge_dst;
  logic           drop_ev;
  logic           eo_valid;
  logic [EW-1:0]  eo_idx;
  emb_vec_t       eo_emb;
  logic           res_valid, res_ready, res_last;
  logic [NW-1:0]  res_node;
  msg_vec_t       res_msg;
  logic           busy, done, overflow;
  logic [$clog2(N+1)-1:0] n_nodes;
  logic [$clog2(E+1)-1:0] n_edges;

  trackgnn_core dut (.*);

  lvec_t  nprm, eprm;
  lvec_t  feat [N+8];
  int     src [E+8], dst [E+8];
  lvec_t  e_ref [E];
  longint m_ref [N][EMB_DIM];
  int     nn, ne;          // graph as sent
  int     nn_k, ne_k;      // graph as kept
  int     eo_seen, res_seen;
  bit     res_bp;          // apply random back-pressure
  int     t_busy, t_done;
  bit     checking;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // reference model of one graph
  task automatic compute_ref();
    lvec_t h [N];
    for (int n = 0; n < nn_k; n++) begin
      h[n] = ref_mlp(NODE_FEAT, nprm, feat[n]);
      for (int k = 0; k < EMB_DIM; k++) m_ref[n][k] = 0;
    end
    for (int e = 0; e < ne_k; e++) begin
      lvec_t x;
      x = {};
      for (int k = 0; k < EMB_DIM; k++) x.push_back(h[src[e]][k]);
      for (int k = 0; k < EMB_DIM; k++) x.push_back(h[dst[e]][k]);
      e_ref[e] = ref_mlp(2*EMB_DIM, eprm, x);
      for (int k = 0; k < EMB_DIM; k++)
        m_ref[dst[e]][k] = wrapw(m_ref[dst[e]][k] + e_ref[e][k], MSG_W);
    end
  endtask

  // output checkers
  always @(posedge clk) begin
    if (rst_n && checking) begin
      if (eo_valid) begin
        chk(int'(eo_idx) == eo_seen, "edge stream order");
        for (int k = 0; k < EMB_DIM; k++)
          chk(longint'(eo_emb[k]) == e_ref[eo_idx][k], $sformatf("edge %0d lane %0d", eo_idx, k));
        eo_seen++;
      end
      if (res_valid && res_ready) begin
        chk(int'(res_node) == res_seen, "result order");
        chk(res_last == (res_seen == nn_k - 1), "res_last");
        for (int k = 0; k < EMB_DIM; k++)
          chk(longint'(res_msg[k]) == m_ref[res_node][k], $sformatf("node %0d msg lane %0d", res_node, k));
        res_seen++;
      end
    end
    if (rst_n && busy && t_busy < 0) t_busy = cyc;
    if (rst_n && done) t_done = cyc;
  end

  always @(negedge clk) res_ready <= res_bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic load_params();
    nprm = {}; eprm = {};
    for (int k = 0; k < mlp_n_param(NODE_FEAT); k++) nprm.push_back(rnd_val(EMB_W));
    for (int k = 0; k < mlp_n_param(16); k++)        eprm.push_back(rnd_val(EMB_W));
    for (int k = 0; k < nprm.size(); k++) begin
      @(negedge clk); wt_we = 1; wt_sel = WSEL_NODE; wt_addr = WAW'(k); wt_data = emb_t'(nprm[k]);
    end
    for (int k = 0; k < eprm.size(); k++) begin
      @(negedge clk); wt_we = 1; wt_sel = WSEL_EDGE; wt_addr = WAW'(k); wt_data = emb_t'(eprm[k]);
    end
    @(negedge clk); wt_we = 0;
  endtask

  task automatic make_graph(int n_send, int e_send);
    nn = n_send; ne = e_send;
    nn_k = (nn > N) ? N : nn;
    ne_k = (ne > E) ? E : ne;
    for (int n = 0; n < nn; n++) begin
      feat[n % (N+8)] = {};
      for (int k = 0; k < NODE_FEAT; k++) feat[n % (N+8)].push_back(rnd_val(MSG_W));
    end
    for (int e = 0; e < ne; e++) begin
      src[e % (E+8)] = $urandom_range(0, nn_k - 1);
      dst[e % (E+8)] = $urandom_range(0, nn_k - 1);
    end
  endtask

  // stream the graph in; both streams run in parallel with random gaps
  task automatic send_graph(bit gaps);
    fork
      begin
        for (int n = 0; n < nn; n++) begin
          @(negedge clk);
          while (gaps && $urandom_range(0, 3) == 0) begin hit_valid = 0; @(negedge clk); end
          hit_valid = 1;
          for (int k = 0; k < NODE_FEAT; k++) hit.feat[k] = msg_t'(feat[n % (N+8)][k]);
          hit.last = (n == nn - 1);
          @(posedge clk);
          while (!hit_ready) @(posedge clk);
        end
        @(negedge clk); hit_valid = 0;
      end
      begin
        for (int e = 0; e < ne; e++) begin
          @(negedge clk);
          while (gaps && $urandom_range(0, 3) == 0) begin edge_valid = 0; @(negedge clk); end
          edge_valid = 1;
          edge_src = NW'(src[e % (E+8)]); edge_dst = NW'(dst[e % (E+8)]);
          edge_last = (e == ne - 1);
          @(posedge clk);
          while (!edge_ready) @(posedge clk);
        end
        @(negedge clk); edge_valid = 0;
      end
    join
  endtask

  task automatic run_graph(int n_send, int e_send, bit gaps, bit bp, bit timed);
    make_graph(n_send, e_send);
    compute_ref();
    eo_seen = 0; res_seen = 0; res_bp = bp; t_busy = -1; t_done = -1; checking = 1;
    send_graph(gaps);
    while (t_done < 0) @(negedge clk);
    chk(eo_seen == ne_k, "edge embeddings streamed");
    chk(res_seen == nn_k, "messages read back");
    if (timed) begin
      chk(t_done - t_busy == 3*nn_k + ne_k + 14, $sformatf("cycle count %0d exp %0d", t_done - t_busy, 3*nn_k + ne_k + 14));
      $display("graph %0d nodes %0d edges: %0d cycles (%0.2f us at 285 MHz)", nn_k, ne_k, t_done - t_busy, real'(t_done - t_busy) / 285.0);
    end
    @(negedge clk);
  endtask

  int n_ovf;
  always @(posedge clk) if (rst_n && overflow && busy && !done) n_ovf <= n_ovf + 1;

  initial begin
    wt_we = 0; wt_sel = WSEL_NODE; wt_addr = '0; wt_data = '0;
    hit_valid = 0; hit = '0; edge_valid = 0; edge_src = '0; edge_dst = '0; edge_last = 0;
    drop_ev = 0; res_bp = 0; checking = 0; n_ovf = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_params();
    run_graph(92, 142, 0, 0, 1);     // average graph
    run_graph(N, E, 0, 0, 1);        // largest graph
    run_graph(1, 1, 0, 0, 1);        // smallest graph
    run_graph(57, 120, 1, 1, 0);     // gaps and back-pressure
    load_params();
    run_graph(150, 333, 1, 1, 0);
    // overflow: more hits and edges than fit
    run_graph(N + 6, E + 4, 0, 1, 0);
    chk(n_ovf > 0, "overflow flagged");
    // drop in the middle of the edge phase, then a clean graph
    make_graph(80, 200);
    checking = 0;
    send_graph(0);
    repeat (80 + 6 + 20) @(negedge clk);   // node phase is N + 6 cycles: now in the edge phase
    chk(busy && eo_valid, "edge phase running when dropped");
    drop_ev = 1; @(negedge clk); drop_ev = 0;
    repeat (5) @(negedge clk);
    chk(!busy, "idle after drop");
    run_graph(64, 100, 1, 0, 1);
    // size sweep over the range of measured graphs (about 15 to 200 nodes,
    // up to 500 edges), printing cycles against size
    begin
      int sn [10] = '{16, 30, 50, 75, 92, 110, 130, 150, 175, 200};
      int se [10] = '{20, 45, 80, 120, 142, 200, 260, 320, 420, 500};
      for (int k = 0; k < 10; k++) run_graph(sn[k], se[k], 0, 0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
