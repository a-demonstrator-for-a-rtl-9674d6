// tb_edge_adapter: self-checking test of the adapter that feeds node
// embeddings to the edge network. The edge-list and node-embedding RAMs are
// dp_ram instances filled by the testbench with a random graph (200 nodes,
// 500 edges, the largest graph size). After start, the adapter must present
// every edge once, in order, one per cycle with no gap, with x = {h[src],
// h[dst]} and the right dst; the first vector must come 3 cycles after start
// and busy must fall when the last one is out. A second run with 1 edge
// checks the smallest graph.
module tb_edge_adapter;
  import gnn_pkg::*;

  localparam int N = MAX_NODES;
  localparam int E = MAX_EDGES;
  localparam int NW = $clog2(N);
  localparam int EW = $clog2(E);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic            start, flush;
  logic [$clog2(E+1)-1:0] n_edges;
  logic            edge_re, emb_re, out_valid, busy;
  logic [EW-1:0]   edge_raddr, out_eidx;
  logic [NW-1:0]   edge_src, edge_dst, emb_raddr_a, emb_raddr_b, out_dst;
  emb_vec_t        emb_a, emb_b;
  emb_t            out_x [2*EMB_DIM];

  edge_adapter #(.MAX_N(N), .MAX_E(E)) dut (.*);

  // memories
  logic          el_we, em_we;
  logic [EW-1:0] el_wa;
  logic [NW-1:0] em_wa;
  logic [2*NW-1:0] el_wd, el_rd, el_unused;
  emb_vec_t      em_wd;

  dp_ram #(.DEPTH(E), .WIDTH(2*NW)) u_el (.clk, .we(el_we), .waddr(el_wa), .wdata(el_wd),
    .re_a(edge_re), .raddr_a(edge_raddr), .rdata_a(el_rd), .re_b(1'b0), .raddr_b('0), .rdata_b(el_unused));
  dp_ram #(.DEPTH(N), .WIDTH(EMB_DIM*EMB_W)) u_em (.clk, .we(em_we), .waddr(em_wa), .wdata(em_wd),
    .re_a(emb_re), .raddr_a(emb_raddr_a), .rdata_a(emb_a), .re_b(emb_re), .raddr_b(emb_raddr_b), .rdata_b(emb_b));
  assign edge_src = el_rd[2*NW-1:NW];
  assign edge_dst = el_rd[NW-1:0];

  emb_vec_t h [N];
  int src [E], dst [E];
  int got, t_start, t_first, t_last;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int e;
      e = int'(out_eidx);
      checks++;
      if (e != got) begin failures++; $display("edge order got %0d exp %0d", e, got); end
      checks++;
      if (int'(out_dst) != dst[e]) begin failures++; $display("dst of edge %0d", e); end
      for (int k = 0; k < EMB_DIM; k++) begin
        checks += 2;
        if (out_x[k] != h[src[e]][k])           begin failures++; if (failures < 10) $display("src emb edge %0d lane %0d", e, k); end
        if (out_x[EMB_DIM+k] != h[dst[e]][k])   begin failures++; if (failures < 10) $display("dst emb edge %0d lane %0d", e, k); end
      end
      if (got == 0) t_first = cyc;
      t_last = cyc;
      got++;
    end
  end

  task automatic run(int ne);
    for (int e = 0; e < ne; e++) begin
      src[e] = $urandom_range(0, N-1);
      dst[e] = $urandom_range(0, N-1);
      @(negedge clk); el_we = 1; el_wa = EW'(e); el_wd = {NW'(src[e]), NW'(dst[e])};
    end
    @(negedge clk); el_we = 0;
    got = 0;
    @(negedge clk); start = 1; n_edges = ($clog2(E+1))'(ne); t_start = cyc;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (got != ne) begin failures++; $display("edges out %0d exp %0d", got, ne); end
    checks++;
    if (t_first - t_start != 3) begin failures++; $display("first-vector latency %0d", t_first - t_start); end
    checks++;
    if (t_last - t_first != ne - 1) begin failures++; $display("gaps in the edge stream"); end
  endtask

  initial begin
    start = 0; flush = 0; n_edges = '0; el_we = 0; em_we = 0; el_wa = '0; em_wa = '0; el_wd = '0; em_wd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < EMB_DIM; k++) h[n][k] = emb_t'($urandom);
      @(negedge clk); em_we = 1; em_wa = NW'(n); em_wd = h[n];
    end
    @(negedge clk); em_we = 0;
    run(E);
    run(1);
    run(37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
