// tb_mlp4: self-checking test of the four-layer MLP in both of its
// configurations: the node network (3 inputs of 21 bits) and the edge network
// (16 inputs of 18 bits). Random parameters are loaded through the parameter
// port, then random vectors are streamed one per cycle. Every output lane is
// compared with the integer reference model, the tag must travel with its
// vector, and the latency must be 4 cycles. A second parameter set is loaded
// and checked to show reloading works.
module tb_mlp4;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N_VEC = 300;
  localparam int NP_N = mlp_n_param(3);
  localparam int NP_E = mlp_n_param(16);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ DUTs
  logic                     n_we, e_we;
  logic [$clog2(NP_N)-1:0]  n_addr;
  logic [$clog2(NP_E)-1:0]  e_addr;
  emb_t                     n_wd, e_wd;
  logic                     n_iv, e_iv, n_ov, e_ov;
  logic signed [MSG_W-1:0]  n_x [3];
  logic signed [EMB_W-1:0]  e_x [16];
  logic [9:0]               n_it, e_it, n_ot, e_ot;
  emb_t                     n_y [8], e_y [8];

  mlp4 #(.IN_DIM(3), .IN_W(MSG_W), .TAG_W(10)) u_node (
    .clk, .rst_n, .flush(1'b0), .wt_we(n_we), .wt_addr(n_addr), .wt_data(n_wd),
    .in_valid(n_iv), .x(n_x), .in_tag(n_it), .out_valid(n_ov), .y(n_y), .out_tag(n_ot));
  mlp4 #(.IN_DIM(16), .IN_W(EMB_W), .TAG_W(10)) u_edge (
    .clk, .rst_n, .flush(1'b0), .wt_we(e_we), .wt_addr(e_addr), .wt_data(e_wd),
    .in_valid(e_iv), .x(e_x), .in_tag(e_it), .out_valid(e_ov), .y(e_y), .out_tag(e_ot));

  lvec_t n_prm, e_prm;
  lvec_t n_exp [N_VEC], e_exp [N_VEC];
  int    n_t0 [N_VEC], e_t0 [N_VEC];
  int    n_got, e_got;

  // ------------------------------------------------------------ checkers
  always @(posedge clk) begin
    if (rst_n && n_ov) begin
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (longint'(n_y[k]) != n_exp[n_ot][k]) begin
          failures++;
          if (failures < 10) $display("node vec %0d lane %0d: got %0d exp %0d", n_ot, k, n_y[k], n_exp[n_ot][k]);
        end
      end
      checks++;
      if (cyc - n_t0[n_ot] != 4) begin failures++; $display("node latency %0d", cyc - n_t0[n_ot]); end
      n_got++;
    end
    if (rst_n && e_ov) begin
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (longint'(e_y[k]) != e_exp[e_ot][k]) begin
          failures++;
          if (failures < 10) $display("edge vec %0d lane %0d: got %0d exp %0d", e_ot, k, e_y[k], e_exp[e_ot][k]);
        end
      end
      checks++;
      if (cyc - e_t0[e_ot] != 4) begin failures++; $display("edge latency %0d", cyc - e_t0[e_ot]); end
      e_got++;
    end
  end

  task automatic load_params();
    n_prm = {};
    e_prm = {};
    for (int k = 0; k < NP_N; k++) n_prm.push_back(rnd_val(EMB_W));
    for (int k = 0; k < NP_E; k++) e_prm.push_back(rnd_val(EMB_W));
    for (int k = 0; k < NP_E; k++) begin
      @(negedge clk);
      n_we = (k < NP_N); n_addr = k[$clog2(NP_N)-1:0]; n_wd = emb_t'(n_prm[k < NP_N ? k : 0]);
      e_we = 1'b1;       e_addr = k[$clog2(NP_E)-1:0]; e_wd = emb_t'(e_prm[k]);
    end
    @(negedge clk);
    n_we = 1'b0; e_we = 1'b0;
  endtask

  task automatic run_vectors();
    n_got = 0; e_got = 0;
    for (int v = 0; v < N_VEC; v++) begin
      lvec_t nx, ex;
      nx = {}; ex = {};
      for (int i = 0; i < 3; i++)  nx.push_back(rnd_val(MSG_W));
      for (int i = 0; i < 16; i++) ex.push_back(rnd_val(EMB_W));
      n_exp[v] = ref_mlp(3, n_prm, nx);
      e_exp[v] = ref_mlp(16, e_prm, ex);
      @(negedge clk);
      n_iv = 1'b1; e_iv = 1'b1; n_it = 10'(v); e_it = 10'(v);
      for (int i = 0; i < 3; i++)  n_x[i] = MSG_W'(nx[i]);
      for (int i = 0; i < 16; i++) e_x[i] = EMB_W'(ex[i]);
      n_t0[v] = cyc;  // cycle number of the edge that samples it, as seen by the checker
      e_t0[v] = cyc;
    end
    @(negedge clk);
    n_iv = 1'b0; e_iv = 1'b0;
    repeat (8) @(negedge clk);
    checks++;
    if (n_got != N_VEC || e_got != N_VEC) begin
      failures++; $display("vector count node %0d edge %0d", n_got, e_got);
    end
  endtask

  initial begin
    n_we = 0; e_we = 0; n_iv = 0; e_iv = 0; n_addr = '0; e_addr = '0; n_wd = '0; e_wd = '0;
    n_it = '0; e_it = '0;
    for (int i = 0; i < 3; i++)  n_x[i] = '0;
    for (int i = 0; i < 16; i++) e_x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_params();
    run_vectors();
    load_params();
    run_vectors();
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
