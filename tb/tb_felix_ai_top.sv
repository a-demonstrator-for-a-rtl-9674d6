// tb_felix_ai_top: end-to-end test of the FELIX-AI engine with every
// parameter at its default (200 nodes, 500 edges, 128-deep hit FIFO, decision
// latency 1140 cycles).
//
// A sequence of events is sent: hits through the hit FIFO (the hit sender
// runs ahead of the core, so the FIFO fills and stalls the sender), edges
// straight to the core. A behavioural stand-in for the trigger-decision
// networks reads each event's messages back and returns a decision, tagged
// with the event number, after a per-event delay: it triggers when the sum of
// lane 0 of the messages is above a per-event threshold. The integer reference
// model checks every edge embedding and every message. Every event must be
// resolved exactly 1140 cycles after its first hit entered the FIFO, with its
// decision if that came in time, otherwise with a veto; a veto must drop the
// event in the core only if the core is still on it, and a decision that
// arrives after its veto must be discarded as stale.
// Mechanisms counted, each of which must occur: trigger, no trigger, veto,
// veto that drops the core's event, FIFO full stall, graph overflow,
// result back-pressure, stale decision.
module tb_felix_ai_top;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N   = MAX_NODES;
  localparam int E   = MAX_EDGES;
  localparam int LAT = 1140;
  localparam int NW  = $clog2(N);
  localparam int EW  = $clog2(E);
  localparam int WAW = $clog2(mlp_n_param(16));
  localparam int NEV = 12;
  localparam longint NEVER = 64'sd1 << 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- DUT
  logic           wt_we;
  wsel_e          wt_sel;
  logic [WAW-1:0] wt_addr;
  emb_t           wt_data;
  logic           hit_in_valid, hit_in_ready;
  hit_t           hit_in;
  logic           edge_valid, edge_ready, edge_last;
  logic [NW-1:0]  edge_src, edge_dst;
  logic           eo_valid;
  logic [EW-1:0]  eo_idx;
  emb_vec_t       eo_emb;
  logic           res_valid, res_ready, res_last;
  logic [NW-1:0]  res_node;
  msg_vec_t       res_msg;
  logic [15:0]    res_event, hf_event;
  logic           hf_valid, hf_trig;
  logic           trig_out, dec_valid, dec_trig, veto;
  logic           core_busy, core_done, core_dropped, overflow;
  logic [$clog2(N+1)-1:0] n_nodes;
  logic [$clog2(E+1)-1:0] n_edges;
  logic [$clog2(129)-1:0] fifo_level;
  logic [15:0]    late_cnt, stale_cnt, ev_lost_cnt;

  felix_ai_top dut (.*);

  // ---------------------------------------------------------------- plan
  int     pl_n [NEV], pl_e [NEV], pl_delay [NEV];
  longint pl_thr [NEV];
  bit     pl_bp [NEV];

  lvec_t  nprm, eprm;
  lvec_t  feat [NEV][N+8];
  int     src [NEV][E+8], dst [NEV][E+8];
  lvec_t  e_ref [NEV][E];
  longint m_ref [NEV][N][EMB_DIM];
  int     nk [NEV], ek [NEV];

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  task automatic build_event(int v);
    lvec_t h [N];
    nk[v] = (pl_n[v] > N) ? N : pl_n[v];
    ek[v] = (pl_e[v] > E) ? E : pl_e[v];
    for (int n = 0; n < pl_n[v]; n++) begin
      feat[v][n] = {};
      for (int k = 0; k < NODE_FEAT; k++) feat[v][n].push_back(rnd_val(MSG_W));
    end
    for (int e = 0; e < pl_e[v]; e++) begin
      src[v][e] = $urandom_range(0, nk[v] - 1);
      dst[v][e] = $urandom_range(0, nk[v] - 1);
    end
    for (int n = 0; n < nk[v]; n++) begin
      h[n] = ref_mlp(NODE_FEAT, nprm, feat[v][n]);
      for (int k = 0; k < EMB_DIM; k++) m_ref[v][n][k] = 0;
    end
    for (int e = 0; e < ek[v]; e++) begin
      lvec_t x;
      x = {};
      for (int k = 0; k < EMB_DIM; k++) x.push_back(h[src[v][e]][k]);
      for (int k = 0; k < EMB_DIM; k++) x.push_back(h[dst[v][e]][k]);
      e_ref[v][e] = ref_mlp(2*EMB_DIM, eprm, x);
      for (int k = 0; k < EMB_DIM; k++)
        m_ref[v][dst[v][e]][k] = wrapw(m_ref[v][dst[v][e]][k] + e_ref[v][e][k], MSG_W);
    end
  endtask

  // ---------------------------------------------------------------- monitor
  int     n_started, n_resolved, core_ev, eo_seen, res_seen;
  bit     tb_in_ev;
  int     t_start [NEV], t_dec [NEV];
  bit     dec_of [NEV];
  longint lane0_sum;
  int     n_trig, n_notrig, n_veto, n_drop, n_stall, n_ovf, n_bp, n_stale_exp, n_done;
  // decisions waiting to be sent: due cycle, event, decision
  int     dq_t [$], dq_ev [$];
  bit     dq_d [$];

  always @(posedge clk) begin
    if (rst_n) begin
      // event starts
      if (hit_in_valid && hit_in_ready) begin
        if (!tb_in_ev) begin t_start[n_started] = cyc; n_started++; end
        tb_in_ev = !hit_in.last;
      end
      if (hit_in_valid && !hit_in_ready) n_stall++;
      if (res_valid && !res_ready) n_bp++;
      if (overflow && core_busy && !core_done) n_ovf++;

      // core outputs belong to event core_ev
      if (eo_valid) begin
        chk(int'(eo_idx) == eo_seen, "edge stream order");
        for (int k = 0; k < EMB_DIM; k++)
          chk(longint'(eo_emb[k]) == e_ref[core_ev][eo_idx][k], $sformatf("ev %0d edge %0d lane %0d", core_ev, eo_idx, k));
        eo_seen++;
      end
      if (res_valid && res_ready) begin
        chk(int'(res_event) == core_ev, "res_event");
        chk(int'(res_node) == res_seen, "result order");
        for (int k = 0; k < EMB_DIM; k++)
          chk(longint'(res_msg[k]) == m_ref[core_ev][res_node][k], $sformatf("ev %0d node %0d lane %0d", core_ev, res_node, k));
        lane0_sum += longint'(res_msg[0]);
        res_seen++;
        if (res_last) begin
          // behavioural decision network
          dq_t.push_back(cyc + pl_delay[core_ev]);
          dq_ev.push_back(core_ev);
          dq_d.push_back(lane0_sum > pl_thr[core_ev]);
          lane0_sum = 0;
        end
      end
      if (hf_valid) begin
        t_dec[hf_event] = cyc;
        dec_of[hf_event] = hf_trig;
        if (int'(hf_event) < n_resolved) n_stale_exp++;
      end

      // resolution of the oldest event
      if (dec_valid || veto) begin
        int r;
        bit on_time;
        r = n_resolved;
        on_time = (t_dec[r] >= 0) && (t_dec[r] <= t_start[r] + LAT - 1);
        chk(r < n_started, "resolved event was started");
        chk(cyc - t_start[r] == LAT, $sformatf("event %0d resolved after %0d cycles", r, cyc - t_start[r]));
        chk(dec_valid == on_time && veto == !on_time, $sformatf("event %0d outcome", r));
        if (dec_valid) begin
          chk(dec_trig == dec_of[r] && trig_out == dec_of[r], "trigger value");
          if (dec_trig) n_trig++; else n_notrig++;
        end
        if (veto) begin
          n_veto++;
          chk(core_dropped == (core_ev == r), "drop only the core's own event");
          if (core_dropped) n_drop++;
        end
        n_resolved++;
      end else begin
        chk(!trig_out && !core_dropped, "no trigger or drop outside a resolution");
      end

      if (core_done || core_dropped) begin
        if (core_done) begin
          chk(eo_seen == ek[core_ev] && res_seen == nk[core_ev], $sformatf("event %0d complete", core_ev));
          n_done++;
        end
        core_ev++;
        eo_seen = 0; res_seen = 0; lane0_sum = 0;
      end
    end
  end

  // decision sender: one decision per cycle, in due order
  always @(negedge clk) begin
    hf_valid <= 1'b0;
    if (dq_t.size() > 0) begin
      int best;
      best = 0;
      for (int k = 1; k < dq_t.size(); k++) if (dq_t[k] < dq_t[best]) best = k;
      if (dq_t[best] <= cyc) begin
        hf_valid <= 1'b1;
        hf_trig  <= dq_d[best];
        hf_event <= 16'(dq_ev[best]);
        dq_t.delete(best); dq_ev.delete(best); dq_d.delete(best);
      end
    end
  end

  always @(negedge clk) res_ready <= (core_ev < NEV && pl_bp[core_ev]) ? ($urandom_range(0, 3) != 0) : 1'b1;

  // ---------------------------------------------------------------- drivers
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

  task automatic send_hits();
    for (int v = 0; v < NEV; v++) begin
      // keep at most three events waiting in the latency queue
      while (n_started - n_resolved >= 3) @(negedge clk);
      for (int n = 0; n < pl_n[v]; n++) begin
        @(negedge clk);
        hit_in_valid = 1;
        for (int k = 0; k < NODE_FEAT; k++) hit_in.feat[k] = msg_t'(feat[v][n][k]);
        hit_in.last = (n == pl_n[v] - 1);
        @(posedge clk);
        while (!hit_in_ready) @(posedge clk);
      end
      @(negedge clk); hit_in_valid = 0;
    end
  endtask

  task automatic send_edges();
    for (int v = 0; v < NEV; v++) begin
      for (int e = 0; e < pl_e[v]; e++) begin
        @(negedge clk);
        edge_valid = 1;
        edge_src = NW'(src[v][e]); edge_dst = NW'(dst[v][e]);
        edge_last = (e == pl_e[v] - 1);
        @(posedge clk);
        while (!edge_ready) @(posedge clk);
      end
      @(negedge clk); edge_valid = 0;
    end
  endtask

  initial begin
    wt_we = 0; wt_sel = WSEL_NODE; wt_addr = '0; wt_data = '0;
    hit_in_valid = 0; hit_in = '0; edge_valid = 0; edge_src = '0; edge_dst = '0; edge_last = 0;
    hf_valid = 0; hf_trig = 0; hf_event = '0; res_ready = 1;
    n_started = 0; n_resolved = 0; core_ev = 0; eo_seen = 0; res_seen = 0; tb_in_ev = 0;
    lane0_sum = 0; n_trig = 0; n_notrig = 0; n_veto = 0; n_drop = 0; n_stall = 0; n_ovf = 0;
    n_bp = 0; n_stale_exp = 0; n_done = 0;
    for (int v = 0; v < NEV; v++) begin t_dec[v] = -1; dec_of[v] = 0; end
    //            nodes edges delay threshold back-pressure
    pl_n[0] = 92;  pl_e[0] = 142; pl_delay[0] = 20;   pl_thr[0] = -NEVER; pl_bp[0] = 0;  // trigger
    pl_n[1] = 60;  pl_e[1] = 100; pl_delay[1] = 5;    pl_thr[1] = NEVER;  pl_bp[1] = 1;  // no trigger
    pl_n[2] = 200; pl_e[2] = 500; pl_delay[2] = 5;    pl_thr[2] = 0;      pl_bp[2] = 0;  // too slow: veto, drop
    pl_n[3] = 40;  pl_e[3] = 60;  pl_delay[3] = 2000; pl_thr[3] = 0;      pl_bp[3] = 0;  // late decision: veto, stale
    pl_n[4] = 205; pl_e[4] = 504; pl_delay[4] = 5;    pl_thr[4] = 0;      pl_bp[4] = 0;  // overflow
    for (int v = 5; v < NEV; v++) begin
      pl_n[v] = $urandom_range(20, 110);
      pl_e[v] = $urandom_range(pl_n[v], 2 * pl_n[v]);
      pl_delay[v] = $urandom_range(1, 60);
      pl_thr[v] = (v % 2 == 0) ? -NEVER : NEVER;
      pl_bp[v] = v[0];
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_params();
    for (int v = 0; v < NEV; v++) build_event(v);
    fork
      send_hits();
      send_edges();
    join
    while (n_resolved < NEV) @(negedge clk);
    repeat (2200) @(negedge clk);  // let the late decision arrive
    chk(n_resolved == NEV, "all events resolved");
    chk(core_ev == NEV, "core finished or dropped every event");
    chk(int'(stale_cnt) == n_stale_exp, "stale decisions counted");
    chk(int'(ev_lost_cnt) == 0 && int'(late_cnt) == 0, "no lost events, no unmatched decisions");
    $display("mechanisms: trigger %0d, no trigger %0d, veto %0d, drop %0d, stall %0d cycles, overflow %0d, back-pressure %0d, stale %0d, completed %0d",
             n_trig, n_notrig, n_veto, n_drop, n_stall, n_ovf, n_bp, n_stale_exp, n_done);
    chk(n_trig > 0, "trigger seen");
    chk(n_notrig > 0, "no-trigger decision seen");
    chk(n_veto > 0, "veto seen");
    chk(n_drop > 0, "dropped event seen");
    chk(n_stall > 0, "FIFO stall seen");
    chk(n_ovf > 0, "overflow seen");
    chk(n_bp > 0, "back-pressure seen");
    chk(n_stale_exp > 0, "stale decision seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
