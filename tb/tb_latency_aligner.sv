// tb_latency_aligner: self-checking test of the fixed-latency decision logic
// at its default latency of 1140 cycles. A model replays every ev_start and
// every decision and predicts, cycle by cycle, what must come out: each event
// is resolved exactly LATENCY cycles after its ev_start, either with
// dec_valid/dec_trig (and trig_out when the decision is to trigger) if its
// decision arrived in time, or with veto and drop_ev otherwise. Scenarios:
// decisions on time (trigger and no trigger), a decision in the very cycle of
// the deadline, a late decision (veto, then counted as late), overlapping
// events, and more events than the queue holds (counted as lost).
module tb_latency_aligner;
  localparam int LAT = 1140;
  localparam int QD  = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic ev_start, res_valid, res_trig;
  logic dec_valid, dec_trig, trig_out, veto, drop_ev;
  logic [15:0] late_cnt, ev_lost_cnt;

  latency_aligner #(.LATENCY(LAT), .QDEPTH(QD)) dut (.*);

  // model: queue of (start cycle, has decision, decision)
  int  q_t [$];
  bit  q_h [$];
  bit  q_d [$];
  int  m_late, m_lost;
  // expected outputs for the next cycle
  bit  e_dv, e_dt, e_veto;
  int  n_trig, n_notrig, n_veto, n_edge_case;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      // outputs registered at the previous edge
      chk(dec_valid == e_dv,  "dec_valid");
      chk(!e_dv || dec_trig == e_dt, "dec_trig");
      chk(trig_out == (e_dv && e_dt), "trig_out");
      chk(veto == e_veto && drop_ev == e_veto, "veto/drop_ev");
      chk(int'(late_cnt) == m_late, "late_cnt");
      chk(int'(ev_lost_cnt) == m_lost, "ev_lost_cnt");
      e_dv = 0; e_dt = 0; e_veto = 0;
      // decision attaches to the oldest event without one
      if (res_valid) begin
        int idx;
        idx = -1;
        for (int k = 0; k < q_t.size(); k++) if (!q_h[k]) begin idx = k; break; end
        if (idx >= 0) begin q_h[idx] = 1; q_d[idx] = res_trig; end
        else m_late++;
      end
      // deadline of the head
      if (q_t.size() > 0 && cyc - q_t[0] == LAT - 1) begin
        if (q_h[0]) begin
          e_dv = 1; e_dt = q_d[0];
          if (q_d[0]) n_trig++; else n_notrig++;
        end else begin
          e_veto = 1; n_veto++;
        end
        void'(q_t.pop_front()); void'(q_h.pop_front()); void'(q_d.pop_front());
      end
      if (ev_start) begin
        if (q_t.size() < QD) begin q_t.push_back(cyc); q_h.push_back(0); q_d.push_back(0); end
        else m_lost++;
      end
    end
  end

  task automatic pulse_start();
    @(negedge clk); ev_start = 1;
    @(negedge clk); ev_start = 0;
  endtask
  task automatic decide(bit t);
    @(negedge clk); res_valid = 1; res_trig = t;
    @(negedge clk); res_valid = 0;
  endtask

  initial begin
    ev_start = 0; res_valid = 0; res_trig = 0;
    e_dv = 0; e_dt = 0; e_veto = 0; m_late = 0; m_lost = 0;
    n_trig = 0; n_notrig = 0; n_veto = 0; n_edge_case = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1: on-time trigger
    pulse_start(); repeat (500) @(negedge clk); decide(1); repeat (LAT) @(negedge clk);
    // 2: on-time no trigger
    pulse_start(); repeat (900) @(negedge clk); decide(0); repeat (LAT) @(negedge clk);
    // 3: decision exactly in the deadline cycle (ev_start sampled at edge s,
    //    due when cyc - s == LAT-1, so res_valid sampled at edge s+LAT-1)
    @(negedge clk); ev_start = 1;
    @(negedge clk); ev_start = 0;
    repeat (LAT - 3) @(negedge clk);
    res_valid = 1; res_trig = 1; n_edge_case++;
    @(negedge clk); res_valid = 0;
    repeat (LAT) @(negedge clk);
    // 4: late decision: veto, then the decision counts as late
    pulse_start(); repeat (LAT + 20) @(negedge clk); decide(1); repeat (20) @(negedge clk);
    // 5: overlapping events, decisions in order, the third late
    pulse_start(); repeat (100) @(negedge clk);
    pulse_start(); repeat (100) @(negedge clk);
    pulse_start(); repeat (300) @(negedge clk);
    decide(1); decide(0);
    repeat (2 * LAT) @(negedge clk);
    // 6: more events than the queue holds
    for (int k = 0; k < QD + 2; k++) pulse_start();
    for (int k = 0; k < QD; k++) decide(k[0]);
    repeat (LAT + 20) @(negedge clk);
    // 7: random traffic
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      ev_start  = ($urandom_range(0, 399) == 0);
      res_valid = ($urandom_range(0, 399) == 0);
      res_trig  = $urandom_range(0, 1);
    end
    @(negedge clk); ev_start = 0; res_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    chk(n_trig > 0 && n_notrig > 0 && n_veto > 0 && m_late > 0 && m_lost > 0,
        "every outcome seen");
    $display("outcomes: trigger %0d, no trigger %0d, veto %0d, late %0d, lost %0d",
             n_trig, n_notrig, n_veto, m_late, m_lost);
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
