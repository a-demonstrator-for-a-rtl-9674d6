// tb_msg_aggregator: self-checking test of the per-node message sum.
// All 200 messages are cleared, then random edge embeddings (including large
// ones, so the 21-bit sums wrap) are accumulated into random destinations,
// often the same node on consecutive cycles. A model keeps the expected sums;
// the read port is checked every cycle against the model one cycle later.
// Some nodes are cleared again in the middle of the traffic.
module tb_msg_aggregator;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N = MAX_NODES;
  localparam int NW = $clog2(N);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          clr, acc;
  logic [NW-1:0] clr_idx, acc_idx, rd_idx;
  emb_t          acc_val [EMB_DIM];
  msg_vec_t      rd_msg;

  msg_aggregator #(.MAX_N(N)) dut (.*);

  longint model [N][EMB_DIM];
  longint exp_rd [EMB_DIM];
  bit     exp_ok;
  bit     checking;

  always @(posedge clk) begin
    if (rst_n) begin
      if (exp_ok) begin
        for (int k = 0; k < EMB_DIM; k++) begin
          checks++;
          if (longint'(rd_msg[k]) != exp_rd[k]) begin
            failures++;
            if (failures < 10) $display("read lane %0d got %0d exp %0d", k, rd_msg[k], exp_rd[k]);
          end
        end
      end
      // the value read this edge is the model before this edge's updates
      for (int k = 0; k < EMB_DIM; k++) exp_rd[k] = model[rd_idx][k];
      exp_ok = checking;
      if (acc)
        for (int k = 0; k < EMB_DIM; k++)
          model[acc_idx][k] = wrapw(model[acc_idx][k] + longint'(acc_val[k]), MSG_W);
      if (clr) for (int k = 0; k < EMB_DIM; k++) model[clr_idx][k] = 0;
    end
  end

  initial begin
    exp_ok = 1'b0;
    checking = 1'b0;
    clr = 0; acc = 0; clr_idx = '0; acc_idx = '0; rd_idx = '0;
    for (int k = 0; k < EMB_DIM; k++) acc_val[k] = '0;
    for (int n = 0; n < N; n++) for (int k = 0; k < EMB_DIM; k++) model[n][k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // clear everything (model already zero)
    for (int n = 0; n < N; n++) begin
      @(negedge clk); clr = 1'b1; clr_idx = NW'(n); rd_idx = '0;
    end
    @(negedge clk); clr = 1'b0; checking = 1'b1;
    // random accumulation
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      acc = ($urandom_range(0, 9) < 8);
      if ($urandom_range(0, 2) != 0) acc_idx = NW'($urandom_range(0, 7));  // hot nodes
      else                           acc_idx = NW'($urandom_range(0, N-1));
      for (int k = 0; k < EMB_DIM; k++) acc_val[k] = emb_t'(rnd_val(EMB_W));
      clr = ($urandom_range(0, 49) == 0);
      clr_idx = NW'($urandom_range(8, N-1));
      if (clr && acc && clr_idx == acc_idx) clr = 1'b0;
      rd_idx = ($urandom_range(0, 1) == 0) ? acc_idx : NW'($urandom_range(0, N-1));
    end
    @(negedge clk); acc = 0; clr = 0;
    // final sweep
    for (int n = 0; n < N; n++) begin
      @(negedge clk); rd_idx = NW'(n);
    end
    @(negedge clk);
    @(negedge clk);
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
