// tb_hit_fifo: self-checking test of the decoded-hit FIFO at its full depth
// of 128. Phase 1 fills the FIFO with no reads and checks that exactly 128
// words are accepted and that in_ready then drops; phase 2 drains it and
// checks order and level; phase 3 runs random pushes and pops against a queue
// model. A word written in one cycle must be readable in the next.
module tb_hit_fifo;
  localparam int W = 64;
  localparam int D = 128;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic         in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] level;

  hit_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] model [$];
  int accepted, full_seen;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // scoreboard, sampled at the rising edge
  always @(posedge clk) begin
    if (rst_n) begin
      chk(int'(level) == model.size(), "level");
      chk(out_valid == (model.size() != 0), "out_valid");
      chk(in_ready == (model.size() < D), "in_ready");
      if (out_valid && out_ready) begin
        chk(model.size() > 0 && out_data == model[0], "data order");
        if (model.size() > 0) void'(model.pop_front());
      end
      if (in_valid && in_ready) begin
        model.push_back(in_data);
        accepted++;
      end
      if (in_valid && !in_ready) full_seen++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: fill
    accepted = 0; full_seen = 0;
    for (int k = 0; k < D + 10; k++) begin
      @(negedge clk);
      in_valid = 1'b1; in_data = {$urandom, $urandom};
    end
    @(negedge clk);
    in_valid = 1'b0;
    chk(accepted == D, "fill accepted exactly DEPTH words");
    chk(full_seen == 10, "pushes refused when full");
    // phase 2: drain
    out_ready = 1'b1;
    repeat (D + 5) @(negedge clk);
    out_ready = 1'b0;
    chk(model.size() == 0, "drained");
    // write-to-read latency: one cycle
    @(negedge clk); in_valid = 1'b1; in_data = 64'h1234;
    @(negedge clk); in_valid = 1'b0;
    chk(out_valid && out_data == 64'h1234, "fall-through after one cycle");
    out_ready = 1'b1;
    @(negedge clk); out_ready = 1'b0;
    // phase 3: random traffic
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < 55);
      out_ready = ($urandom_range(0, 99) < 45);
      in_data   = {$urandom, $urandom};
    end
    @(negedge clk);
    in_valid = 0; out_ready = 0;
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
