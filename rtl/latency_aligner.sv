// latency_aligner: gives the trigger decision a fixed latency.
//
// The processing time of the engine depends on the event's occupancy, but
// the trigger input of the experiment must arrive a fixed time after the
// event. For each event, ev_start (a one-cycle pulse) records a time stamp
// from a free-running cycle counter in a small queue (QDEPTH entries, oldest
// first). Decisions (res_valid with res_trig) arrive in event order and are
// attached to the oldest event that has none yet. Exactly LATENCY cycles after
// an event's ev_start, that event leaves the queue:
//   * if its decision has arrived (at the latest in the same cycle), dec_valid
//     pulses with dec_trig, and trig_out pulses if the decision is to trigger;
//   * otherwise veto pulses (the event gets no trigger) and so does drop_ev,
//     which tells the engine to drop the event it is processing.
// A decision arriving while no event waits for one is dropped and counted in
// late_cnt; an ev_start arriving with the queue full is dropped and counted
// in ev_lost_cnt. The outputs are registered.
// The default LATENCY of 1140 cycles is the roughly 4 us left for the engine
// inside the 10 us goal, at the engine's 285 MHz clock. The queue, the time
// stamps and the drop_ev signal are this design's way of doing the delaying /
// vetoing; the queue depth is this design's choice.
module latency_aligner #(
  parameter int unsigned LATENCY = 1140,
  parameter int unsigned QDEPTH  = 4,
  parameter int unsigned TS_W    = $clog2(LATENCY + 1) + 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ev_start,
  input  logic        res_valid,
  input  logic        res_trig,
  output logic        dec_valid,
  output logic        dec_trig,
  output logic        trig_out,
  output logic        veto,
  output logic        drop_ev,
  output logic [15:0] late_cnt,
  output logic [15:0] ev_lost_cnt
);
  localparam int unsigned QW = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  logic [TS_W-1:0] now;
  logic [TS_W-1:0] ts_q  [QDEPTH];
  logic            has_q [QDEPTH];
  logic            trg_q [QDEPTH];
  logic [QW-1:0]   rd_ptr, wr_ptr, res_ptr;
  logic [CW-1:0]   cnt, npend;

  logic            due, head_has, head_trg, take_res, push, drop_pend;
  logic [TS_W-1:0] age;

  function automatic logic [QW-1:0] inc(logic [QW-1:0] p);
    return (p == QW'(QDEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    age      = now - ts_q[rd_ptr];
    due      = (cnt != '0) && (age == TS_W'(LATENCY - 1));
    take_res = res_valid && (npend != '0);
    head_has = has_q[rd_ptr] || (take_res && res_ptr == rd_ptr);
    head_trg = has_q[rd_ptr] ? trg_q[rd_ptr] : res_trig;
    push     = ev_start && (cnt != CW'(QDEPTH) || due);
    drop_pend = due && !head_has;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now         <= '0;
      rd_ptr      <= '0;
      wr_ptr      <= '0;
      res_ptr     <= '0;
      cnt         <= '0;
      npend       <= '0;
      dec_valid   <= 1'b0;
      dec_trig    <= 1'b0;
      trig_out    <= 1'b0;
      veto        <= 1'b0;
      drop_ev       <= 1'b0;
      late_cnt    <= '0;
      ev_lost_cnt <= '0;
      for (int k = 0; k < QDEPTH; k++) begin
        ts_q[k]  <= '0;
        has_q[k] <= 1'b0;
        trg_q[k] <= 1'b0;
      end
    end else begin
      now       <= now + 1'b1;
      dec_valid <= 1'b0;
      dec_trig  <= 1'b0;
      trig_out  <= 1'b0;
      veto      <= 1'b0;
      drop_ev     <= 1'b0;

      // attach a decision to the oldest event still waiting for one
      if (take_res) begin
        has_q[res_ptr] <= 1'b1;
        trg_q[res_ptr] <= res_trig;
      end
      if (res_valid && !take_res) late_cnt <= late_cnt + 1'b1;

      // the head event reaches its fixed latency
      if (due) begin
        rd_ptr <= inc(rd_ptr);
        if (head_has) begin
          dec_valid <= 1'b1;
          dec_trig  <= head_trg;
          trig_out  <= head_trg;
        end else begin
          veto  <= 1'b1;
          drop_ev <= 1'b1;
        end
      end

      // new event
      if (push) begin
        ts_q[wr_ptr]  <= now;
        has_q[wr_ptr] <= 1'b0;
        wr_ptr        <= inc(wr_ptr);
      end
      if (ev_start && !push) ev_lost_cnt <= ev_lost_cnt + 1'b1;

      cnt <= cnt + CW'(push) - CW'(due);

      // pending-decision bookkeeping: a due event without a decision also
      // leaves the set of events waiting for one
      npend <= npend + CW'(push) - CW'(take_res) - CW'(drop_pend);
      if (take_res || drop_pend) res_ptr <= inc(res_ptr);
    end
  end

  a_one_outcome: assert property (@(posedge clk) disable iff (!rst_n) !(dec_valid && veto));
endmodule
