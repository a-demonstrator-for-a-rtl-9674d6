// felix_ai_top: the AI engine of the FELIX-AI trigger board.
//
// Decoded silicon hits enter through a 128-deep hit FIFO and are turned into
// graph nodes by the TrackGNN core, which also takes the event's edge list,
// computes node embeddings, edge embeddings and per-node messages, and streams
// the edge embeddings and the messages out. The trigger-decision networks that
// turn these into a heavy-flavour decision (displaced-vertex finding, track
// momentum regression, HF identification) are outside this RTL: their
// decision comes back on hf_valid / hf_trig. The latency aligner then releases
// each event's decision exactly LATENCY clock cycles after the event's first
// hit entered the FIFO, on trig_out (the trigger line to the timing module),
// or vetoes the event when the decision is late and makes the core drop the
// event if it is still working on it.
//
// Event bookkeeping (this design's choice): an event starts with the first hit
// pushed into the FIFO after the previous event's last hit. Events are handled
// in order; the top counts events the core has finished (done or dropped) and
// events the aligner has resolved (decided or vetoed), and a veto drops the
// core's current event only when both counts agree, i.e. the core is still on
// the vetoed event. Results carry the event number (res_event) and the
// decision must come back with it (hf_event): a decision for an event that
// was already vetoed is discarded and counted in stale_cnt. Clock: one clock, 285 MHz in the reference build.
module felix_ai_top
  import gnn_pkg::*;
#(
  parameter int unsigned MAX_N      = MAX_NODES,
  parameter int unsigned MAX_E      = MAX_EDGES,
  parameter int unsigned FIFO_DEPTH = 128,
  parameter int unsigned LATENCY    = 1140,
  localparam int unsigned NW  = $clog2(MAX_N),
  localparam int unsigned EW  = $clog2(MAX_E),
  localparam int unsigned NCW = $clog2(MAX_N + 1),
  localparam int unsigned ECW = $clog2(MAX_E + 1),
  localparam int unsigned WAW = $clog2(mlp_n_param(2*EMB_DIM))
) (
  input  logic            clk,
  input  logic            rst_n,
  // parameter loading (from the host over PCIe)
  input  logic            wt_we,
  input  wsel_e           wt_sel,
  input  logic [WAW-1:0]  wt_addr,
  input  emb_t            wt_data,
  // decoded hits from the decoder / clusterizer
  input  logic            hit_in_valid,
  output logic            hit_in_ready,
  input  hit_t            hit_in,
  // edge list of the event
  input  logic            edge_valid,
  output logic            edge_ready,
  input  logic [NW-1:0]   edge_src,
  input  logic [NW-1:0]   edge_dst,
  input  logic            edge_last,
  // GNN results to the trigger-decision networks
  output logic            eo_valid,
  output logic [EW-1:0]   eo_idx,
  output emb_vec_t        eo_emb,
  output logic            res_valid,
  input  logic            res_ready,
  output logic [NW-1:0]   res_node,
  output msg_vec_t        res_msg,
  output logic            res_last,
  output logic [15:0]     res_event,
  // decision of the trigger-decision networks, tagged with res_event
  input  logic            hf_valid,
  input  logic            hf_trig,
  input  logic [15:0]     hf_event,
  // fixed-latency trigger output
  output logic            trig_out,
  output logic            dec_valid,
  output logic            dec_trig,
  output logic            veto,
  // status
  output logic            core_busy,
  output logic            core_done,
  output logic            core_dropped,
  output logic            overflow,
  output logic [NCW-1:0]  n_nodes,
  output logic [ECW-1:0]  n_edges,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level,
  output logic [15:0]     late_cnt,
  output logic [15:0]     stale_cnt,
  output logic [15:0]     ev_lost_cnt
);
  // ---------------------------------------------------------------- hit FIFO
  logic f_valid, f_ready;
  hit_t f_data;
  logic push;

  hit_fifo #(.WIDTH($bits(hit_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(hit_in_valid), .in_ready(hit_in_ready), .in_data(hit_in),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .level(fifo_level)
  );

  assign push = hit_in_valid && hit_in_ready;

  // event start: first hit pushed after the last hit of the previous event
  logic in_event, ev_start;
  assign ev_start = push && !in_event;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    in_event <= 1'b0;
    else if (push) in_event <= !hit_in.last;
  end

  // ---------------------------------------------------------------- GNN core
  logic drop_core, al_drop;

  trackgnn_core #(.MAX_N(MAX_N), .MAX_E(MAX_E)) u_core (
    .clk, .rst_n,
    .wt_we, .wt_sel, .wt_addr, .wt_data,
    .hit_valid(f_valid), .hit_ready(f_ready), .hit(f_data),
    .edge_valid, .edge_ready, .edge_src, .edge_dst, .edge_last,
    .drop_ev(drop_core),
    .eo_valid, .eo_idx, .eo_emb,
    .res_valid, .res_ready, .res_node, .res_msg, .res_last,
    .busy(core_busy), .done(core_done), .overflow, .n_nodes, .n_edges
  );

  // ---------------------------------------------------------------- latency
  // A decision for an event that has already been resolved (vetoed) is stale
  // and must not be attached to a later event.
  logic [15:0] n_fin, n_resolved;
  logic        hf_fresh, hf_take;
  assign hf_fresh = $signed(hf_event - n_resolved) >= 0;
  assign hf_take  = hf_valid && hf_fresh;

  latency_aligner #(.LATENCY(LATENCY)) u_align (
    .clk, .rst_n,
    .ev_start, .res_valid(hf_take), .res_trig(hf_trig),
    .dec_valid, .dec_trig, .trig_out, .veto, .drop_ev(al_drop),
    .late_cnt, .ev_lost_cnt
  );

  // drop the core's event only if it is the one being vetoed
  assign drop_core    = al_drop && (n_fin == n_resolved);
  assign core_dropped = drop_core;
  assign res_event    = n_fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_fin      <= '0;
      n_resolved <= '0;
      stale_cnt  <= '0;
    end else begin
      if (core_done || drop_core) n_fin      <= n_fin + 1'b1;
      if (dec_valid || veto)      n_resolved <= n_resolved + 1'b1;
      if (hf_valid && !hf_fresh)  stale_cnt  <= stale_cnt + 1'b1;
    end
  end
endmodule
