// hit_fifo: synchronous FIFO that buffers decoded hits in front of the GNN
// engine.
//
// The FIFO holds up to DEPTH entries (128 by default, the depth quoted for
// the decoded-hit FIFO, which bounds the forwarding/decoding latency to about
// 0.6 us). It is a circular buffer with separate read and write pointers and
// an occupancy counter. Both sides use a valid/ready handshake: a word is
// written when in_valid && in_ready and read when out_valid && out_ready.
// The head of the queue is shown on out_data combinationally (first-word
// fall-through), so a word written in cycle t can be read in cycle t+1.
// A push into a full FIFO is refused (in_ready low); the count of refused
// pushes is not kept here. Reset empties the FIFO. Data width, reset style
// and the fall-through read are this design's choices.
module hit_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic push, pop;

  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];
  assign level     = cnt;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      case ({push, pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  // The counter can never exceed the depth.
  a_cnt_bound: assert property (@(posedge clk) disable iff (!rst_n) int'(cnt) <= DEPTH);

endmodule
