// mlp_layer: one fully-connected layer of EMB_DIM outputs, fully unrolled.
//
// y[o] = act( b[o] + sum_i w[o][i] * x[i] ) for o = 0..EMB_DIM-1.
// Inputs carry FRAC (12) fraction bits and IN_W total bits (21 for the hit
// features, 18 for embeddings); weights, biases and outputs are
// ap_fixed<18,6>. The products are summed at full precision, the sum is
// truncated to 12 fraction bits (arithmetic shift, i.e. rounding toward
// minus infinity) and wrapped to 18 bits, as ap_fixed does by default. The
// activation is ReLU when RELU is set, identity otherwise.
//
// All EMB_DIM*IN_DIM multiplies happen in one cycle; the result is
// registered, so the layer has one cycle of latency and accepts a new input
// vector every cycle. in_valid is carried to out_valid; flush clears it.
// Full unrolling and ReLU are this design's choices.
module mlp_layer
  import gnn_pkg::*;
#(
  parameter int unsigned IN_DIM = EMB_DIM,
  parameter int unsigned IN_W   = EMB_W,
  parameter bit          RELU   = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   flush,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x [IN_DIM],
  input  emb_t                   w [EMB_DIM][IN_DIM],
  input  emb_t                   b [EMB_DIM],
  output logic                   out_valid,
  output emb_t                   y [EMB_DIM]
);
  localparam int unsigned ACC_W = IN_W + EMB_W + $clog2(IN_DIM + 1) + 1;

  emb_t y_d [EMB_DIM];

  always_comb begin
    for (int o = 0; o < EMB_DIM; o++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'(b[o]) <<< FRAC;
      for (int i = 0; i < IN_DIM; i++) begin
        acc = acc + ACC_W'(x[i]) * ACC_W'(w[o][i]);
      end
      y_d[o] = emb_t'(acc >>> FRAC);  // keep the low 18 bits: wrap
      if (RELU && y_d[o] < 0) y_d[o] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && !flush;
  end

  always_ff @(posedge clk) begin
    if (in_valid) y <= y_d;
  end
endmodule
