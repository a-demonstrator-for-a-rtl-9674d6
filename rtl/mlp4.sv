// mlp4: four-layer perceptron with run-time loadable parameters, used both
// as the node-embedding network (3 hit features in) and as the
// edge-embedding network (two concatenated node embeddings, 16 values in).
//
// Every layer is EMB_DIM (8) wide. Layers 1-3 apply ReLU, layer 4 is linear;
// the activations are this design's choice, as the model's are not given.
// Each layer is an mlp_layer, so the network is a 4-stage pipeline: latency
// 4 cycles, one input vector accepted every cycle. An optional tag travels
// with each vector (the core uses it for the node or edge index).
//
// Parameters live in a register file written through wt_we/wt_addr/wt_data,
// one ap_fixed<18,6> value per write. The address map is, for each layer L in
// order 1..4: the weights w[o][i] at base_L + o*in_L + i, then the biases b[o]
// at base_L + EMB_DIM*in_L + o, where in_1 = IN_DIM and in_L = EMB_DIM after.
// The register file is cleared at reset. Writing parameters while vectors
// are in flight changes their result; the core does not do that. flush drops
// every vector in flight.
module mlp4
  import gnn_pkg::*;
#(
  parameter int unsigned IN_DIM = NODE_FEAT,
  parameter int unsigned IN_W   = MSG_W,
  parameter int unsigned TAG_W  = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   flush,
  input  logic                   wt_we,
  input  logic [$clog2(mlp_n_param(IN_DIM))-1:0] wt_addr,
  input  emb_t                   wt_data,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x [IN_DIM],
  input  logic [TAG_W-1:0]       in_tag,
  output logic                   out_valid,
  output emb_t                   y [EMB_DIM],
  output logic [TAG_W-1:0]       out_tag
);
  localparam int unsigned N_PARAM = mlp_n_param(IN_DIM);
  localparam int unsigned N_W0    = EMB_DIM * IN_DIM + EMB_DIM;
  localparam int unsigned N_WH    = EMB_DIM * EMB_DIM + EMB_DIM;

  emb_t prm [N_PARAM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_PARAM; k++) prm[k] <= '0;
    end else if (wt_we && int'(wt_addr) < N_PARAM) begin
      prm[wt_addr] <= wt_data;
    end
  end

  // Layer 1
  emb_t w0 [EMB_DIM][IN_DIM];
  emb_t b0 [EMB_DIM];
  always_comb begin
    for (int o = 0; o < EMB_DIM; o++) begin
      for (int i = 0; i < IN_DIM; i++) w0[o][i] = prm[o*IN_DIM + i];
      b0[o] = prm[EMB_DIM*IN_DIM + o];
    end
  end

  logic v   [N_LAYERS];
  emb_t act [N_LAYERS][EMB_DIM];

  mlp_layer #(.IN_DIM(IN_DIM), .IN_W(IN_W), .RELU(1'b1)) u_l0 (
    .clk, .rst_n, .flush, .in_valid(in_valid), .x(x), .w(w0), .b(b0),
    .out_valid(v[0]), .y(act[0])
  );

  // Layers 2..4
  for (genvar l = 1; l < N_LAYERS; l++) begin : g_hidden
    emb_t wl [EMB_DIM][EMB_DIM];
    emb_t bl [EMB_DIM];
    always_comb begin
      for (int o = 0; o < EMB_DIM; o++) begin
        for (int i = 0; i < EMB_DIM; i++) wl[o][i] = prm[N_W0 + (l-1)*N_WH + o*EMB_DIM + i];
        bl[o] = prm[N_W0 + (l-1)*N_WH + EMB_DIM*EMB_DIM + o];
      end
    end
    mlp_layer #(.IN_DIM(EMB_DIM), .IN_W(EMB_W), .RELU(l != N_LAYERS-1)) u_l (
      .clk, .rst_n, .flush, .in_valid(v[l-1]), .x(act[l-1]), .w(wl), .b(bl),
      .out_valid(v[l]), .y(act[l])
    );
  end

  // Tag pipeline, aligned with the layer registers.
  logic [TAG_W-1:0] tag_q [N_LAYERS];
  always_ff @(posedge clk) begin
    tag_q[0] <= in_tag;
    for (int l = 1; l < N_LAYERS; l++) tag_q[l] <= tag_q[l-1];
  end

  assign out_valid = v[N_LAYERS-1];
  assign y         = act[N_LAYERS-1];
  assign out_tag   = tag_q[N_LAYERS-1];
endmodule
