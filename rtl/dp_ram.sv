// dp_ram: simple RAM with one write port and two independent read ports.
//
// Used for the hit-feature, node-embedding and edge-list memories of the
// TrackGNN core. Writes take effect at the clock edge; each read port
// registers mem[raddr] when its enable is high, so read data is valid one
// cycle after the address (block-RAM timing). Reading an address in the same
// cycle it is written returns the old word. Contents are not reset; the core
// only reads entries it has written for the current graph. This RAM is a
// building block of this design, not a part named in the published
// description.
module dp_ram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  output logic [WIDTH-1:0]         rdata_a,
  input  logic                     re_b,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output logic [WIDTH-1:0]         rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr] <= wdata;
    if (re_a) rdata_a    <= mem[raddr_a];
    if (re_b) rdata_b    <= mem[raddr_b];
  end
endmodule
