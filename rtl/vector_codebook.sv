// vector_codebook: second level of the two-level weight store.
//
// k entries, each a vector of d quantized weights of W bits (2048 x 40 bits
// in the main configuration), shared by all rows of the pointer memory.  It
// has PORTS independent read ports, two by default, matching the native dual
// port of an FPGA block RAM; each port turns one pointer into one weight
// vector per cycle, with one cycle of latency (registered output).
//
// Weight j of an entry sits at bits [j*W +: W] and goes to neuron j of the
// group being updated.  The separate write port used for loading is this
// design's own choice (on a block RAM it would share port A while idle).
module vector_codebook
  import vq4snn_pkg::*;
#(
  parameter int unsigned K     = K_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned W     = W_DEF,
  parameter int unsigned PORTS = PORTS_DEF,
  localparam int unsigned IW   = idxw(K)
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [IW-1:0]                 waddr,
  input  logic [D-1:0][W-1:0]           wdata,
  input  logic [PORTS-1:0]              re,
  input  logic [PORTS-1:0][IW-1:0]      raddr,
  output logic [PORTS-1:0][D-1:0][W-1:0] rdata
);

  logic [D*W-1:0] mem [K];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < PORTS; p++) begin : g_port
    always_ff @(posedge clk) begin
      if (re[p]) rdata[p] <= mem[raddr[p]];
    end
  end

endmodule
