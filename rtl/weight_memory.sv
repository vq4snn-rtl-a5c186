// weight_memory: conventional (uncompressed) synaptic weight memory.
//
// One row per input synapse, holding the W-bit weights of all N neurons of
// the layer; weight n sits at bits [n*W +: W].  A spike's row is read in one
// access (one cycle of latency, registered output) and broadcast to every
// neuron, which is the update scheme of the baseline accelerator.  It serves
// the output layer, which the main configuration leaves uncompressed
// (138 rows of 10 x 5 bits).  The write port for loading is this design's own
// choice.
module weight_memory
  import vq4snn_pkg::*;
#(
  parameter int unsigned ROWS = N_HID_DEF + N_OUT_DEF,
  parameter int unsigned N    = N_OUT_DEF,
  parameter int unsigned W    = W_DEF,
  localparam int unsigned AW  = idxw(ROWS)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [N-1:0][W-1:0]  wdata,
  input  logic                 re,
  input  logic [AW-1:0]        raddr,
  output logic [N-1:0][W-1:0]  rdata
);

  logic [N*W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
