// pointer_memory: first level of the two-level weight store.
//
// One row per input synapse of a compressed layer (feedforward rows first,
// then the layer's own inhibitory rows).  A row holds G = ceil(N/d) codebook
// pointers of IW = log2(k) bits; pointer j names the d-weight vector for
// neuron group j.  In the main configuration that is 912 rows of 16 x 11 =
// 176 bits.  The row is read as a whole, with one cycle of latency like a
// block RAM with registered output, and rdata holds its value until the next
// read, so the group counter can walk through the row over several cycles.
//
// The write port, used to load the pointers before inference, is this
// design's own choice; the paper does not describe how memories are loaded.
module pointer_memory
  import vq4snn_pkg::*;
#(
  parameter int unsigned ROWS = N_IN_DEF + N_HID_DEF,
  parameter int unsigned G    = cdiv(N_HID_DEF, D_DEF),
  parameter int unsigned IW   = idxw(K_DEF),
  localparam int unsigned AW  = idxw(ROWS)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [G-1:0][IW-1:0]  wdata,
  input  logic                  re,
  input  logic [AW-1:0]         raddr,
  output logic [G-1:0][IW-1:0]  rdata
);

  logic [G*IW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
