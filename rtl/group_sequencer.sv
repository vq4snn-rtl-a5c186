// group_sequencer: group counter, pointer multiplexer and group decoder of a
// compressed layer.
//
// When a pointer row has been read (start high, the row on row_in), the
// counter walks through it in S = ceil(G/PORTS) steps.  In step s, codebook
// port p receives pointer s*PORTS + p, so with the two ports of a block RAM a
// row of N/d pointers is consumed in N/(2d) cycles.  The codebook answers one
// cycle later; in that cycle grp_en has one bit set per port, enabling the
// neuron groups s*PORTS + p, which are the only neurons that integrate.  Group
// g is therefore always fed by port g % PORTS, a fixed wiring.  The inhibit
// flag travels alongside.
//
// Timing: start is the cycle of step 0.  ready_next is high in an idle cycle
// and in the last step, the cycle in which the next row may be requested so
// that its start follows with no bubble.  busy covers the issue steps and the
// cycle of the final group update.  Counter and decode follow the paper; the
// port-to-group assignment is this design's own choice.
module group_sequencer
  import vq4snn_pkg::*;
#(
  parameter int unsigned G     = cdiv(N_HID_DEF, D_DEF),
  parameter int unsigned IW    = idxw(K_DEF),
  parameter int unsigned PORTS = PORTS_DEF,
  localparam int unsigned S    = cdiv(G, PORTS),
  localparam int unsigned SW   = idxw(S)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     start,
  input  logic                     inhibit_in,
  input  logic [G-1:0][IW-1:0]     row_in,
  output logic                     ready_next,
  output logic                     busy,
  // codebook request
  output logic [PORTS-1:0]         cb_re,
  output logic [PORTS-1:0][IW-1:0] cb_addr,
  // aligned with codebook data
  output logic [G-1:0]             grp_en,
  output logic                     inhibit_out
);

  logic          running;
  logic [SW-1:0] cnt;
  logic          issuing;
  logic [SW-1:0] step_now;
  logic          last_step;
  logic          vld_d;
  logic [SW-1:0] step_d;
  logic          inh_cur;

  assign issuing   = start || running;
  assign step_now  = start ? '0 : cnt;
  assign last_step = (step_now == SW'(S - 1));
  assign ready_next = !issuing || last_step;
  assign busy      = issuing || vld_d;

  // Multiplexer: the pointers of the current step go to the codebook ports.
  always_comb begin
    for (int p = 0; p < PORTS; p++) begin
      automatic int unsigned j = int'(step_now) * PORTS + p;
      cb_re[p]   = issuing && (j < G);
      cb_addr[p] = (j < G) ? row_in[j] : '0;
    end
  end

  // Decoder: enables of the groups whose vectors arrive this cycle.
  always_comb begin
    for (int g = 0; g < G; g++) begin
      grp_en[g] = vld_d && (step_d == SW'(g / PORTS));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      cnt         <= '0;
      vld_d       <= 1'b0;
      step_d      <= '0;
      inh_cur     <= 1'b0;
      inhibit_out <= 1'b0;
    end else if (clear) begin
      running     <= 1'b0;
      cnt         <= '0;
      vld_d       <= 1'b0;
      step_d      <= '0;
      inh_cur     <= 1'b0;
      inhibit_out <= 1'b0;
    end else begin
      if (start) inh_cur <= inhibit_in;
      vld_d       <= issuing;
      step_d      <= step_now;
      inhibit_out <= start ? inhibit_in : inh_cur;
      if (issuing && !last_step) begin
        running <= 1'b1;
        cnt     <= step_now + 1'b1;
      end else begin
        running <= 1'b0;
        cnt     <= '0;
      end
    end
  end

endmodule
