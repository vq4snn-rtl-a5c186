// lif_neuron: one leaky integrate-and-fire neuron with its local state.
//
// The membrane potential and the firing threshold live in flip-flops inside
// the neuron.  In a cycle with en high the neuron does exactly one arithmetic
// operation: it adds the weight (excitation) or, with inhibit high, subtracts
// it (inhibition).  en is the group enable of the interleaved schedule; it is
// a clock enable standing in for the clock gating of idle neuron groups.
// A cycle with eval high is the state evaluation at the end of a time step:
// the potential is compared with the threshold (it fires when it exceeds it),
// a neuron that fires is reset, and then the leak V -= V >>> LEAK_SHIFT is
// applied, a decay factor that is a negative power of two.
//
// From the paper: add/subtract datapath, threshold compare, reset, then leak
// by right shift.  This design's own choices: saturating arithmetic at the
// membrane width, a hard reset to V_RESET by default (soft reset selectable),
// the leak shift value, and clear, which zeroes potential and spike for a new
// input.  spike is registered and holds until the next eval or clear.
module lif_neuron
  import vq4snn_pkg::*;
#(
  parameter int unsigned W          = W_DEF,    // weight bits
  parameter int unsigned VW         = VW_DEF,   // membrane bits
  parameter int unsigned LEAK_SHIFT = LEAK_DEF,
  parameter reset_mode_t RESET_MODE = RESET_HARD,
  parameter logic signed [VW-1:0] V_RESET = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,    // zero potential and spike
  input  logic                 th_we,    // write threshold
  input  logic signed [VW-1:0] th_data,
  input  logic                 en,       // integrate this cycle
  input  logic                 inhibit,  // subtract instead of add
  input  logic signed [W-1:0]  weight,
  input  logic                 eval,     // state evaluation
  output logic                 spike,
  output logic signed [VW-1:0] v
);

  localparam logic signed [VW:0] VMAX = (VW+1)'(2 ** (VW - 1) - 1);
  localparam logic signed [VW:0] VMIN = -(VW+1)'(2 ** (VW - 1));

  logic signed [VW-1:0] thr;

  // Saturate a (VW+1)-bit value into VW bits.
  function automatic logic signed [VW-1:0] sat(input logic signed [VW:0] x);
    if (x > VMAX) return VMAX[VW-1:0];
    if (x < VMIN) return VMIN[VW-1:0];
    return x[VW-1:0];
  endfunction

  logic signed [VW:0]   sum;
  logic                 fire;
  logic signed [VW-1:0] v_rst;
  logic signed [VW-1:0] v_eval;

  always_comb begin
    sum    = inhibit ? ((VW+1)'(v) - (VW+1)'(weight)) : ((VW+1)'(v) + (VW+1)'(weight));
    fire   = v > thr;
    if (!fire)                    v_rst = v;
    else if (RESET_MODE == RESET_SOFT) v_rst = sat((VW+1)'(v) - (VW+1)'(thr));
    else                          v_rst = V_RESET;
    v_eval = v_rst - (v_rst >>> LEAK_SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v     <= '0;
      spike <= 1'b0;
      thr   <= '0;
    end else begin
      if (th_we) thr <= th_data;
      if (clear) begin
        v     <= '0;
        spike <= 1'b0;
      end else if (eval) begin
        spike <= fire;
        v     <= v_eval;
      end else if (en) begin
        v <= sat(sum);
      end
    end
  end

endmodule
