// layer_ctrl: phase controller of one layer.
//
// A layer is idle until its sync input pulses.  In that cycle it loads the
// spike arbiters (load), then feeds the excitatory spikes of the previous
// layer (PH_EXCITE), then, if the layer has recurrent synapses, its own
// spikes of the previous time step as inhibition (PH_INHIBIT).  Once both
// arbiters are empty it waits for the weight-memory pipeline to drain
// (PH_DRAIN), spends one cycle in state evaluation (eval: threshold, reset,
// leak) and pulses sync_out in the following cycle, when the new output
// spikes are valid.  sync_out starts the next layer, or tells the network
// that this layer is done with the time step.
//
// The phase order and the sync chain follow the paper; the exact states and
// one-cycle pulses are this design's own.  The datapath moves from excitation
// to inhibition without a bubble because each request carries its own sign.
module layer_ctrl
  import vq4snn_pkg::*;
#(
  parameter bit RECURRENT = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   sync_in,
  input  logic   exc_pending,  // excitatory arbiter not empty
  input  logic   inh_pending,  // inhibitory arbiter not empty
  input  logic   dp_busy,      // memory pipeline holds work
  output phase_t phase,
  output logic   load,
  output logic   eval,
  output logic   sync_out
);

  phase_t nxt;

  assign load = (phase == PH_IDLE) && sync_in;
  assign eval = (phase == PH_EVAL);

  always_comb begin
    nxt = phase;
    unique case (phase)
      PH_IDLE:    if (sync_in) nxt = PH_EXCITE;
      PH_EXCITE:  if (!exc_pending) nxt = RECURRENT ? PH_INHIBIT : PH_DRAIN;
      PH_INHIBIT: if (!inh_pending) nxt = PH_DRAIN;
      PH_DRAIN:   if (!dp_busy) nxt = PH_EVAL;
      PH_EVAL:    nxt = PH_IDLE;
      default:    nxt = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= PH_IDLE;
      sync_out <= 1'b0;
    end else if (clear) begin
      phase    <= PH_IDLE;
      sync_out <= 1'b0;
    end else begin
      phase    <= nxt;
      sync_out <= (phase == PH_EVAL);
    end
  end

  // sync must not arrive while the layer is still working on a time step.
  a_sync_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    sync_in |-> phase == PH_IDLE);

endmodule
