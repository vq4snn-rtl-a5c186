// vq_layer: a fully connected LIF layer whose weights are vector quantized.
//
// Each row of the original weight matrix (the N weights one input synapse
// contributes to the N neurons) is cut into G = ceil(N/d) vectors of d
// consecutive weights, and every vector is replaced by a pointer into a
// shared codebook of k vectors.  The layer therefore keeps two memories: the
// pointer memory (one row of G pointers per input synapse, the feedforward
// rows first and then, if RECURRENT, one row per own neuron for the
// intra-layer inhibition) and the vector codebook.
//
// Per time step (see layer_ctrl): the incoming spikes are arbitrated one at
// a time; the selected address reads a pointer row; the group sequencer then
// steps through the row, PORTS pointers per cycle, each pointer reading one
// d-weight vector from the codebook that is added to (or, for the layer's own
// spikes of the previous step, subtracted from) the potentials of one group
// of d neurons.  A spike thus costs ceil(G/PORTS) cycles, 8 in the main
// configuration, and successive spikes follow each other without a bubble.
// All N neurons exist in hardware; only the addressed groups are enabled.
// After both arbiters are empty and the pipeline has drained, one evaluation
// cycle produces the new spikes, and sync_out pulses with spikes_out valid.
//
// Pipeline: cycle 0 arbitration and pointer read, cycle 1..S codebook reads,
// one cycle later the neuron update.  The memory write ports, the threshold
// write port and clear are this design's own choices for loading and
// restarting.  If N is not a multiple of d, the lanes of the last group
// beyond N are not built.
module vq_layer
  import vq4snn_pkg::*;
#(
  parameter int unsigned N_IN       = N_IN_DEF,
  parameter int unsigned N          = N_HID_DEF,
  parameter int unsigned D          = D_DEF,
  parameter int unsigned K          = K_DEF,
  parameter int unsigned W          = W_DEF,
  parameter int unsigned VW         = VW_DEF,
  parameter int unsigned PORTS      = PORTS_DEF,
  parameter int unsigned LEAK_SHIFT = LEAK_DEF,
  parameter bit          RECURRENT  = 1'b1,
  parameter reset_mode_t RESET_MODE = RESET_HARD,
  localparam int unsigned G    = cdiv(N, D),
  localparam int unsigned IW   = idxw(K),
  localparam int unsigned ROWS = N_IN + (RECURRENT ? N : 0),
  localparam int unsigned RAW  = idxw(ROWS),
  localparam int unsigned NAW  = idxw(N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,       // start of a new input
  // time-step chain
  input  logic                   sync_in,
  input  logic [N_IN-1:0]        spikes_in,
  output logic                   sync_out,
  output logic [N-1:0]           spikes_out,
  output phase_t                 phase,
  output logic signed [VW-1:0]   v_out [N],
  // loading
  input  logic                   ptr_we,
  input  logic [RAW-1:0]         ptr_waddr,
  input  logic [G-1:0][IW-1:0]   ptr_wdata,
  input  logic                   cb_we,
  input  logic [IW-1:0]          cb_waddr,
  input  logic [D-1:0][W-1:0]    cb_wdata,
  input  logic                   th_we,
  input  logic [NAW-1:0]         th_addr,
  input  logic signed [VW-1:0]   th_data
);

  logic                    load, eval;
  logic                    exc_valid, inh_valid;
  logic [idxw(N_IN)-1:0]   exc_addr;
  logic [NAW-1:0]          inh_addr;
  logic                    seq_ready, seq_busy;
  logic                    pop_exc, pop_inh;
  logic                    ptr_re, ptr_pend, inh_pend;
  logic [RAW-1:0]          ptr_raddr;
  logic [G-1:0][IW-1:0]    ptr_row;
  logic [PORTS-1:0]        cb_re;
  logic [PORTS-1:0][IW-1:0] cb_raddr;
  logic [PORTS-1:0][D-1:0][W-1:0] cb_rdata;
  logic [G-1:0]            grp_en;
  logic                    upd_inhibit;

  layer_ctrl #(.RECURRENT(RECURRENT)) u_ctrl (
    .clk, .rst_n, .clear, .sync_in,
    .exc_pending(exc_valid), .inh_pending(inh_valid),
    .dp_busy(ptr_pend || seq_busy),
    .phase, .load, .eval, .sync_out
  );

  // Excitatory input: spikes of the previous layer.
  spike_arbiter #(.WIDTH(N_IN)) u_exc_arb (
    .clk, .rst_n, .clear, .load, .spikes_in,
    .pop(pop_exc), .valid(exc_valid), .addr(exc_addr)
  );

  // Inhibitory input: this layer's own spikes of the previous time step.
  if (RECURRENT) begin : g_rec
    spike_arbiter #(.WIDTH(N)) u_inh_arb (
      .clk, .rst_n, .clear, .load, .spikes_in(spikes_out),
      .pop(pop_inh), .valid(inh_valid), .addr(inh_addr)
    );
  end else begin : g_norec
    assign inh_valid = 1'b0;
    assign inh_addr  = '0;
  end

  // Excite/inhibit multiplexer in front of the pointer memory.
  assign pop_exc   = (phase == PH_EXCITE)  && exc_valid && seq_ready;
  assign pop_inh   = (phase == PH_INHIBIT) && inh_valid && seq_ready;
  assign ptr_re    = pop_exc || pop_inh;
  assign ptr_raddr = pop_inh ? RAW'(N_IN + int'(inh_addr)) : RAW'(exc_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_pend <= 1'b0;
      inh_pend <= 1'b0;
    end else if (clear) begin
      ptr_pend <= 1'b0;
      inh_pend <= 1'b0;
    end else begin
      ptr_pend <= ptr_re;
      inh_pend <= pop_inh;
    end
  end

  pointer_memory #(.ROWS(ROWS), .G(G), .IW(IW)) u_ptr (
    .clk, .we(ptr_we), .waddr(ptr_waddr), .wdata(ptr_wdata),
    .re(ptr_re), .raddr(ptr_raddr), .rdata(ptr_row)
  );

  group_sequencer #(.G(G), .IW(IW), .PORTS(PORTS)) u_seq (
    .clk, .rst_n, .clear,
    .start(ptr_pend), .inhibit_in(inh_pend), .row_in(ptr_row),
    .ready_next(seq_ready), .busy(seq_busy),
    .cb_re, .cb_addr(cb_raddr),
    .grp_en, .inhibit_out(upd_inhibit)
  );

  vector_codebook #(.K(K), .D(D), .W(W), .PORTS(PORTS)) u_cb (
    .clk, .we(cb_we), .waddr(cb_waddr), .wdata(cb_wdata),
    .re(cb_re), .raddr(cb_raddr), .rdata(cb_rdata)
  );

  // Neuron g*D + j takes lane j of the vector from port g % PORTS.
  for (genvar n = 0; n < N; n++) begin : g_neuron
    lif_neuron #(
      .W(W), .VW(VW), .LEAK_SHIFT(LEAK_SHIFT), .RESET_MODE(RESET_MODE)
    ) u_n (
      .clk, .rst_n, .clear,
      .th_we(th_we && (th_addr == NAW'(n))), .th_data,
      .en(grp_en[n / D]), .inhibit(upd_inhibit),
      .weight(cb_rdata[(n / D) % PORTS][n % D]),
      .eval, .spike(spikes_out[n]), .v(v_out[n])
    );
  end

endmodule
