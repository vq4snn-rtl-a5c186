// dense_layer: a fully connected LIF layer with conventional weight storage.
//
// This is the update scheme of the baseline spatial-dataflow accelerator,
// kept for layers that are too small to gain from vector quantization (the
// output layer in the main configuration).  Each arbitrated spike reads one
// row of N weights, which is broadcast to all N neurons: one spike per cycle,
// all neurons updated in parallel one cycle after the read.  The layer's own
// spikes of the previous time step are fed afterwards, with the weights
// subtracted, when RECURRENT is set; their rows follow the N_IN feedforward
// rows in the weight memory.  Phases and sync are as in vq_layer (see
// layer_ctrl).  Write ports and clear are this design's own choices.
module dense_layer
  import vq4snn_pkg::*;
#(
  parameter int unsigned N_IN       = N_HID_DEF,
  parameter int unsigned N          = N_OUT_DEF,
  parameter int unsigned W          = W_DEF,
  parameter int unsigned VW         = VW_DEF,
  parameter int unsigned LEAK_SHIFT = LEAK_DEF,
  parameter bit          RECURRENT  = 1'b1,
  parameter reset_mode_t RESET_MODE = RESET_HARD,
  localparam int unsigned ROWS = N_IN + (RECURRENT ? N : 0),
  localparam int unsigned RAW  = idxw(ROWS),
  localparam int unsigned NAW  = idxw(N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   sync_in,
  input  logic [N_IN-1:0]        spikes_in,
  output logic                   sync_out,
  output logic [N-1:0]           spikes_out,
  output phase_t                 phase,
  output logic signed [VW-1:0]   v_out [N],
  input  logic                   wm_we,
  input  logic [RAW-1:0]         wm_waddr,
  input  logic [N-1:0][W-1:0]    wm_wdata,
  input  logic                   th_we,
  input  logic [NAW-1:0]         th_addr,
  input  logic signed [VW-1:0]   th_data
);

  logic                    load, eval;
  logic                    exc_valid, inh_valid;
  logic [idxw(N_IN)-1:0]   exc_addr;
  logic [NAW-1:0]          inh_addr;
  logic                    pop_exc, pop_inh;
  logic                    rd_re, rd_pend, inh_pend;
  logic [RAW-1:0]          rd_addr;
  logic [N-1:0][W-1:0]     row;

  layer_ctrl #(.RECURRENT(RECURRENT)) u_ctrl (
    .clk, .rst_n, .clear, .sync_in,
    .exc_pending(exc_valid), .inh_pending(inh_valid),
    .dp_busy(rd_pend),
    .phase, .load, .eval, .sync_out
  );

  spike_arbiter #(.WIDTH(N_IN)) u_exc_arb (
    .clk, .rst_n, .clear, .load, .spikes_in,
    .pop(pop_exc), .valid(exc_valid), .addr(exc_addr)
  );

  if (RECURRENT) begin : g_rec
    spike_arbiter #(.WIDTH(N)) u_inh_arb (
      .clk, .rst_n, .clear, .load, .spikes_in(spikes_out),
      .pop(pop_inh), .valid(inh_valid), .addr(inh_addr)
    );
  end else begin : g_norec
    assign inh_valid = 1'b0;
    assign inh_addr  = '0;
  end

  assign pop_exc = (phase == PH_EXCITE)  && exc_valid;
  assign pop_inh = (phase == PH_INHIBIT) && inh_valid;
  assign rd_re   = pop_exc || pop_inh;
  assign rd_addr = pop_inh ? RAW'(N_IN + int'(inh_addr)) : RAW'(exc_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend  <= 1'b0;
      inh_pend <= 1'b0;
    end else if (clear) begin
      rd_pend  <= 1'b0;
      inh_pend <= 1'b0;
    end else begin
      rd_pend  <= rd_re;
      inh_pend <= pop_inh;
    end
  end

  weight_memory #(.ROWS(ROWS), .N(N), .W(W)) u_wm (
    .clk, .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata),
    .re(rd_re), .raddr(rd_addr), .rdata(row)
  );

  for (genvar n = 0; n < N; n++) begin : g_neuron
    lif_neuron #(
      .W(W), .VW(VW), .LEAK_SHIFT(LEAK_SHIFT), .RESET_MODE(RESET_MODE)
    ) u_n (
      .clk, .rst_n, .clear,
      .th_we(th_we && (th_addr == NAW'(n))), .th_data,
      .en(rd_pend), .inhibit(inh_pend),
      .weight(row[n]),
      .eval, .spike(spikes_out[n]), .v(v_out[n])
    );
  end

endmodule
