// vq4snn_top: the VQ4SNN accelerator for a 784-128-10 spiking network.
//
// Two fully connected LIF layers, each with intra-layer inhibitory synapses,
// are instantiated in full and chained by a sync signal.  Layer 1 (784 inputs,
// 128 neurons) stores its 912 weight rows vector quantized: 16 pointers of
// 11 bits per row into a codebook of 2048 vectors of 8 five-bit weights, read
// through two ports, so each input spike costs 8 cycles.  Layer 2 (10 neurons)
// keeps its weights uncompressed and costs one cycle per spike.
//
// One inference is T_STEPS time steps.  start clears all neuron state.  For
// each time step the accelerator raises in_ready and takes the step's input
// spike vector in the cycle in_valid is also high; layer 1 then processes it,
// passes its output spikes and sync to layer 2, and when layer 2 is done
// out_valid pulses for one cycle with out_spikes (and hid_spikes) valid.  A
// new time step starts only after both layers have finished the current one.
// done pulses with the last out_valid.  The memories and per-neuron thresholds
// are written through the load ports while no inference runs.
//
// The network shape, d, k, the dual-ported codebook, the bit widths and the
// time-step count follow the main configuration the design targets.  The
// input handshake, the load ports, the leak shift and clearing state at
// start are this design's own choices.  How the output spikes are turned
// into a class (for example by counting them) is left to the user.
module vq4snn_top
  import vq4snn_pkg::*;
#(
  parameter int unsigned N_IN       = N_IN_DEF,
  parameter int unsigned N_HID      = N_HID_DEF,
  parameter int unsigned N_OUT      = N_OUT_DEF,
  parameter int unsigned D          = D_DEF,
  parameter int unsigned K          = K_DEF,
  parameter int unsigned W_HID      = W_DEF,
  parameter int unsigned W_OUT      = W_DEF,
  parameter int unsigned VW_HID     = VW_DEF,
  parameter int unsigned VW_OUT     = VW_DEF,
  parameter int unsigned PORTS      = PORTS_DEF,
  parameter int unsigned T_STEPS    = T_DEF,
  parameter int unsigned LEAK_SHIFT = LEAK_DEF,
  parameter bit          REC_HID    = 1'b1,
  parameter bit          REC_OUT    = 1'b1,
  localparam int unsigned G     = cdiv(N_HID, D),
  localparam int unsigned IW    = idxw(K),
  localparam int unsigned PROWS = N_IN + (REC_HID ? N_HID : 0),
  localparam int unsigned WROWS = N_HID + (REC_OUT ? N_OUT : 0),
  localparam int unsigned TW    = idxw(T_STEPS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // inference control
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic [TW-1:0]              step,
  // input spikes, one vector per time step
  output logic                       in_ready,
  input  logic                       in_valid,
  input  logic [N_IN-1:0]            in_spikes,
  // output spikes, one vector per time step
  output logic                       out_valid,
  output logic [N_OUT-1:0]           out_spikes,
  output logic [N_HID-1:0]           hid_spikes,
  // loading: layer-1 pointer memory and codebook
  input  logic                       ptr_we,
  input  logic [idxw(PROWS)-1:0]     ptr_waddr,
  input  logic [G-1:0][IW-1:0]       ptr_wdata,
  input  logic                       cb_we,
  input  logic [IW-1:0]              cb_waddr,
  input  logic [D-1:0][W_HID-1:0]    cb_wdata,
  // loading: layer-2 weight memory
  input  logic                       wm_we,
  input  logic [idxw(WROWS)-1:0]     wm_waddr,
  input  logic [N_OUT-1:0][W_OUT-1:0] wm_wdata,
  // loading: thresholds
  input  logic                       th_hid_we,
  input  logic [idxw(N_HID)-1:0]     th_hid_addr,
  input  logic signed [VW_HID-1:0]   th_hid_data,
  input  logic                       th_out_we,
  input  logic [idxw(N_OUT)-1:0]     th_out_addr,
  input  logic signed [VW_OUT-1:0]   th_out_data
);

  top_state_t state;
  logic       clear;
  logic       sync1, sync12, sync2;

  assign clear     = (state == TOP_IDLE) && start;
  assign in_ready  = (state == TOP_WAIT);
  assign sync1     = in_ready && in_valid;
  assign out_valid = sync2;
  assign busy      = (state != TOP_IDLE);
  assign done      = sync2 && (step == TW'(T_STEPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= TOP_IDLE;
      step  <= '0;
    end else begin
      unique case (state)
        TOP_IDLE: if (start) begin
          state <= TOP_WAIT;
          step  <= '0;
        end
        TOP_WAIT: if (in_valid) state <= TOP_RUN;
        TOP_RUN: if (sync2) begin
          if (step == TW'(T_STEPS - 1)) begin
            state <= TOP_IDLE;
          end else begin
            state <= TOP_WAIT;
            step  <= step + 1'b1;
          end
        end
        default: state <= TOP_IDLE;
      endcase
    end
  end

  vq_layer #(
    .N_IN(N_IN), .N(N_HID), .D(D), .K(K), .W(W_HID), .VW(VW_HID),
    .PORTS(PORTS), .LEAK_SHIFT(LEAK_SHIFT), .RECURRENT(REC_HID)
  ) u_l1 (
    .clk, .rst_n, .clear,
    .sync_in(sync1), .spikes_in(in_spikes),
    .sync_out(sync12), .spikes_out(hid_spikes), .phase(), .v_out(),
    .ptr_we, .ptr_waddr, .ptr_wdata,
    .cb_we, .cb_waddr, .cb_wdata,
    .th_we(th_hid_we), .th_addr(th_hid_addr), .th_data(th_hid_data)
  );

  dense_layer #(
    .N_IN(N_HID), .N(N_OUT), .W(W_OUT), .VW(VW_OUT),
    .LEAK_SHIFT(LEAK_SHIFT), .RECURRENT(REC_OUT)
  ) u_l2 (
    .clk, .rst_n, .clear,
    .sync_in(sync12), .spikes_in(hid_spikes),
    .sync_out(sync2), .spikes_out(out_spikes), .phase(), .v_out(),
    .wm_we, .wm_waddr, .wm_wdata,
    .th_we(th_out_we), .th_addr(th_out_addr), .th_data(th_out_data)
  );

  // Layer 2 only ever starts from layer 1's sync, and only while the top is
  // running a time step.
  a_sync2_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    sync12 |-> state == TOP_RUN);

endmodule
