// spike_arbiter: input spike register, arbiter and encoder of one layer.
//
// At the start of a time step (load) the layer's incoming spike vector is
// captured in a register.  While any captured spike is still pending, valid is
// high and addr carries the binary index of one of them, the "active synapse
// address" that selects a row of the weight memory.  pop consumes that spike
// (its bit is cleared at the clock edge) and the next pending spike is offered
// in the following cycle, so inactive inputs cost no cycles at all.
//
// Following the paper, active spikes are arbitrated rather than scanned one
// input at a time.  The policy (fixed priority, lowest index first) is this
// design's own choice.  load has precedence over pop in the same cycle.
// Timing: addr and valid are combinational from the pending register; one
// spike can be consumed per cycle.
module spike_arbiter #(
  parameter int unsigned WIDTH = vq4snn_pkg::N_IN_DEF,
  localparam int unsigned AW   = vq4snn_pkg::idxw(WIDTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,      // drop all pending spikes
  input  logic             load,       // capture spikes_in
  input  logic [WIDTH-1:0] spikes_in,
  input  logic             pop,        // consume the offered spike
  output logic             valid,
  output logic [AW-1:0]    addr
);

  logic [WIDTH-1:0] pending;

  always_comb begin
    addr = '0;
    for (int i = WIDTH - 1; i >= 0; i--) begin
      if (pending[i]) addr = AW'(i);
    end
  end

  assign valid = |pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
    end else if (clear) begin
      pending <= '0;
    end else if (load) begin
      pending <= spikes_in;
    end else if (pop && valid) begin
      pending[addr] <= 1'b0;
    end
  end

endmodule
