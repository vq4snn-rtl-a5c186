// rate_encoder_model: behavioural rate encoder for testbenches (not
// synthesizable).  Each input has an 8-bit intensity; on every step pulse a
// fresh spike vector is drawn in which input i spikes with probability
// value[i]/256, so brighter inputs give denser spike trains.
module rate_encoder_model #(
  parameter int N = 784
) (
  input  logic             clk,
  input  logic             step,
  input  logic [7:0]       value [N],
  output logic [N-1:0]     spikes
);
  initial spikes = '0;
  always @(posedge clk) begin
    if (step) begin
      for (int i = 0; i < N; i++) spikes[i] <= (($urandom % 256) < value[i]);
    end
  end
endmodule
