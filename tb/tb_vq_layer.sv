// tb_vq_layer: self-checking test of the vector-quantized layer.
// Three configurations are run against an integer model by vq_layer_check:
//  - the main one: 784 inputs, 128 neurons, d = 8, k = 2048, two codebook
//    ports, so 8 cycles per spike; steps range from no input spikes to dense
//    ones that drive potentials into saturation;
//  - a single-ported codebook (60 inputs, 36 neurons, d = 4, k = 64):
//    N/d = 9 cycles per spike;
//  - a four-ported (replicated) codebook with a partial last group (50
//    inputs, 30 neurons, d = 4, k = 128): ceil(8/4) = 2 cycles per spike.
module tb_vq_layer;
  logic clk = 1'b0, rst_n = 1'b0;
  int c0, f0, c1, f1, c2, f2;
  bit d0, d1, d2;

  always #5 clk = ~clk;

  vq_layer_check u_main (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  vq_layer_check #(.N_IN(60), .N(36), .D(4), .K(64), .PORTS(1), .STEPS(30), .TH_LO(10), .TH_HI(120), .NEED_SAT(1'b0))
    u_one_port (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));
  vq_layer_check #(.N_IN(50), .N(30), .D(4), .K(128), .PORTS(4), .STEPS(30), .TH_LO(10), .TH_HI(120), .NEED_SAT(1'b0))
    u_four_ports (.clk, .rst_n, .checks(c2), .failures(f2), .finished(d2));

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
