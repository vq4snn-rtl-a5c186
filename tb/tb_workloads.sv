// tb_workloads: the accelerator built for the other two network sizes of
// the evaluation, each run for one complete inference against an integer
// model: SHD (700-200-20, d = 4, k = 2048, 7-bit weights, 14-bit
// potentials, 100 steps, 25 cycles per hidden spike) and AudioMNIST
// (40-150-10, d = 4, k = 1024, 6-bit weights, 12-bit potentials, 100
// steps; 150 neurons give a half-filled last group, 19 cycles per spike).
// Inputs are random spikes at a fixed density, not the real data sets.
module tb_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  int c0, f0, c1, f1;
  bit d0, d1;

  always #5 clk = ~clk;

  top_workload_check #(.NAME("SHD"), .N_IN(700), .N_HID(200), .N_OUT(20), .D(4), .K(2048),
    .W(7), .VW(14), .T(100), .DENSITY(4), .TH_LO(100), .TH_HI(900))
    u_shd (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  top_workload_check #(.NAME("AudioMNIST"), .N_IN(40), .N_HID(150), .N_OUT(10), .D(4), .K(1024),
    .W(6), .VW(12), .T(100), .DENSITY(20), .TH_LO(20), .TH_HI(200))
    u_audio (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
