// tb_dense_layer: self-checking test of an uncompressed layer at the main
// configuration's output-layer size (128 inputs, 10 neurons, 5-bit weights,
// 11-bit potentials, intra-layer inhibition).
//
// The weight memory is loaded with pseudo-random weights and an integer
// model runs the layer equations (inputs added in ascending order, own spikes
// of the previous step subtracted, saturation at 11 bits, threshold, hard
// reset, leak V -= V >>> 4).  After every time step all spikes and
// potentials are compared, and the step's length is checked against one
// cycle per spike plus five cycles of overhead.
module tb_dense_layer;
  import vq4snn_pkg::*;
  localparam int N_IN = 128, N = 10, W = 5, VW = 11, ROWS = N_IN + N;
  localparam int VMAX = 1023, VMIN = -1024, LS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, sync_in, sync_out;
  logic [N_IN-1:0] spikes_in;
  logic [N-1:0] spikes_out;
  phase_t phase;
  logic signed [VW-1:0] v_out [N];
  logic wm_we, th_we;
  logic [$clog2(ROWS)-1:0] wm_waddr;
  logic [N-1:0][W-1:0] wm_wdata;
  logic [$clog2(N)-1:0] th_addr;
  logic signed [VW-1:0] th_data;

  dense_layer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int wt [ROWS][N];
  int thr [N];
  int mv [N];
  bit msp [N];
  int nsat = 0, nfire = 0, ninh = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int sat(int x);
    if (x > VMAX) return VMAX;
    if (x < VMIN) return VMIN;
    return x;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int density, se, si, cyc, r;
    bit inp [N_IN];
    bit prev [N];
    clear = 0; sync_in = 0; spikes_in = '0;
    wm_we = 0; th_we = 0; wm_waddr = '0; wm_wdata = '0; th_addr = '0; th_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rr = 0; rr < ROWS; rr++) begin
      @(negedge clk);
      wm_we = 1; wm_waddr = $bits(wm_waddr)'(rr);
      for (int n = 0; n < N; n++) begin
        wt[rr][n] = (rr < N_IN) ? ((n == 0) ? $urandom_range(5, 15) : $urandom_range(0, 23) - 8) : $urandom_range(0, 15);
        wm_wdata[n] = W'(wt[rr][n]);
      end
    end
    @(negedge clk); wm_we = 0;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      th_we = 1; th_addr = 4'(n);
      thr[n] = (n == 0) ? VMAX : $urandom_range(20, 200);  // neuron 0 never fires
      th_data = VW'(thr[n]);
    end
    @(negedge clk); th_we = 0;
    clear = 1;
    @(negedge clk); clear = 0;
    foreach (mv[n]) begin mv[n] = 0; msp[n] = 0; end

    for (int step = 0; step < 40; step++) begin
      density = (step == 0) ? 0 : (step % 9 == 4) ? 90 : $urandom_range(5, 40);
      se = 0;
      for (int i = 0; i < N_IN; i++) begin
        inp[i] = ($urandom % 100) < density;
        spikes_in[i] = inp[i];
        se += inp[i];
      end
      si = 0;
      foreach (msp[n]) begin prev[n] = msp[n]; si += msp[n]; end
      ninh += si;
      for (int i = 0; i < N_IN; i++) if (inp[i])
        for (int n = 0; n < N; n++) begin
          mv[n] = sat(mv[n] + wt[i][n]);
          if (mv[n] == VMAX) nsat++;
        end
      for (int i = 0; i < N; i++) if (prev[i])
        for (int n = 0; n < N; n++) mv[n] = sat(mv[n] - wt[N_IN + i][n]);
      for (int n = 0; n < N; n++) begin
        msp[n] = mv[n] > thr[n];
        r = msp[n] ? 0 : mv[n];
        mv[n] = r - (r >>> LS);
        nfire += msp[n];
      end
      @(negedge clk);
      sync_in = 1;
      @(negedge clk);
      sync_in = 0;
      spikes_in = '0;
      cyc = 1;
      while (!sync_out && cyc < 10000) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == se + si + 5, $sformatf("step %0d: %0d spikes took %0d cycles", step, se + si, cyc));
      for (int n = 0; n < N; n++) begin
        check(spikes_out[n] == msp[n], $sformatf("step %0d neuron %0d spike", step, n));
        check(int'(v_out[n]) == mv[n], $sformatf("step %0d neuron %0d v %0d expected %0d", step, n, v_out[n], mv[n]));
      end
    end
    check(nsat > 0, "saturation reached");
    check(nfire > 0, "neurons fired");
    check(ninh > 0, "inhibition exercised");
    $display("saturations %0d fires %0d inhibitory spikes %0d", nsat, nfire, ninh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
