// vq_layer_check: loads one vq_layer configuration with pseudo-random
// pointers, codebook and thresholds, runs a series of time steps and checks
// every spike, every potential and every step's length against an integer
// model (used by tb_vq_layer).  The model expands pointers and codebook into
// the full weight matrix, w(r, n) = codebook[pointer[r][n/D]][n%D], adds the
// input spikes in ascending order, subtracts the layer's own spikes of the
// previous step, saturates at VW bits, then applies threshold, hard reset and
// the leak V -= V >>> 4.  A step must take ceil(ceil(N/D)/PORTS) cycles per
// spike plus five (six when only inhibitory spikes are present).
module vq_layer_check #(
  parameter int N_IN = 784, N = 128, D = 8, K = 2048, PORTS = 2,
  parameter int STEPS = 14, TH_LO = 40, TH_HI = 400,
  parameter bit NEED_SAT = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished
);
  import vq4snn_pkg::*;
  localparam int W = 5, VW = 11;
  localparam int G = (N + D - 1) / D, S = (G + PORTS - 1) / PORTS, ROWS = N_IN + N, IW = $clog2(K);
  localparam int VMAX = 1023, VMIN = -1024, LS = 4;

  logic clear, sync_in, sync_out;
  logic [N_IN-1:0] spikes_in;
  logic [N-1:0] spikes_out;
  phase_t phase;
  logic signed [VW-1:0] v_out [N];
  logic ptr_we, cb_we, th_we;
  logic [$clog2(ROWS)-1:0] ptr_waddr;
  logic [G-1:0][IW-1:0] ptr_wdata;
  logic [IW-1:0] cb_waddr;
  logic [D-1:0][W-1:0] cb_wdata;
  logic [idxw(N)-1:0] th_addr;
  logic signed [VW-1:0] th_data;

  vq_layer #(.N_IN(N_IN), .N(N), .D(D), .K(K), .PORTS(PORTS)) dut (.*);

  int ptr [ROWS][G];
  int cb [K][D];
  int thr [N];
  int mv [N];
  bit msp [N];
  int nsat = 0, nfire = 0, ninh = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL (N=%0d, PORTS=%0d): %s", N, PORTS, what);
    end
  endtask

  function automatic int sat(int x);
    if (x > VMAX) return VMAX;
    if (x < VMIN) return VMIN;
    return x;
  endfunction

  function automatic int wgt(int r, int n);
    return cb[ptr[r][n / D]][n % D];
  endfunction


  initial begin
    int density, se, si, cyc, expect_cyc, r;
    bit inp [N_IN];
    bit prev [N];
    checks = 0; failures = 0; finished = 0;
    clear = 0; sync_in = 0; spikes_in = '0;
    ptr_we = 0; cb_we = 0; th_we = 0; ptr_waddr = '0; ptr_wdata = '0;
    cb_waddr = '0; cb_wdata = '0; th_addr = '0; th_data = '0;
    @(posedge rst_n);
    // load codebook (weights biased positive), pointers and thresholds
    for (int e = 0; e < K; e++) begin
      @(negedge clk);
      cb_we = 1; cb_waddr = IW'(e);
      for (int j = 0; j < D; j++) begin
        cb[e][j] = $urandom_range(0, 21) - 6;
        cb_wdata[j] = W'(cb[e][j]);
      end
    end
    @(negedge clk); cb_we = 0;
    for (int rr = 0; rr < ROWS; rr++) begin
      @(negedge clk);
      ptr_we = 1; ptr_waddr = $bits(ptr_waddr)'(rr);
      for (int g = 0; g < G; g++) begin
        ptr[rr][g] = $urandom_range(0, K - 1);
        ptr_wdata[g] = IW'(ptr[rr][g]);
      end
    end
    @(negedge clk); ptr_we = 0;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      th_we = 1; th_addr = $bits(th_addr)'(n);
      thr[n] = $urandom_range(TH_LO, TH_HI);
      th_data = VW'(thr[n]);
    end
    @(negedge clk); th_we = 0;
    clear = 1;
    @(negedge clk); clear = 0;
    foreach (mv[n]) begin mv[n] = 0; msp[n] = 0; end

    for (int step = 0; step < STEPS; step++) begin
      case (step)
        0: density = 0;
        1: density = 2;
        5: density = 60;
        6: density = 0;
        9: density = 40;
        default: density = $urandom_range(3, 25);
      endcase
      se = 0;
      for (int i = 0; i < N_IN; i++) begin
        inp[i] = ($urandom % 100) < density;
        spikes_in[i] = inp[i];
        se += inp[i];
      end
      si = 0;
      foreach (msp[n]) begin prev[n] = msp[n]; si += msp[n]; end
      ninh += si;
      // model: excitation, inhibition, evaluation
      for (int i = 0; i < N_IN; i++) if (inp[i])
        for (int n = 0; n < N; n++) begin
          mv[n] = sat(mv[n] + wgt(i, n));
          if (mv[n] == VMAX) nsat++;
        end
      for (int i = 0; i < N; i++) if (prev[i])
        for (int n = 0; n < N; n++) mv[n] = sat(mv[n] - wgt(N_IN + i, n));
      for (int n = 0; n < N; n++) begin
        msp[n] = mv[n] > thr[n];
        r = msp[n] ? 0 : mv[n];
        mv[n] = r - (r >>> LS);
        nfire += msp[n];
      end
      // run the hardware
      @(negedge clk);
      sync_in = 1;
      @(negedge clk);
      sync_in = 0;
      spikes_in = '0;
      cyc = 1;
      while (!sync_out && cyc < 100000) begin
        @(negedge clk);
        cyc++;
      end
      expect_cyc = (se + si) * S + 5 + ((se == 0 && si > 0) ? 1 : 0);
      check(cyc == expect_cyc, $sformatf("step %0d: %0d exc + %0d inh spikes took %0d cycles, expected %0d",
            step, se, si, cyc, expect_cyc));
      for (int n = 0; n < N; n++) begin
        check(spikes_out[n] == msp[n], $sformatf("step %0d neuron %0d spike %0d expected %0d", step, n, spikes_out[n], msp[n]));
        check(int'(v_out[n]) == mv[n], $sformatf("step %0d neuron %0d v %0d expected %0d", step, n, v_out[n], mv[n]));
      end
      $display("N=%0d PORTS=%0d step %0d: %0d exc, %0d inh spikes, %0d cycles, %0d fired",
               N, PORTS, step, se, si, cyc, $countones(spikes_out));
    end
    if (NEED_SAT) check(nsat > 0, "saturation reached");
    check(nfire > 0, "neurons fired");
    check(ninh > 0, "inhibition exercised");
    finished = 1;
  end
endmodule
