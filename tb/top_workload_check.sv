// top_workload_check: runs one inference of vq4snn_top built for a given
// network size and checks it against an integer model (used by
// tb_workloads).  Pointers, codebook, output weights and thresholds are
// pseudo-random; input spikes are drawn with a fixed probability per input
// and step.  Every step's hidden and output spikes and the step's length
// (ceil(ceil(N_HID/D)/2) cycles per hidden-layer spike, one per output-layer
// spike, plus overheads) are checked.
module top_workload_check #(
  parameter string NAME = "net",
  parameter int N_IN = 40, N_HID = 150, N_OUT = 10, D = 4, K = 1024,
  parameter int W = 6, VW = 12, T = 100, DENSITY = 10, TH_LO = 20, TH_HI = 200
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished
);
  import vq4snn_pkg::*;
  localparam int G = (N_HID + D - 1) / D, S = (G + 1) / 2, IW = $clog2(K);
  localparam int PROWS = N_IN + N_HID, WROWS = N_HID + N_OUT;
  localparam int VMAX = 2 ** (VW - 1) - 1, VMIN = -(2 ** (VW - 1)), LS = 4;
  localparam int TW = (T > 1) ? $clog2(T) : 1;

  logic start, busy, done, in_ready, in_valid, out_valid;
  logic [TW-1:0] step;
  logic [N_IN-1:0] in_spikes;
  logic [N_OUT-1:0] out_spikes;
  logic [N_HID-1:0] hid_spikes;
  logic ptr_we, cb_we, wm_we, th_hid_we, th_out_we;
  logic [$clog2(PROWS)-1:0] ptr_waddr;
  logic [G-1:0][IW-1:0] ptr_wdata;
  logic [IW-1:0] cb_waddr;
  logic [D-1:0][W-1:0] cb_wdata;
  logic [$clog2(WROWS)-1:0] wm_waddr;
  logic [N_OUT-1:0][W-1:0] wm_wdata;
  logic [$clog2(N_HID)-1:0] th_hid_addr;
  logic [$clog2(N_OUT)-1:0] th_out_addr;
  logic signed [VW-1:0] th_hid_data, th_out_data;

  vq4snn_top #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .D(D), .K(K),
    .W_HID(W), .W_OUT(W), .VW_HID(VW), .VW_OUT(VW), .T_STEPS(T)
  ) dut (.*);

  int ptr [PROWS][G];
  int cb [K][D];
  int w2 [WROWS][N_OUT];
  int th1 [N_HID], th2 [N_OUT];
  int v1 [N_HID], v2 [N_OUT];
  bit s1 [N_HID], s2 [N_OUT];
  int n_inh1, n_fire2, total;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL (%s): %s", NAME, what);
    end
  endtask

  function automatic int sat(int x);
    if (x > VMAX) return VMAX;
    if (x < VMIN) return VMIN;
    return x;
  endfunction

  function automatic int rnd_w(int lo, int hi);
    return $urandom_range(0, hi - lo) + lo;
  endfunction

  initial begin
    bit inp [N_IN];
    bit prev1 [N_HID];
    bit prev2 [N_OUT];
    int se1, si1, se2, si2, r, t0, len;
    checks = 0; failures = 0; finished = 0; n_inh1 = 0; n_fire2 = 0; total = 0;
    start = 0; in_valid = 0; in_spikes = '0;
    ptr_we = 0; cb_we = 0; wm_we = 0; th_hid_we = 0; th_out_we = 0;
    ptr_waddr = '0; ptr_wdata = '0; cb_waddr = '0; cb_wdata = '0;
    wm_waddr = '0; wm_wdata = '0; th_hid_addr = '0; th_out_addr = '0;
    th_hid_data = '0; th_out_data = '0;
    @(posedge rst_n);
    for (int e = 0; e < K; e++) begin
      @(negedge clk);
      cb_we = 1; cb_waddr = IW'(e);
      for (int j = 0; j < D; j++) begin
        cb[e][j] = rnd_w(-(2 ** (W - 2)), 2 ** (W - 1) - 1);
        cb_wdata[j] = W'(cb[e][j]);
      end
    end
    @(negedge clk); cb_we = 0;
    for (int rr = 0; rr < PROWS; rr++) begin
      @(negedge clk);
      ptr_we = 1; ptr_waddr = $bits(ptr_waddr)'(rr);
      for (int g = 0; g < G; g++) begin
        ptr[rr][g] = $urandom_range(0, K - 1);
        ptr_wdata[g] = IW'(ptr[rr][g]);
      end
    end
    @(negedge clk); ptr_we = 0;
    for (int rr = 0; rr < WROWS; rr++) begin
      @(negedge clk);
      wm_we = 1; wm_waddr = $bits(wm_waddr)'(rr);
      for (int n = 0; n < N_OUT; n++) begin
        w2[rr][n] = (rr < N_HID) ? rnd_w(-(2 ** (W - 2)), 2 ** (W - 1) - 1) : $urandom_range(0, 2 ** (W - 1) - 1);
        wm_wdata[n] = W'(w2[rr][n]);
      end
    end
    @(negedge clk); wm_we = 0;
    for (int n = 0; n < N_HID; n++) begin
      @(negedge clk);
      th_hid_we = 1; th_hid_addr = $bits(th_hid_addr)'(n);
      th1[n] = $urandom_range(TH_LO, TH_HI);
      th_hid_data = VW'(th1[n]);
    end
    @(negedge clk); th_hid_we = 0;
    for (int n = 0; n < N_OUT; n++) begin
      @(negedge clk);
      th_out_we = 1; th_out_addr = $bits(th_out_addr)'(n);
      th2[n] = $urandom_range(TH_LO, TH_HI);
      th_out_data = VW'(th2[n]);
    end
    @(negedge clk); th_out_we = 0;

    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    foreach (v1[n]) begin v1[n] = 0; s1[n] = 0; end
    foreach (v2[n]) begin v2[n] = 0; s2[n] = 0; end
    for (int t = 0; t < T; t++) begin
      check(in_ready, "ready");
      for (int i = 0; i < N_IN; i++) begin
        inp[i] = ($urandom % 100) < DENSITY;
        in_spikes[i] = inp[i];
      end
      in_valid = 1;
      t0 = $time / 10;
      @(negedge clk);
      in_valid = 0;
      // model, layer 1
      se1 = 0; si1 = 0;
      foreach (s1[n]) begin prev1[n] = s1[n]; si1 += s1[n]; end
      for (int i = 0; i < N_IN; i++) if (inp[i]) begin
        se1++;
        for (int n = 0; n < N_HID; n++) v1[n] = sat(v1[n] + cb[ptr[i][n / D]][n % D]);
      end
      for (int i = 0; i < N_HID; i++) if (prev1[i])
        for (int n = 0; n < N_HID; n++) v1[n] = sat(v1[n] - cb[ptr[N_IN + i][n / D]][n % D]);
      for (int n = 0; n < N_HID; n++) begin
        s1[n] = v1[n] > th1[n];
        r = s1[n] ? 0 : v1[n];
        v1[n] = r - (r >>> LS);
      end
      // model, layer 2
      se2 = 0; si2 = 0;
      foreach (s2[n]) begin prev2[n] = s2[n]; si2 += s2[n]; end
      for (int i = 0; i < N_HID; i++) if (s1[i]) begin
        se2++;
        for (int n = 0; n < N_OUT; n++) v2[n] = sat(v2[n] + w2[i][n]);
      end
      for (int i = 0; i < N_OUT; i++) if (prev2[i])
        for (int n = 0; n < N_OUT; n++) v2[n] = sat(v2[n] - w2[N_HID + i][n]);
      for (int n = 0; n < N_OUT; n++) begin
        s2[n] = v2[n] > th2[n];
        r = s2[n] ? 0 : v2[n];
        v2[n] = r - (r >>> LS);
        n_fire2 += s2[n];
      end
      n_inh1 += si1;
      while (!out_valid) @(negedge clk);
      len = $time / 10 - t0;
      total += len;
      check(len == (se1 + si1) * S + 5 + ((se1 == 0 && si1 > 0) ? 1 : 0) + se2 + si2 + 5,
            $sformatf("step %0d length %0d", t, len));
      for (int n = 0; n < N_HID; n++) check(hid_spikes[n] == s1[n], $sformatf("step %0d hidden %0d", t, n));
      for (int n = 0; n < N_OUT; n++) check(out_spikes[n] == s2[n], $sformatf("step %0d output %0d", t, n));
      check(done == (t == T - 1), "done on the last step");
      @(negedge clk);
    end
    check(n_inh1 > 0, "inhibition in layer 1");
    check(n_fire2 > 0, "output spikes");
    $display("%s: %0d steps in %0d cycles, %0d inhibitory hidden spikes, %0d output spikes",
             NAME, T, total, n_inh1, n_fire2);
    finished = 1;
  end
endmodule
