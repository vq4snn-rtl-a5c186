// tb_mnist_large: the larger MNIST network of the evaluation,
// 784-392-196-10, assembled from the layer modules: two vector-quantized
// layers (d = 8, k = 2048 each, 8-bit weights, 15-bit potentials) and an
// uncompressed output layer, all with intra-layer inhibition, chained by
// sync and run for one 25-step inference on random input spikes.  The
// testbench plays the time-step loop of the top module.  An integer model
// of all three layers predicts every spike of every step, and each layer's
// step length is checked (25, 13 and 1 cycles per spike: 392/8 = 49 and
// 196/8 = 24.5 pointers per row, rounded up, over two codebook ports).
module tb_mnist_large;
  import vq4snn_pkg::*;
  localparam int NI = 784, N1 = 392, N2 = 196, N3 = 10, D = 8, K = 2048, W = 8, VW = 15, T = 25;
  localparam int G1 = (N1 + D - 1) / D, G2 = (N2 + D - 1) / D, S1 = (G1 + 1) / 2, S2 = (G2 + 1) / 2;
  localparam int IW = 11, VMAX = 2 ** (VW - 1) - 1, VMIN = -(2 ** (VW - 1)), LS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, sync0, sync1, sync2, sync3;
  logic [NI-1:0] in_spikes;
  logic [N1-1:0] sp1;
  logic [N2-1:0] sp2;
  logic [N3-1:0] sp3;
  // load buses
  logic p1_we, c1_we, p2_we, c2_we, wm_we, t1_we, t2_we, t3_we;
  logic [$clog2(NI + N1)-1:0] p1_a;
  logic [G1-1:0][IW-1:0] p1_d;
  logic [$clog2(N1 + N2)-1:0] p2_a;
  logic [G2-1:0][IW-1:0] p2_d;
  logic [IW-1:0] c_a;
  logic [D-1:0][W-1:0] c_d;
  logic [$clog2(N2 + N3)-1:0] wm_a;
  logic [N3-1:0][W-1:0] wm_d;
  logic [8:0] t_a;
  logic signed [VW-1:0] t_d;

  vq_layer #(.N_IN(NI), .N(N1), .D(D), .K(K), .W(W), .VW(VW)) u_l1 (
    .clk, .rst_n, .clear, .sync_in(sync0), .spikes_in(in_spikes), .sync_out(sync1), .spikes_out(sp1),
    .phase(), .v_out(), .ptr_we(p1_we), .ptr_waddr(p1_a), .ptr_wdata(p1_d),
    .cb_we(c1_we), .cb_waddr(c_a), .cb_wdata(c_d), .th_we(t1_we), .th_addr(t_a), .th_data(t_d));
  vq_layer #(.N_IN(N1), .N(N2), .D(D), .K(K), .W(W), .VW(VW)) u_l2 (
    .clk, .rst_n, .clear, .sync_in(sync1), .spikes_in(sp1), .sync_out(sync2), .spikes_out(sp2),
    .phase(), .v_out(), .ptr_we(p2_we), .ptr_waddr(p2_a), .ptr_wdata(p2_d),
    .cb_we(c2_we), .cb_waddr(c_a), .cb_wdata(c_d), .th_we(t2_we), .th_addr(t_a[7:0]), .th_data(t_d));
  dense_layer #(.N_IN(N2), .N(N3), .W(W), .VW(VW)) u_l3 (
    .clk, .rst_n, .clear, .sync_in(sync2), .spikes_in(sp2), .sync_out(sync3), .spikes_out(sp3),
    .phase(), .v_out(), .wm_we, .wm_waddr(wm_a), .wm_wdata(wm_d),
    .th_we(t3_we), .th_addr(t_a[3:0]), .th_data(t_d));

  int checks = 0, failures = 0;
  // weights of the three layers as expanded matrices [row][neuron]
  int w1 [NI + N1][N1];
  int w2 [N1 + N2][N2];
  int w3 [N2 + N3][N3];
  int th1 [N1], th2 [N2], th3 [N3];
  int v1 [N1], v2 [N2], v3 [N3];
  bit s1 [N1], s2 [N2], s3 [N3];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int sat(int x);
    if (x > VMAX) return VMAX;
    if (x < VMIN) return VMIN;
    return x;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cb1 [K][D];
    int cb2 [K][D];
    int p, r, e1, i1, e2, i2, e3, i3, t0, ta, tb, tc, n_inh;
    bit inp [NI];
    bit pr1 [N1];
    bit pr2 [N2];
    bit pr3 [N3];
    clear = 0; sync0 = 0; in_spikes = '0;
    {p1_we, c1_we, p2_we, c2_we, wm_we, t1_we, t2_we, t3_we} = '0;
    p1_a = '0; p1_d = '0; p2_a = '0; p2_d = '0; c_a = '0; c_d = '0; wm_a = '0; wm_d = '0; t_a = '0; t_d = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // codebooks
    for (int e = 0; e < K; e++) begin
      @(negedge clk);
      c1_we = 1; c2_we = 0; c_a = IW'(e);
      for (int j = 0; j < D; j++) begin cb1[e][j] = $urandom_range(0, 90) - 30; c_d[j] = W'(cb1[e][j]); end
      @(negedge clk);
      c1_we = 0; c2_we = 1;
      for (int j = 0; j < D; j++) begin cb2[e][j] = $urandom_range(0, 90) - 30; c_d[j] = W'(cb2[e][j]); end
    end
    @(negedge clk); c2_we = 0;
    // pointers, expanded into weight matrices
    for (int rr = 0; rr < NI + N1; rr++) begin
      @(negedge clk);
      p1_we = 1; p1_a = $bits(p1_a)'(rr);
      for (int g = 0; g < G1; g++) begin
        p = $urandom_range(0, K - 1); p1_d[g] = IW'(p);
        for (int j = 0; j < D; j++) if (g * D + j < N1) w1[rr][g * D + j] = cb1[p][j];
      end
    end
    @(negedge clk); p1_we = 0;
    for (int rr = 0; rr < N1 + N2; rr++) begin
      @(negedge clk);
      p2_we = 1; p2_a = $bits(p2_a)'(rr);
      for (int g = 0; g < G2; g++) begin
        p = $urandom_range(0, K - 1); p2_d[g] = IW'(p);
        for (int j = 0; j < D; j++) if (g * D + j < N2) w2[rr][g * D + j] = cb2[p][j];
      end
    end
    @(negedge clk); p2_we = 0;
    for (int rr = 0; rr < N2 + N3; rr++) begin
      @(negedge clk);
      wm_we = 1; wm_a = $bits(wm_a)'(rr);
      for (int n = 0; n < N3; n++) begin
        w3[rr][n] = (rr < N2) ? $urandom_range(0, 90) - 30 : $urandom_range(0, 60);
        wm_d[n] = W'(w3[rr][n]);
      end
    end
    @(negedge clk); wm_we = 0;
    // thresholds
    for (int n = 0; n < N1; n++) begin
      @(negedge clk); t1_we = 1; t_a = 9'(n); th1[n] = $urandom_range(200, 1500); t_d = VW'(th1[n]);
    end
    @(negedge clk); t1_we = 0;
    for (int n = 0; n < N2; n++) begin
      @(negedge clk); t2_we = 1; t_a = 9'(n); th2[n] = $urandom_range(200, 1500); t_d = VW'(th2[n]);
    end
    @(negedge clk); t2_we = 0;
    for (int n = 0; n < N3; n++) begin
      @(negedge clk); t3_we = 1; t_a = 9'(n); th3[n] = $urandom_range(100, 800); t_d = VW'(th3[n]);
    end
    @(negedge clk); t3_we = 0;
    clear = 1;
    @(negedge clk); clear = 0;
    foreach (v1[n]) begin v1[n] = 0; s1[n] = 0; end
    foreach (v2[n]) begin v2[n] = 0; s2[n] = 0; end
    foreach (v3[n]) begin v3[n] = 0; s3[n] = 0; end
    n_inh = 0;

    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < NI; i++) begin inp[i] = ($urandom % 100) < 8; in_spikes[i] = inp[i]; end
      // model
      e1 = 0; i1 = 0; e2 = 0; i2 = 0; e3 = 0; i3 = 0;
      foreach (s1[n]) begin pr1[n] = s1[n]; i1 += s1[n]; end
      foreach (s2[n]) begin pr2[n] = s2[n]; i2 += s2[n]; end
      foreach (s3[n]) begin pr3[n] = s3[n]; i3 += s3[n]; end
      for (int i = 0; i < NI; i++) if (inp[i]) begin e1++; for (int n = 0; n < N1; n++) v1[n] = sat(v1[n] + w1[i][n]); end
      for (int i = 0; i < N1; i++) if (pr1[i]) for (int n = 0; n < N1; n++) v1[n] = sat(v1[n] - w1[NI + i][n]);
      for (int n = 0; n < N1; n++) begin s1[n] = v1[n] > th1[n]; r = s1[n] ? 0 : v1[n]; v1[n] = r - (r >>> LS); end
      for (int i = 0; i < N1; i++) if (s1[i]) begin e2++; for (int n = 0; n < N2; n++) v2[n] = sat(v2[n] + w2[i][n]); end
      for (int i = 0; i < N2; i++) if (pr2[i]) for (int n = 0; n < N2; n++) v2[n] = sat(v2[n] - w2[N1 + i][n]);
      for (int n = 0; n < N2; n++) begin s2[n] = v2[n] > th2[n]; r = s2[n] ? 0 : v2[n]; v2[n] = r - (r >>> LS); end
      for (int i = 0; i < N2; i++) if (s2[i]) begin e3++; for (int n = 0; n < N3; n++) v3[n] = sat(v3[n] + w3[i][n]); end
      for (int i = 0; i < N3; i++) if (pr3[i]) for (int n = 0; n < N3; n++) v3[n] = sat(v3[n] - w3[N2 + i][n]);
      for (int n = 0; n < N3; n++) begin s3[n] = v3[n] > th3[n]; r = s3[n] ? 0 : v3[n]; v3[n] = r - (r >>> LS); end
      n_inh += i1 + i2 + i3;
      // hardware
      @(negedge clk);
      sync0 = 1; t0 = $time / 10;
      @(negedge clk);
      sync0 = 0;
      while (!sync1) @(negedge clk);
      ta = $time / 10;
      for (int n = 0; n < N1; n++) check(sp1[n] == s1[n], $sformatf("step %0d layer 1 neuron %0d", t, n));
      while (!sync2) @(negedge clk);
      tb = $time / 10;
      for (int n = 0; n < N2; n++) check(sp2[n] == s2[n], $sformatf("step %0d layer 2 neuron %0d", t, n));
      while (!sync3) @(negedge clk);
      tc = $time / 10;
      for (int n = 0; n < N3; n++) check(sp3[n] == s3[n], $sformatf("step %0d layer 3 neuron %0d", t, n));
      check(ta - t0 == (e1 + i1) * S1 + 5 + ((e1 == 0 && i1 > 0) ? 1 : 0), $sformatf("step %0d layer 1 length", t));
      check(tb - ta == (e2 + i2) * S2 + 5 + ((e2 == 0 && i2 > 0) ? 1 : 0), $sformatf("step %0d layer 2 length", t));
      check(tc - tb == e3 + i3 + 5, $sformatf("step %0d layer 3 length", t));
      $display("step %0d: %0d input spikes; layer 1 fired %0d, had %0d inhibitory; layer 2 fired %0d, had %0d inhibitory; %0d outputs; %0d cycles",
               t, e1, e2, i1, e3, i2, $countones(sp3), tc - t0);
    end
    check(n_inh > 0, "inhibition exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
