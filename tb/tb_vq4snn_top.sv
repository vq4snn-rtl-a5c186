// tb_vq4snn_top: end-to-end test of the whole accelerator at its default
// size (784-128-10, d = 8, k = 2048, two codebook ports, 25 time steps).
//
// Pseudo-random pointers, codebook vectors, output-layer weights and
// thresholds are loaded through the load ports.  Three inferences are run on
// synthetic "images" (a blob of bright pixels on a dark background, one image
// all dark) that a behavioural rate encoder turns into spikes; the input
// handshake is stalled for random numbers of cycles.  An integer model of
// the network (weights expanded from pointers and codebook, the LIF equations
// with saturation, hard reset and leak, inhibition by each layer's own
// spikes of the previous step, layer 2 fed by layer 1's spikes of the same
// step) predicts both layers' spikes at every step, and the length of every
// step is checked against 8 cycles per layer-1 spike plus one cycle per
// layer-2 spike plus the fixed overheads.  The test also counts, and
// requires, each mechanism at least once: excitatory and inhibitory spikes in
// both layers, firing, saturation, steps without input spikes, input stalls,
// back-to-back spikes overlapping in the pointer/codebook pipeline, and a new
// inference clearing the state of the previous one.
module tb_vq4snn_top;
  import vq4snn_pkg::*;
  localparam int N_IN = 784, N_H = 128, N_O = 10, D = 8, K = 2048, W = 5;
  localparam int G = N_H / D, S = G / 2, IW = 11, T = 25;
  localparam int PROWS = N_IN + N_H, WROWS = N_H + N_O;
  localparam int VMAX = 1023, VMIN = -1024, LS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done, in_ready, in_valid, out_valid;
  logic [4:0] step;
  logic [N_IN-1:0] in_spikes;
  logic [N_O-1:0] out_spikes;
  logic [N_H-1:0] hid_spikes;
  logic ptr_we, cb_we, wm_we, th_hid_we, th_out_we;
  logic [$clog2(PROWS)-1:0] ptr_waddr;
  logic [G-1:0][IW-1:0] ptr_wdata;
  logic [IW-1:0] cb_waddr;
  logic [D-1:0][W-1:0] cb_wdata;
  logic [$clog2(WROWS)-1:0] wm_waddr;
  logic [N_O-1:0][W-1:0] wm_wdata;
  logic [6:0] th_hid_addr;
  logic [3:0] th_out_addr;
  logic signed [10:0] th_hid_data, th_out_data;

  vq4snn_top dut (.*);

  logic enc_step;
  logic [7:0] pix [N_IN];
  rate_encoder_model #(.N(N_IN)) u_enc (.clk, .step(enc_step), .value(pix), .spikes(in_spikes));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ptr [PROWS][G];
  int cb [K][D];
  int w2 [WROWS][N_O];
  int th1 [N_H], th2 [N_O];
  int v1 [N_H], v2 [N_O];
  bit s1 [N_H], s2 [N_O];
  // mechanism counters
  int n_exc1 = 0, n_inh1 = 0, n_exc2 = 0, n_inh2 = 0, n_fire1 = 0, n_fire2 = 0;
  int n_sat = 0, n_empty = 0, n_stall = 0, n_overlap = 0, n_clear = 0;

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
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A pointer row is fetched while the previous spike is still in the
  // codebook stage.
  always @(posedge clk) if (dut.u_l1.ptr_re && dut.u_l1.seq_busy) n_overlap++;

  // One model step of a layer: excite with inp, inhibit with own previous
  // spikes, evaluate.  Returns the counts of both kinds of spikes.
  task automatic model_l1(input bit inp [N_IN], output int se, output int si);
    bit prev [N_H];
    int r;
    se = 0; si = 0;
    foreach (s1[n]) begin prev[n] = s1[n]; si += s1[n]; end
    for (int i = 0; i < N_IN; i++) if (inp[i]) begin
      se++;
      for (int n = 0; n < N_H; n++) begin
        v1[n] = sat(v1[n] + cb[ptr[i][n / D]][n % D]);
        if (v1[n] == VMAX || v1[n] == VMIN) n_sat++;
      end
    end
    for (int i = 0; i < N_H; i++) if (prev[i])
      for (int n = 0; n < N_H; n++) v1[n] = sat(v1[n] - cb[ptr[N_IN + i][n / D]][n % D]);
    for (int n = 0; n < N_H; n++) begin
      s1[n] = v1[n] > th1[n];
      r = s1[n] ? 0 : v1[n];
      v1[n] = r - (r >>> LS);
    end
  endtask

  task automatic model_l2(output int se, output int si);
    bit prev [N_O];
    int r;
    se = 0; si = 0;
    foreach (s2[n]) begin prev[n] = s2[n]; si += s2[n]; end
    for (int i = 0; i < N_H; i++) if (s1[i]) begin
      se++;
      for (int n = 0; n < N_O; n++) v2[n] = sat(v2[n] + w2[i][n]);
    end
    for (int i = 0; i < N_O; i++) if (prev[i])
      for (int n = 0; n < N_O; n++) v2[n] = sat(v2[n] - w2[N_H + i][n]);
    for (int n = 0; n < N_O; n++) begin
      s2[n] = v2[n] > th2[n];
      r = s2[n] ? 0 : v2[n];
      v2[n] = r - (r >>> LS);
    end
  endtask

  task automatic load_all();
    for (int e = 0; e < K; e++) begin
      @(negedge clk);
      cb_we = 1; cb_waddr = IW'(e);
      for (int j = 0; j < D; j++) begin
        cb[e][j] = (e < 16) ? $urandom_range(10, 15) : $urandom_range(0, 23) - 8;
        cb_wdata[j] = W'(cb[e][j]);
      end
    end
    @(negedge clk); cb_we = 0;
    for (int r = 0; r < PROWS; r++) begin
      @(negedge clk);
      ptr_we = 1; ptr_waddr = $bits(ptr_waddr)'(r);
      for (int g = 0; g < G; g++) begin
        // group 0 of the feedforward rows uses the strong entries 0..15,
        // so that neuron 0 (which never fires) saturates
        ptr[r][g] = (g == 0 && r < N_IN) ? $urandom_range(0, 15) : $urandom_range(16, K - 1);
        ptr_wdata[g] = IW'(ptr[r][g]);
      end
    end
    @(negedge clk); ptr_we = 0;
    for (int r = 0; r < WROWS; r++) begin
      @(negedge clk);
      wm_we = 1; wm_waddr = $bits(wm_waddr)'(r);
      for (int n = 0; n < N_O; n++) begin
        w2[r][n] = (r < N_H) ? $urandom_range(0, 23) - 8 : $urandom_range(0, 15);
        wm_wdata[n] = W'(w2[r][n]);
      end
    end
    @(negedge clk); wm_we = 0;
    for (int n = 0; n < N_H; n++) begin
      @(negedge clk);
      th_hid_we = 1; th_hid_addr = 7'(n);
      th1[n] = (n == 0) ? VMAX : $urandom_range(60, 500);
      th_hid_data = 11'(th1[n]);
    end
    @(negedge clk); th_hid_we = 0;
    for (int n = 0; n < N_O; n++) begin
      @(negedge clk);
      th_out_we = 1; th_out_addr = 4'(n);
      th2[n] = $urandom_range(10, 120);
      th_out_data = 11'(th2[n]);
    end
    @(negedge clk); th_out_we = 0;
  endtask

  // Synthetic image: a bright blob whose place depends on img, or all dark.
  task automatic make_image(input int img);
    int cx, cy, dx, dy;
    cx = 8 + 5 * img; cy = 14;
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) begin
        dx = x - cx; dy = y - cy;
        if (img == 2) pix[y * 28 + x] = 8'd0;
        else if (dx * dx + dy * dy < 20) pix[y * 28 + x] = 8'(255 - 8 * (dx * dx + dy * dy));
        else if (dx * dx + dy * dy < 40) pix[y * 28 + x] = 8'd40;
        else pix[y * 28 + x] = 8'd0;
      end
  endtask

  task automatic run_inference(input int img);
    bit inp [N_IN];
    int se1, si1, se2, si2, t0, t1, expect_len, stall, tot, cnt [N_O];
    make_image(img);
    foreach (cnt[n]) cnt[n] = 0;
    // a new inference: state must be cleared
    if (img > 0) n_clear++;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    foreach (v1[n]) begin v1[n] = 0; s1[n] = 0; end
    foreach (v2[n]) begin v2[n] = 0; s2[n] = 0; end
    check(busy, "busy after start");
    tot = 0;
    for (int t = 0; t < T; t++) begin
      // draw the step's spikes, then offer them after a random stall
      enc_step = 1;
      @(negedge clk);
      enc_step = 0;
      check(in_ready && int'(step) == t, $sformatf("ready for step %0d", t));
      stall = $urandom_range(0, 3);
      n_stall += (stall > 0);
      repeat (stall) @(negedge clk);
      for (int i = 0; i < N_IN; i++) inp[i] = in_spikes[i];
      in_valid = 1;
      t0 = $time / 10;
      @(negedge clk);
      in_valid = 0;
      model_l1(inp, se1, si1);
      model_l2(se2, si2);
      if (se1 == 0) n_empty++;
      n_exc1 += se1; n_inh1 += si1; n_exc2 += se2; n_inh2 += si2;
      while (!out_valid) @(negedge clk);
      t1 = $time / 10;
      expect_len = (se1 + si1) * S + 5 + ((se1 == 0 && si1 > 0) ? 1 : 0) + (se2 + si2) + 5;
      check(t1 - t0 == expect_len, $sformatf("inference %0d step %0d took %0d cycles, expected %0d", img, t, t1 - t0, expect_len));
      tot += t1 - t0;
      for (int n = 0; n < N_H; n++) begin
        check(hid_spikes[n] == s1[n], $sformatf("step %0d hidden neuron %0d", t, n));
        n_fire1 += s1[n];
      end
      for (int n = 0; n < N_O; n++) begin
        check(out_spikes[n] == s2[n], $sformatf("step %0d output neuron %0d", t, n));
        n_fire2 += s2[n];
        cnt[n] += s2[n];
      end
      check(done == (t == T - 1), "done with the last step");
      @(negedge clk);
    end
    check(!busy, "idle after the last step");
    $display("inference %0d: %0d cycles in the layers, output spike counts %p", img, tot, cnt);
  endtask

  initial begin
    start = 0; in_valid = 0; enc_step = 0;
    ptr_we = 0; cb_we = 0; wm_we = 0; th_hid_we = 0; th_out_we = 0;
    ptr_waddr = '0; ptr_wdata = '0; cb_waddr = '0; cb_wdata = '0;
    wm_waddr = '0; wm_wdata = '0; th_hid_addr = '0; th_out_addr = '0;
    th_hid_data = '0; th_out_data = '0;
    foreach (pix[i]) pix[i] = 8'd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    for (int img = 0; img < 3; img++) run_inference(img);
    $display("layer 1: %0d excitatory, %0d inhibitory spikes, %0d fired; layer 2: %0d excitatory, %0d inhibitory, %0d fired",
             n_exc1, n_inh1, n_fire1, n_exc2, n_inh2, n_fire2);
    $display("saturations %0d, empty input steps %0d, stalls %0d, overlapped fetches %0d, clears %0d",
             n_sat, n_empty, n_stall, n_overlap, n_clear);
    check(n_exc1 > 0, "layer 1 excitation");
    check(n_inh1 > 0, "layer 1 inhibition");
    check(n_exc2 > 0, "layer 2 excitation");
    check(n_inh2 > 0, "layer 2 inhibition");
    check(n_fire2 > 0, "output spikes");
    check(n_sat > 0, "saturation");
    check(n_empty > 0, "time step with no input spikes");
    check(n_stall > 0, "input stall");
    check(n_overlap > 0, "overlapped pointer fetch");
    check(n_clear > 0, "state cleared between inferences");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
