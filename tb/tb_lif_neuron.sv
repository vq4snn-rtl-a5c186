// tb_lif_neuron: self-checking test of the LIF neuron.
// Drives random enables, signs, weights and evaluation strobes into an 11-bit
// neuron with 5-bit weights and compares potential and spike every cycle
// with an integer model: saturating add or subtract, fire when the potential
// exceeds the threshold, hard reset to zero, then V -= V >>> 4.  A second
// instance checks the soft reset (threshold subtracted).  Runs include
// saturation at both ends and threshold rewrites.
module tb_lif_neuron;
  import vq4snn_pkg::*;
  localparam int W = 5, VW = 11, LS = 4;
  localparam int VMAX = 1023, VMIN = -1024;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, th_we, en, inhibit, eval;
  logic signed [VW-1:0] th_data;
  logic signed [W-1:0] weight;
  logic spike_h, spike_s;
  logic signed [VW-1:0] v_h, v_s;
  int checks = 0, failures = 0;
  int mv_h, mv_s, mth, msp_h, msp_s, nsat, nfire, nequal, mv_pre;

  lif_neuron #(.W(W), .VW(VW), .LEAK_SHIFT(LS), .RESET_MODE(RESET_HARD)) u_h (
    .clk, .rst_n, .clear, .th_we, .th_data, .en, .inhibit, .weight, .eval,
    .spike(spike_h), .v(v_h));
  lif_neuron #(.W(W), .VW(VW), .LEAK_SHIFT(LS), .RESET_MODE(RESET_SOFT)) u_s (
    .clk, .rst_n, .clear, .th_we, .th_data, .en, .inhibit, .weight, .eval,
    .spike(spike_s), .v(v_s));

  always #5 clk = ~clk;

  function automatic int sat(int x);
    if (x > VMAX) return VMAX;
    if (x < VMIN) return VMIN;
    return x;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One model step, applied at the clock edge with the current inputs.
  task automatic model_step(input bit soft_rst, inout int mv, inout int msp);
    int r;
    if (clear) begin
      mv = 0; msp = 0;
    end else if (eval) begin
      msp = (mv > mth);
      if (msp) r = soft_rst ? sat(mv - mth) : 0;
      else r = mv;
      mv = r - (r >>> LS);
    end else if (en) begin
      if (inhibit) mv = sat(mv - int'(weight));
      else mv = sat(mv + int'(weight));
      if (!soft_rst && (mv == VMAX || mv == VMIN)) nsat++;
    end
  endtask

  initial begin
    int bias;
    clear = 0; th_we = 0; en = 0; inhibit = 0; eval = 0; th_data = '0; weight = '0;
    mv_h = 0; mv_s = 0; mth = 0; msp_h = 0; msp_s = 0; nsat = 0; nfire = 0; nequal = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      bias = (cyc / 2000) % 4;
      // phase 3: small thresholds and frequent evaluation, so that the
      // potential often equals the threshold exactly (no spike then)
      th_we   = (($urandom % ((bias == 3) ? 20 : 500)) == 0) || (cyc == 0);
      th_data = (bias == 3) ? VW'($urandom_range(0, 12)) : VW'($urandom_range(0, 600));
      en      = ($urandom % 4) != 0;
      inhibit = (bias == 1) ? (($urandom % 8) != 0) : (($urandom % 8) == 0);
      weight  = (bias >= 1 && bias <= 2) ? W'($urandom_range(4, 15)) : W'($urandom);
      eval    = (bias >= 1 && bias <= 2) ? (($urandom % 400) == 0) :
                (bias == 3) ? (($urandom % 3) == 0) : (($urandom % 40) == 0);
      clear   = ($urandom % 3000) == 0;
      @(posedge clk);
      mv_pre = mv_h;
      model_step(1'b0, mv_h, msp_h);
      model_step(1'b1, mv_s, msp_s);
      if (eval && msp_h) nfire++;
      if (eval && !clear && mv_pre == mth) nequal++;
      if (th_we) mth = int'(th_data);
      #1;
      check(int'(v_h) == mv_h && spike_h == msp_h[0],
            $sformatf("hard cycle %0d: v %0d/%0d spike %0d/%0d", cyc, v_h, mv_h, spike_h, msp_h));
      check(int'(v_s) == mv_s && spike_s == msp_s[0],
            $sformatf("soft cycle %0d: v %0d/%0d spike %0d/%0d", cyc, v_s, mv_s, spike_s, msp_s));
    end
    check(nsat > 0, "saturation exercised");
    check(nfire > 0, "firing exercised");
    check(nequal > 0, "potential equal to threshold at evaluation");
    $display("saturated updates %0d, fires %0d, equal at eval %0d", nsat, nfire, nequal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
