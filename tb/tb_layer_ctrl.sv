// tb_layer_ctrl: self-checking test of the layer phase controller.
// A random environment plays the arbiters and the memory pipeline: after a
// sync, the excitatory and inhibitory arbiters stay non-empty for random
// numbers of cycles and the pipeline stays busy for a random tail.  The test
// checks, cycle by cycle against the phase order excite -> inhibit -> drain
// -> evaluate, that load pulses only with sync in the idle phase, that the
// inhibitory phase is skipped without recurrent synapses, that eval comes only
// once both arbiters are empty and the pipeline is idle, and that sync_out
// pulses exactly once, in the cycle after eval.
module tb_layer_ctrl;
  import vq4snn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic clear, sync_in, sel_rec, exc_pending, inh_pending, dp_busy;
  phase_t phase_r, phase_n;
  logic load_r, eval_r, sync_out_r, load_n, eval_n, sync_out_n;

  layer_ctrl #(.RECURRENT(1'b1)) u_rec (
    .clk, .rst_n, .clear, .sync_in(sync_in && sel_rec), .exc_pending, .inh_pending, .dp_busy,
    .phase(phase_r), .load(load_r), .eval(eval_r), .sync_out(sync_out_r));
  layer_ctrl #(.RECURRENT(1'b0)) u_norec (
    .clk, .rst_n, .clear, .sync_in(sync_in && !sel_rec), .exc_pending, .inh_pending(1'b0), .dp_busy,
    .phase(phase_n), .load(load_n), .eval(eval_n), .sync_out(sync_out_n));

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

  // Runs one time step on one controller, checks it and returns its length.
  task automatic one_step(input bit rec, input int ne, input int ni, input int nb, output int len);
    int t, exc_left, inh_left, busy_left, evals, syncs, t_eval;
    phase_t ph;
    bit ld, ev, so;
    exc_left = ne; inh_left = ni; busy_left = 0;
    evals = 0; syncs = 0; t_eval = -1;
    @(negedge clk);
    sel_rec = rec; sync_in = 1; exc_pending = 0; inh_pending = 0; dp_busy = 0;
    #1;
    ld = rec ? load_r : load_n;
    check(ld, "load with sync in idle");
    @(negedge clk);
    sync_in = 0;
    for (t = 1; t < 1000; t++) begin
      ph = rec ? phase_r : phase_n;
      // the environment: arbiters drain only in their own phase
      exc_pending = (exc_left > 0);
      inh_pending = (inh_left > 0);
      dp_busy     = (busy_left > 0);
      #1;
      ld = rec ? load_r : load_n;
      ev = rec ? eval_r : eval_n;
      so = rec ? sync_out_r : sync_out_n;
      check(!ld, "no load while running");
      if (t == 1) check(ph == PH_EXCITE, "excite phase follows sync");
      if (ph == PH_INHIBIT) check(rec && exc_left == 0, "inhibit only after excitation, only if recurrent");
      if (ph == PH_EVAL) check(exc_left == 0 && (!rec || inh_left == 0) && busy_left == 0, "eval only when drained");
      if (ev) begin
        evals++;
        t_eval = t;
      end
      if (so) begin
        syncs++;
        check(t == t_eval + 1, "sync_out one cycle after eval");
        break;
      end
      if (ph == PH_EXCITE && exc_left > 0) begin
        exc_left--;
        if (exc_left == 0) busy_left = nb;
      end else if (ph == PH_INHIBIT && inh_left > 0) begin
        inh_left--;
        if (inh_left == 0) busy_left = nb;
      end else if (busy_left > 0) begin
        busy_left--;
      end
      @(negedge clk);
    end
    check(evals == 1 && syncs == 1, $sformatf("one eval (%0d) and one sync_out (%0d)", evals, syncs));
    // return to idle
    ph = rec ? phase_r : phase_n;
    @(negedge clk);
    ph = rec ? phase_r : phase_n;
    check(ph == PH_IDLE, "idle after sync_out");
    len = t;
  endtask

  initial begin
    int len, ne, ni, nb;
    clear = 0; sel_rec = 0; sync_in = 0; exc_pending = 0; inh_pending = 0; dp_busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      ne = $urandom_range(0, 20);
      ni = $urandom_range(0, 10);
      nb = $urandom_range(0, 4);
      one_step(k % 2 == 0, ne, ni, nb, len);
      // With recurrence: excite (max(ne,1)) + inhibit (max(ni,1)) + drain +
      // eval phases; the minimum is five cycles from sync to sync_out.
      check(len >= 4, "minimum step length");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
