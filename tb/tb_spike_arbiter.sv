// tb_spike_arbiter: self-checking test of the spike arbiter.
// Loads random spike vectors of varying density into a 784-input arbiter and
// pops one spike per cycle, checking that every active input is offered
// exactly once, in ascending index order, one per cycle, and that valid drops
// when the vector is used up.  Also checks that load wins over pop, that
// clear empties the register, and that holding pop low holds the offer.
module tb_spike_arbiter;
  localparam int WIDTH = 784;
  localparam int AW    = $clog2(WIDTH);

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, load, pop, valid;
  logic [WIDTH-1:0] spikes_in;
  logic [AW-1:0] addr;
  int checks = 0, failures = 0;

  spike_arbiter #(.WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] vec;
    int density, cnt, last, expect_idx;
    clear = 0; load = 0; pop = 0; spikes_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!valid, "empty after reset");

    foreach (vec[i]) vec[i] = 1'b0;
    for (int trial = 0; trial < 12; trial++) begin
      density = (trial == 0) ? 0 : (trial == 1) ? 100 : (trial * 8);
      for (int i = 0; i < WIDTH; i++) vec[i] = (($urandom % 100) < density);
      if (trial == 2) begin
        vec = '0;
        vec[WIDTH-1] = 1'b1;
        vec[0] = 1'b1;
      end
      spikes_in = vec;
      load = 1; pop = 1;        // load must win over pop
      @(negedge clk);
      load = 0; pop = 1;
      cnt = 0; last = -1;
      expect_idx = 0;
      while (valid) begin
        while (expect_idx < WIDTH && !vec[expect_idx]) expect_idx++;
        check(int'(addr) == expect_idx, $sformatf("trial %0d offer %0d: addr %0d expected %0d",
              trial, cnt, addr, expect_idx));
        check(int'(addr) > last, "ascending order");
        last = int'(addr);
        expect_idx++;
        cnt++;
        @(negedge clk);
        if (cnt > WIDTH) break;
      end
      check(cnt == $countones(vec), $sformatf("trial %0d popped %0d of %0d", trial, cnt, $countones(vec)));
      pop = 0;
    end

    // Holding pop low keeps the offer; clear empties.
    vec = '0; vec[5] = 1; vec[17] = 1;
    spikes_in = vec; load = 1;
    @(negedge clk);
    load = 0;
    repeat (3) @(negedge clk);
    check(valid && addr == AW'(5), "offer held without pop");
    clear = 1;
    @(negedge clk);
    clear = 0;
    check(!valid, "clear empties");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
