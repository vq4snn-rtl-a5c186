// group_sequencer_check: drives one group sequencer configuration and checks
// it cycle by cycle (used by tb_group_sequencer).
// Rows of random pointers are handed in with the same protocol a layer uses:
// a new row may be requested in a cycle with ready_next high and then starts
// one cycle later.  Spikes arrive in bursts with random gaps.  For a row
// started in cycle c the expected behaviour is: in cycle c+s, codebook port p
// requests pointer s*PORTS+p (if it exists); in cycle c+s+1 exactly the
// groups s*PORTS+p are enabled, with the row's sign on inhibit_out.
module group_sequencer_check #(
  parameter int G = 16,
  parameter int PORTS = 2,
  parameter int NROWS = 300
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished
);
  localparam int IW = 11;
  localparam int S  = (G + PORTS - 1) / PORTS;

  logic clear, start, inhibit_in, ready_next, busy, inhibit_out;
  logic [G-1:0][IW-1:0] row_in;
  logic [PORTS-1:0] cb_re;
  logic [PORTS-1:0][IW-1:0] cb_addr;
  logic [G-1:0] grp_en;

  group_sequencer #(.G(G), .IW(IW), .PORTS(PORTS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (G=%0d, PORTS=%0d): %s", G, PORTS, what);
    end
  endtask

  // Expected state: step within the current row (-1 = none) and the step
  // whose groups are enabled this cycle.
  int  cur_step, en_step;
  bit  cur_inh, en_inh, req;
  int  rows_done, cycles, busy_cycles;

  initial begin
    checks = 0; failures = 0; finished = 0;
    clear = 0; start = 0; inhibit_in = 0; row_in = '0;
    cur_step = -1; en_step = -1; req = 0; rows_done = 0; cycles = 0; busy_cycles = 0;
    @(posedge rst_n);
    while (rows_done < NROWS) begin
      @(negedge clk);
      // start follows a request of the previous cycle
      start = req;
      if (req) begin
        for (int j = 0; j < G; j++) row_in[j] = IW'($urandom);
        inhibit_in = $urandom % 2;
        cur_step = 0;
        cur_inh = inhibit_in;
        rows_done++;
      end
      #1;
      // codebook requests of this cycle
      for (int p = 0; p < PORTS; p++) begin
        automatic int j = cur_step * PORTS + p;
        if (cur_step >= 0 && j < G)
          check(cb_re[p] && cb_addr[p] == row_in[j], $sformatf("step %0d port %0d request", cur_step, p));
        else
          check(!cb_re[p], $sformatf("port %0d idle", p));
      end
      // group enables of this cycle
      for (int g = 0; g < G; g++)
        check(grp_en[g] == (en_step >= 0 && g / PORTS == en_step), $sformatf("grp_en[%0d] step %0d", g, en_step));
      if (en_step >= 0) check(inhibit_out == en_inh, "inhibit travels with the row");
      check(ready_next == (cur_step < 0 || cur_step == S - 1), "ready_next");
      check(busy == (cur_step >= 0 || en_step >= 0), "busy");
      // request the next row (with random gaps)
      req = ready_next && (($urandom % 4) != 0);
      if (busy) busy_cycles++;
      // advance the model to the next cycle
      en_step = cur_step;
      en_inh = cur_inh;
      if (cur_step >= 0) cur_step = (cur_step == S - 1) ? -1 : cur_step + 1;
      cycles++;
    end
    @(negedge clk);
    start = 0;
    repeat (S + 2) @(negedge clk);
    #1;
    check(!busy, "idle at end");
    finished = 1;
  end
endmodule
