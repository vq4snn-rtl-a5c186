// tb_weight_memory: self-checking test of the uncompressed weight memory at
// its full size (138 rows of 10 five-bit weights).  Fills every row with a
// value computed from its address and reads rows back in random order,
// checking the one-cycle latency and that rdata holds while re is low.
module tb_weight_memory;
  localparam int ROWS = 138, N = 10, W = 5, AW = $clog2(ROWS);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [N-1:0][W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  weight_memory #(.ROWS(ROWS), .N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [N-1:0][W-1:0] pattern(int a);
    logic [N-1:0][W-1:0] r;
    for (int j = 0; j < N; j++) r[j] = W'(a * 3 + j * 11 + (a >> 2));
    return r;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < ROWS; i++) begin
      we = 1; waddr = AW'(i); wdata = pattern(i);
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 1000; i++) begin
      a = $urandom_range(0, ROWS - 1);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0; raddr = AW'($urandom_range(0, ROWS - 1));
      check(rdata == pattern(a), $sformatf("row %0d read", a));
      @(negedge clk);
      check(rdata == pattern(a), $sformatf("row %0d held", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
