// tb_pointer_memory: self-checking test of the pointer memory at its full
// size (912 rows of 16 pointers of 11 bits).  Fills every row with a value
// computed from its address, reads the rows back in random order and checks
// the one-cycle read latency, that rdata holds while re is low, and that a
// row can be rewritten.
module tb_pointer_memory;
  localparam int ROWS = 912, G = 16, IW = 11, AW = $clog2(ROWS);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [G-1:0][IW-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  pointer_memory #(.ROWS(ROWS), .G(G), .IW(IW)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [G-1:0][IW-1:0] pattern(int a, int salt);
    logic [G-1:0][IW-1:0] r;
    for (int j = 0; j < G; j++) r[j] = IW'((a * 37 + j * 1021 + salt * 7919) ^ (a >> 3));
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
      we = 1; waddr = AW'(i); wdata = pattern(i, 0);
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 2000; i++) begin
      a = $urandom_range(0, ROWS - 1);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0; raddr = AW'($urandom_range(0, ROWS - 1));
      check(rdata == pattern(a, 0), $sformatf("row %0d read", a));
      @(negedge clk);
      check(rdata == pattern(a, 0), $sformatf("row %0d held", a));
    end
    // rewrite one row
    we = 1; waddr = AW'(100); wdata = pattern(100, 1);
    @(negedge clk);
    we = 0; re = 1; raddr = AW'(100);
    @(negedge clk);
    re = 0;
    check(rdata == pattern(100, 1), "rewritten row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
