// tb_vector_codebook: self-checking test of the dual-ported vector codebook
// at its full size (2048 entries of 8 five-bit weights).  Fills all entries
// with values computed from their index, then reads two random entries per
// cycle, one per port, back to back, and checks both ports one cycle later,
// including both ports reading the same entry and a port that is not
// enabled holding its last output.
module tb_vector_codebook;
  localparam int K = 2048, D = 8, W = 5, PORTS = 2, IW = 11;

  logic clk = 1'b0;
  logic we;
  logic [IW-1:0] waddr;
  logic [D-1:0][W-1:0] wdata;
  logic [PORTS-1:0] re;
  logic [PORTS-1:0][IW-1:0] raddr;
  logic [PORTS-1:0][D-1:0][W-1:0] rdata;
  int checks = 0, failures = 0;

  vector_codebook #(.K(K), .D(D), .W(W), .PORTS(PORTS)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [D-1:0][W-1:0] pattern(int a);
    logic [D-1:0][W-1:0] r;
    for (int j = 0; j < D; j++) r[j] = W'((a * 13 + j * 7 + (a >> 5)) ^ j);
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
    int a0, a1, p1;
    bit e1;
    we = 0; re = '0; raddr = '0; waddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < K; i++) begin
      we = 1; waddr = IW'(i); wdata = pattern(i);
      @(negedge clk);
    end
    we = 0;
    p1 = -1;
    for (int i = 0; i < 3000; i++) begin
      a0 = $urandom_range(0, K - 1);
      a1 = (i % 10 == 0) ? a0 : $urandom_range(0, K - 1);
      e1 = (i % 7) != 3;
      re = {e1, 1'b1}; raddr[0] = IW'(a0); raddr[1] = IW'(a1);
      @(negedge clk);
      check(rdata[0] == pattern(a0), $sformatf("port 0 entry %0d", a0));
      if (e1) begin
        check(rdata[1] == pattern(a1), $sformatf("port 1 entry %0d", a1));
        p1 = a1;
      end else if (p1 >= 0) begin
        check(rdata[1] == pattern(p1), "port 1 holds when not enabled");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
