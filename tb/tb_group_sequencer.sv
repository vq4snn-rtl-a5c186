// tb_group_sequencer: self-checking test of the group counter, pointer
// multiplexer and group decoder.  Two configurations are checked cycle by
// cycle: the main one (16 pointers per row, two codebook ports, 8 cycles per
// row) and an uneven one (5 pointers, two ports, 3 cycles per row, the second
// port idle in the last step), plus a single-ported codebook (16 pointers,
// 16 cycles per row) and a four-ported, replicated one (16 pointers, 4
// cycles per row).  Rows follow each other back to back or with gaps.
module tb_group_sequencer;
  logic clk = 1'b0, rst_n = 1'b0;
  int c0, f0, c1, f1, c2, f2, c3, f3;
  bit d0, d1, d2, d3;

  always #5 clk = ~clk;

  group_sequencer_check #(.G(16), .PORTS(2)) u_main (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  group_sequencer_check #(.G(5),  .PORTS(2)) u_odd  (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));
  group_sequencer_check #(.G(16), .PORTS(1)) u_one  (.clk, .rst_n, .checks(c2), .failures(f2), .finished(d2));
  group_sequencer_check #(.G(16), .PORTS(4)) u_four (.clk, .rst_n, .checks(c3), .failures(f3), .finished(d3));

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1 && d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3);
    $finish;
  end
endmodule
