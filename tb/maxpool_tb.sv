// maxpool_tb: self-checking test of the 2x2 max pooling in both of its
// forms: stride 2 (6x8x3 -> 3x4x3) and stride 1 with the right/bottom edge
// left out of the window (5x5x2 -> 5x5x2).
module maxpool_tb;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1;
  int c0, c1, f0, f1;

  maxpool_chk #(.H(6), .W(8), .C(3), .S(2), .A(4)) u_s2 (.clk, .done(d0), .checks(c0), .failures(f0));
  maxpool_chk #(.H(5), .W(5), .C(2), .S(1), .A(4)) u_s1 (.clk, .done(d1), .checks(c1), .failures(f1));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end

endmodule
