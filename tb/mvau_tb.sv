// mvau_tb: self-checking test of the matrix-vector-activation unit with
// both activation kinds: a 4-bit threshold (quantized ReLU) instance with
// 4-bit weights, and an 8-bit rescaled HardTanh instance with 8-bit weights
// whose scale and bias are drawn so that outputs clip at both ends.
module mvau_tb;
  import lpyolo_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1;
  int c0, c1, f0, f1;

  mvau_chk #(.MW(12), .MH(6), .SIMD(3), .PE(2), .WB(4), .IB(4), .OB(4), .ACT(ACT_THRESH))
    u_thr (.clk, .done(d0), .checks(c0), .failures(f0));
  mvau_chk #(.MW(8), .MH(4), .SIMD(4), .PE(2), .WB(8), .IB(4), .OB(8), .ACT(ACT_AFFINE))
    u_aff (.clk, .done(d1), .checks(c1), .failures(f1));

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
