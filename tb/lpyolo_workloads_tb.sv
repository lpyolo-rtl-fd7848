// lpyolo_workloads_tb: the six quantized models the LPYOLO network is
// evaluated in (2W4A, 3W5A, 4W2A, 4W4A, 6W4A, 8W3A), each built as its own
// pipeline at a reduced 64x64 input (2x2x18 result) and run for one frame
// against the bit-exact model of the same precision. The layer shapes are
// the full network's; only the image size is reduced.
module lpyolo_workloads_tb;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 6;
  localparam int WQS [N] = '{2, 3, 4, 4, 6, 8};
  localparam int AQS [N] = '{4, 5, 2, 4, 4, 3};

  logic done [N];
  int   chk  [N];
  int   fail [N];

  for (genvar g = 0; g < N; g++) begin : g_model
    lpyolo_prec_chk #(.IH(64), .IW(64), .WQ(WQS[g]), .AQ(AQS[g]))
      u_chk (.clk, .done(done[g]), .checks(chk[g]), .failures(fail[g]));
  end

  function automatic int total(input int a [N]);
    int s = 0;
    foreach (a[j]) s += a[j];
    return s;
  endfunction

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end

  initial begin
    bit all;
    repeat (5) @(posedge clk);
    do begin
      @(posedge clk);
      all = 1'b1;
      foreach (done[j]) if (!done[j]) all = 1'b0;
    end while (!all);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail));
    $finish;
  end

endmodule
