// sliding_window_tb: self-checking test of the convolution window generator.
//
// A 5x6 map of 4 channels (SIMD 2, 3x3 kernel, 2 neuron folds) is streamed in
// three frames. Expected windows are computed directly from the frame with
// zero padding and compared beat by beat. Frames 0 and 1 run with random
// input gaps and output back-pressure; frame 2 runs without, and its output
// must then be continuous: one window beat per clock from its first beat to
// its last.
module sliding_window_tb;

  localparam int H = 5, W = 6, C = 4, K = 3, SIMD = 2, A = 4, NF = 2;
  localparam int P = (K - 1) / 2, CF = C / SIMD;
  localparam int NFRAMES = 3;
  localparam int IN_LEN  = H * W * C;
  localparam int OUT_LEN = H * W * NF * K * K * CF;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [A-1:0] in_data;
  logic [SIMD*A-1:0] out_data;

  always #5 clk = ~clk;

  sliding_window #(.H(H), .W(W), .C(C), .K(K), .SIMD(SIMD), .A(A), .NF(NF)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data
  );

  int checks = 0, failures = 0;
  int in_q[$];
  logic [SIMD*A-1:0] exp_q[$];
  int in_idx = 0, out_idx = 0;
  logic run = 1'b0, gap = 1'b0;
  longint cyc = 0, f2_first = -1, f2_last = -1;

  wire in_stall  = in_idx  < 2 * IN_LEN;
  wire out_stall = out_idx < 2 * OUT_LEN;

  assign in_valid = run && !gap && in_idx < NFRAMES * IN_LEN;
  assign in_data  = (in_idx < NFRAMES * IN_LEN) ? A'(in_q[in_idx]) : '0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (run) begin
      gap <= in_stall && ($urandom_range(3) == 0);
      if (in_valid && in_ready) in_idx <= in_idx + 1;
    end
    out_ready <= run && (!out_stall || $urandom_range(2) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_idx >= NFRAMES * OUT_LEN || out_data != exp_q[out_idx]) begin
        failures++;
        if (failures < 10) $display("beat %0d: got %h expected %h", out_idx, out_data,
                                    out_idx < NFRAMES * OUT_LEN ? exp_q[out_idx] : '0);
      end
      if (out_idx == 2 * OUT_LEN) f2_first = cyc;
      if (out_idx == 3 * OUT_LEN - 1) f2_last = cyc;
      out_idx <= out_idx + 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired at beat %0d", out_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 1'b0;
    for (int f = 0; f < NFRAMES; f++) begin
      int img[H][W][C];
      foreach (img[y, x, c]) begin
        img[y][x][c] = int'($urandom_range(2**A - 1));
      end
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < C; c++) in_q.push_back(img[y][x][c]);
      for (int oy = 0; oy < H; oy++)
        for (int ox = 0; ox < W; ox++)
          for (int n = 0; n < NF; n++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int cf = 0; cf < CF; cf++) begin
                  logic [SIMD*A-1:0] v;
                  int iy, ix;
                  v  = '0;
                  iy = oy + ky - P;
                  ix = ox + kx - P;
                  for (int s = 0; s < SIMD; s++)
                    if (iy >= 0 && iy < H && ix >= 0 && ix < W)
                      v[s*A +: A] = A'(img[iy][ix][cf*SIMD + s]);
                  exp_q.push_back(v);
                end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run = 1'b1;
    wait (out_idx == NFRAMES * OUT_LEN);
    repeat (10) @(posedge clk);
    checks++;
    if (out_valid) begin
      failures++;
      $display("extra output beat");
    end
    checks++;
    if (f2_last - f2_first + 1 != OUT_LEN) begin
      failures++;
      $display("frame 2 took %0d clocks for %0d beats", f2_last - f2_first + 1, OUT_LEN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
