// conv_layer_tb: self-checking test of one quantized 3x3 convolution layer
// (6x5 map, 4 -> 6 channels, SIMD 2, PE 3, 4-bit weights and activations).
//
// Expected outputs come from a direct zero-padded convolution followed by
// the per-channel threshold count. Frames 0 and 1 run with random gaps and
// back-pressure. Frame 2 runs without; its outputs must span
// H*W*(9*CIN/SIMD)*(COUT/PE) clocks, the layer's folded rate, give or take
// one output group.
module conv_layer_tb;
  import lpyolo_pkg::*;

  localparam int H = 6, W = 5, CIN = 4, COUT = 6, K = 3, SIMD = 2, PE = 3;
  localparam int WB = 4, IB = 4, OB = 4, NT = 15, P = 1;
  localparam int NFR = 3, IN_LEN = H * W * CIN, OUT_LEN = H * W * COUT;
  localparam int RATE = H * W * (K * K * CIN / SIMD) * (COUT / PE);
  localparam int GRP  = (K * K * CIN / SIMD);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_LANE_W-1:0] cfg_lane = '0;
  logic [CFG_DATA_W-1:0] cfg_data = '0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [IB-1:0] in_data;
  logic [OB-1:0] out_data;

  always #5 clk = ~clk;

  conv_layer #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .K(K), .SIMD(SIMD), .PE(PE),
               .WB(WB), .IB(IB), .OB(OB), .ACT(ACT_THRESH)) dut (
    .clk, .rst_n, .cfg_we, .cfg_kind, .cfg_addr, .cfg_lane, .cfg_data,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data
  );

  int checks = 0, failures = 0;
  int wt [COUT][K*K*CIN];
  int th [COUT][NT];
  int in_q[$], exp_q[$];
  int in_idx = 0, out_idx = 0;
  logic run = 1'b0, gap = 1'b0;
  longint cyc = 0, f2_first = -1, f2_last = -1;
  wire in_stall  = in_idx  < 2 * IN_LEN;
  wire out_stall = out_idx < 2 * OUT_LEN;

  assign in_valid = run && !gap && in_idx < NFR * IN_LEN;
  assign in_data  = (in_idx < NFR * IN_LEN) ? IB'(in_q[in_idx]) : '0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (run) begin
      gap <= in_stall && ($urandom_range(3) == 0);
      if (in_valid && in_ready) in_idx <= in_idx + 1;
    end
    out_ready <= run && (!out_stall || $urandom_range(2) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_idx >= NFR * OUT_LEN || int'(out_data) != exp_q[out_idx]) begin
        failures++;
        if (failures < 10) $display("output %0d got %0d expected %0d", out_idx, out_data,
                                    out_idx < NFR * OUT_LEN ? exp_q[out_idx] : -1);
      end
      if (out_idx == 2 * OUT_LEN) f2_first = cyc;
      if (out_idx == 3 * OUT_LEN - 1) f2_last = cyc;
      out_idx <= out_idx + 1;
    end
  end

  task automatic wr(cfg_kind_e k, int a, int l, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_kind = k;
    cfg_addr = CFG_ADDR_W'(a); cfg_lane = CFG_LANE_W'(l); cfg_data = CFG_DATA_W'(d);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired at output %0d", out_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img [H][W][CIN];
    out_ready = 1'b0;
    foreach (wt[o, k]) wt[o][k] = int'($urandom_range(15)) - 8;
    foreach (th[o, t]) th[o][t] = -120 + 16 * t + int'($urandom_range(15));
    for (int f = 0; f < NFR; f++) begin
      foreach (img[y, x, c]) img[y][x][c] = int'($urandom_range(15));
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < CIN; c++) in_q.push_back(img[y][x][c]);
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int o = 0; o < COUT; o++) begin
            int acc, a;
            acc = 0;
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int c = 0; c < CIN; c++)
                  if (y + ky - P >= 0 && y + ky - P < H && x + kx - P >= 0 && x + kx - P < W)
                    acc += img[y + ky - P][x + kx - P][c] * wt[o][(ky * K + kx) * CIN + c];
            a = 0;
            for (int t = 0; t < NT; t++) if (acc >= th[o][t]) a++;
            exp_q.push_back(a);
          end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < K*K*CIN; k++)
        wr(CFG_WEIGHT, (o / PE) * GRP + k / SIMD, (o % PE) * SIMD + k % SIMD, wt[o][k]);
    for (int o = 0; o < COUT; o++)
      for (int t = 0; t < NT; t++) wr(CFG_ACT, o, t, th[o][t]);
    @(negedge clk);
    cfg_we = 1'b0;
    run = 1'b1;
    wait (out_idx == NFR * OUT_LEN);
    repeat (10) @(posedge clk);
    checks++;
    if (out_valid || in_idx != NFR * IN_LEN) begin
      failures++;
      $display("stream counts wrong");
    end
    checks++;
    if (f2_last - f2_first + 1 > RATE + 2 || f2_last - f2_first + 1 < RATE - GRP * (COUT / PE)) begin
      failures++;
      $display("frame 2 output span %0d clocks, folded rate %0d", f2_last - f2_first + 1, RATE);
    end
    $display("frame 2 output span %0d clocks, folded rate %0d", f2_last - f2_first + 1, RATE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
