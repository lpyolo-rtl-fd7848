// maxpool_chk: drives one maxpool instance with random frames and checks
// every output against a direct 2x2 window maximum. Frames 0 and 1 run with
// random input gaps and output back-pressure; frame 2 runs without, and the
// pool must then take one input element per clock throughout.
module maxpool_chk #(
  parameter int H = 6,
  parameter int W = 8,
  parameter int C = 3,
  parameter int S = 2,
  parameter int A = 4
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int HO = (S == 2) ? H / 2 : H, WO = (S == 2) ? W / 2 : W;
  localparam int NFR = 3, IN_LEN = H * W * C, OUT_LEN = HO * WO * C;

  logic rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [A-1:0] in_data, out_data;

  maxpool #(.H(H), .W(W), .C(C), .S(S), .A(A)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data
  );

  int in_q[$], exp_q[$];
  int in_idx = 0, out_idx = 0;
  logic run = 1'b0, gap = 1'b0;
  wire in_stall  = in_idx  < 2 * IN_LEN;
  wire out_stall = out_idx < 2 * OUT_LEN;

  assign in_valid = run && !gap && in_idx < NFR * IN_LEN;
  assign in_data  = (in_idx < NFR * IN_LEN) ? A'(in_q[in_idx]) : '0;

  always @(posedge clk) begin
    if (run) begin
      gap <= in_stall && ($urandom_range(3) == 0);
      if (in_valid && in_ready) in_idx <= in_idx + 1;
      if (!in_stall && !out_stall && in_valid && !in_ready) begin
        checks++;
        failures++;
        $display("maxpool_chk: input refused at element %0d without back-pressure", in_idx);
      end
    end
    out_ready <= run && (!out_stall || $urandom_range(2) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_idx >= NFR * OUT_LEN || int'(out_data) != exp_q[out_idx]) begin
        failures++;
        if (failures < 10) $display("maxpool_chk: output %0d got %0d expected %0d", out_idx,
                                    out_data, out_idx < NFR * OUT_LEN ? exp_q[out_idx] : -1);
      end
      out_idx <= out_idx + 1;
    end
  end

  initial begin
    int img [H][W][C];
    done = 1'b0; checks = 0; failures = 0; out_ready = 1'b0;
    for (int f = 0; f < NFR; f++) begin
      foreach (img[y, x, c]) img[y][x][c] = int'($urandom_range(2**A - 1));
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < C; c++) in_q.push_back(img[y][x][c]);
      for (int y = 0; y < HO; y++)
        for (int x = 0; x < WO; x++)
          for (int c = 0; c < C; c++) begin
            int m;
            m = -1;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                if (y*S + dy < H && x*S + dx < W && img[y*S + dy][x*S + dx][c] > m)
                  m = img[y*S + dy][x*S + dx][c];
            exp_q.push_back(m);
          end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run = 1'b1;
    wait (out_idx == NFR * OUT_LEN);
    repeat (10) @(posedge clk);
    checks++;
    if (out_valid || in_idx != NFR * IN_LEN) begin
      failures++;
      $display("maxpool_chk: stream counts wrong");
    end
    done = 1'b1;
  end

endmodule
