// mvau_chk: drives one mvau instance with random weights, activation
// parameters and windows and checks every output against a direct
// dot-product-and-activation model. Used by mvau_tb for both activation
// kinds. The first half of the pixels runs with random input gaps and
// output back-pressure; in the second half, with neither, the unit must
// accept one input beat per clock (SF*NF clocks per pixel).
module mvau_chk
  import lpyolo_pkg::*;
#(
  parameter int unsigned MW   = 12,
  parameter int unsigned MH   = 6,
  parameter int unsigned SIMD = 3,
  parameter int unsigned PE   = 2,
  parameter int unsigned WB   = 4,
  parameter int unsigned IB   = 4,
  parameter int unsigned OB   = 4,
  parameter act_kind_e   ACT  = ACT_THRESH,
  parameter int          NPIX = 40
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int SF = MW / SIMD, NF = MH / PE, NT = (1 << OB) - 1;

  logic rst_n = 1'b0;
  logic cfg_we = 1'b0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_LANE_W-1:0] cfg_lane = '0;
  logic [CFG_DATA_W-1:0] cfg_data = '0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD*IB-1:0] in_data;
  logic [OB-1:0] out_data;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .WB(WB), .IB(IB), .OB(OB), .ACT(ACT)) dut (
    .clk, .rst_n, .cfg_we, .cfg_kind, .cfg_addr, .cfg_lane, .cfg_data,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data
  );

  int wt [MH][MW];
  int th [MH][NT];
  int mul [MH], bias [MH];
  logic [SIMD*IB-1:0] in_q[$];
  int exp_q[$];
  int in_idx = 0, out_idx = 0;
  logic run = 1'b0, gap = 1'b0;
  wire stall_phase = in_idx < (NPIX / 2) * SF * NF;

  assign in_valid = run && !gap && in_idx < in_q.size();
  assign in_data  = (in_idx < in_q.size()) ? in_q[in_idx] : '0;

  always @(posedge clk) begin
    if (run) begin
      gap <= stall_phase && ($urandom_range(3) == 0);
      if (in_valid && in_ready) in_idx <= in_idx + 1;
      if (!stall_phase && in_valid && !in_ready) begin
        checks++;
        failures++;
        $display("mvau_chk: input stalled at beat %0d without back-pressure", in_idx);
      end
    end
    out_ready <= run && (!stall_phase || $urandom_range(2) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_idx >= exp_q.size() || int'(out_data) != exp_q[out_idx]) begin
        failures++;
        if (failures < 10) $display("mvau_chk: output %0d got %0d expected %0d", out_idx, out_data,
                                    out_idx < exp_q.size() ? exp_q[out_idx] : -1);
      end
      out_idx <= out_idx + 1;
    end
  end

  task automatic wr(cfg_kind_e k, int a, int l, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_kind = k;
    cfg_addr = CFG_ADDR_W'(a); cfg_lane = CFG_LANE_W'(l); cfg_data = CFG_DATA_W'(d);
  endtask

  initial begin
    int x [MW];
    done = 1'b0; checks = 0; failures = 0; out_ready = 1'b0;
    for (int o = 0; o < MH; o++) begin
      for (int k = 0; k < MW; k++)
        wt[o][k] = int'($urandom_range(2**WB - 1)) - 2**(WB-1);
      for (int t = 0; t < NT; t++)
        th[o][t] = -60 + 8 * t + int'($urandom_range(7));
      mul[o]  = 200 + int'($urandom_range(3000));
      bias[o] = int'($urandom_range(2**22)) - 2**21 + 128 * 65536;
    end
    for (int p = 0; p < NPIX; p++) begin
      foreach (x[k]) x[k] = int'($urandom_range(2**IB - 1));
      for (int n = 0; n < NF; n++)
        for (int f = 0; f < SF; f++) begin
          logic [SIMD*IB-1:0] v;
          for (int s = 0; s < SIMD; s++) v[s*IB +: IB] = IB'(x[f*SIMD + s]);
          in_q.push_back(v);
        end
      for (int o = 0; o < MH; o++) begin
        longint acc, l;
        int a;
        acc = 0;
        for (int k = 0; k < MW; k++) acc += longint'(wt[o][k]) * longint'(x[k]);
        if (ACT == ACT_THRESH) begin
          a = 0;
          for (int t = 0; t < NT; t++) if (acc >= longint'(th[o][t])) a++;
        end else begin
          l = (acc * longint'(mul[o]) + longint'(bias[o])) >>> HT_SHIFT;
          a = (l < 0) ? 0 : (l > NT) ? NT : int'(l);
        end
        exp_q.push_back(a);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int o = 0; o < MH; o++)
      for (int k = 0; k < MW; k++)
        wr(CFG_WEIGHT, (o / PE) * SF + k / SIMD, (o % PE) * SIMD + k % SIMD, wt[o][k]);
    for (int o = 0; o < MH; o++)
      if (ACT == ACT_THRESH) begin
        for (int t = 0; t < NT; t++) wr(CFG_ACT, o, t, th[o][t]);
      end else begin
        wr(CFG_ACT, o, AFF_MUL, mul[o]);
        wr(CFG_ACT, o, AFF_BIAS, bias[o]);
      end
    @(negedge clk);
    cfg_we = 1'b0;
    run = 1'b1;
    wait (out_idx == exp_q.size());
    repeat (10) @(posedge clk);
    checks++;
    if (out_valid || in_idx != in_q.size()) begin
      failures++;
      $display("mvau_chk: stream counts wrong");
    end
    done = 1'b1;
  end

endmodule
