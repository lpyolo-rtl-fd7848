// mvau: matrix-vector-activation unit of one QuantConv layer.
//
// Computes, for every input window of MW = K*K*Cin unsigned activations,
// MH output channels of dot(window, weights[ch]) followed by the layer's
// quantized activation. The work is folded over PE output lanes and SIMD
// input lanes: each input beat carries SIMD activations and is multiplied in
// one clock by a PE x SIMD block of signed weights, so one output group of PE
// channels takes SF = MW/SIMD beats and a whole pixel takes SF*NF beats,
// NF = MH/PE. The window is expected NF times in a row (the sliding_window
// replays it), one pass per group.
//
// Weights live in an on-chip memory of SF*NF words of PE*SIMD weights; word
// nf*SF+sf, lane pe*SIMD+s holds the weight of output channel nf*PE+pe and
// window element sf*SIMD+s.
//
// Activation (ACT):
//   ACT_THRESH - quantized ReLU as a multi-threshold: out = number of the
//                2^OB-1 per-channel thresholds that acc reaches (acc >= thr),
//                which absorbs the scale, bias and ReLU of the trained model.
//   ACT_AFFINE - rescaled HardTanh: out = clamp((acc*mul + bias) >>> SHIFT,
//                0, 2^OB-1) with per-channel mul and bias. This is the
//                piecewise-linear stand-in for the sigmoid of the last layer.
//
// Parameters (weights, thresholds, mul/bias) are written over the cfg port,
// one value per clock; they must not be changed while a frame is running.
// The PE results of a group are held in an output buffer and sent one
// channel per beat (ascending channel order). The last input beat of a group
// waits while the buffer still holds an element that is not leaving in the
// same clock, so with SF >= PE and no back-pressure one input beat is taken
// every clock.
//
// The PE/SIMD folding, storing every parameter on chip and the two activation
// kinds follow the paper's FINN-based design; the threshold form of the
// ReLU, the affine form of the HardTanh and the buffer and port layout are
// this design's own.
module mvau
  import lpyolo_pkg::*;
#(
  parameter int unsigned MW    = 27,
  parameter int unsigned MH    = 8,
  parameter int unsigned SIMD  = 3,
  parameter int unsigned PE    = 8,
  parameter int unsigned WB    = 8,
  parameter int unsigned IB    = 8,
  parameter int unsigned OB    = 4,
  parameter act_kind_e   ACT   = ACT_THRESH,
  parameter int unsigned SHIFT = HT_SHIFT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration write
  input  logic                   cfg_we,
  input  cfg_kind_e              cfg_kind,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [CFG_LANE_W-1:0]  cfg_lane,
  input  logic [CFG_DATA_W-1:0]  cfg_data,
  // input vectors
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [SIMD*IB-1:0]     in_data,
  // output activations, one channel per beat
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [OB-1:0]          out_data
);

  localparam int unsigned SF    = MW / SIMD;
  localparam int unsigned NF    = MH / PE;
  localparam int unsigned WDEP  = SF * NF;
  localparam int unsigned WAW   = (WDEP > 1) ? $clog2(WDEP) : 1;
  localparam int unsigned NT    = (1 << OB) - 1;
  localparam int unsigned CW    = 16;

  initial begin
    assert (MW % SIMD == 0) else $error("SIMD must divide MW");
    assert (MH % PE == 0) else $error("PE must divide MH");
  end

  typedef logic signed [ACC_W-1:0] acc_t;

  // ---------------- parameter memories ----------------
  logic [PE*SIMD*WB-1:0] wmem [WDEP];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_kind == CFG_WEIGHT)
      wmem[WAW'(cfg_addr)][int'(cfg_lane)*WB +: WB] <= cfg_data[WB-1:0];
  end

  // ---------------- datapath ----------------
  logic [CW-1:0] sf, nf;
  acc_t          acc   [PE];
  acc_t          dot   [PE];
  acc_t          total [PE];
  logic [OB-1:0] act   [PE];
  logic [OB-1:0] obuf  [PE];
  logic [CW-1:0] ocnt, optr;
  logic          in_fire, grp_last;
  logic [PE*SIMD*WB-1:0] wword;

  assign grp_last = (int'(sf) == int'(SF) - 1);
  // The buffer is free for a new group once empty, or as its last element
  // leaves in this very clock.
  assign in_ready = !grp_last || (ocnt == '0) || (ocnt == CW'(1) && out_ready);
  assign in_fire  = in_valid && in_ready;
  assign wword    = wmem[WAW'(int'(nf) * int'(SF) + int'(sf))];

  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      dot[p] = '0;
      for (int s = 0; s < int'(SIMD); s++)
        dot[p] += acc_t'($signed(wword[(p*int'(SIMD)+s)*WB +: WB])) *
                  acc_t'($signed({1'b0, in_data[s*IB +: IB]}));
      total[p] = acc[p] + dot[p];
    end
  end

  // ---------------- activation ----------------
  generate
    if (ACT == ACT_THRESH) begin : g_thresh
      acc_t thr [MH][NT];
      always_ff @(posedge clk) begin
        if (cfg_we && cfg_kind == CFG_ACT)
          thr[int'(cfg_addr)][int'(cfg_lane)] <= acc_t'(cfg_data);
      end
      always_comb begin
        for (int p = 0; p < int'(PE); p++) begin
          act[p] = '0;
          for (int t = 0; t < int'(NT); t++)
            if (total[p] >= thr[int'(nf) * int'(PE) + p][t]) act[p] += 1'b1;
        end
      end
    end else begin : g_affine
      logic signed [15:0] mul  [MH];
      logic signed [31:0] bias [MH];
      logic signed [55:0] lin  [PE];
      always_ff @(posedge clk) begin
        if (cfg_we && cfg_kind == CFG_ACT) begin
          if (int'(cfg_lane) == int'(AFF_MUL))  mul[int'(cfg_addr)]  <= cfg_data[15:0];
          if (int'(cfg_lane) == int'(AFF_BIAS)) bias[int'(cfg_addr)] <= cfg_data;
        end
      end
      always_comb begin
        for (int p = 0; p < int'(PE); p++) begin
          lin[p] = (56'(total[p]) * 56'(mul[int'(nf) * int'(PE) + p]) +
                    56'(bias[int'(nf) * int'(PE) + p])) >>> SHIFT;
          if (lin[p] < 0)                          act[p] = '0;
          else if (lin[p] > 56'(signed'(int'(NT)))) act[p] = OB'(NT);
          else                                     act[p] = lin[p][OB-1:0];
        end
      end
    end
  endgenerate

  // ---------------- control and output ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sf <= '0; nf <= '0; ocnt <= '0; optr <= '0;
      for (int p = 0; p < int'(PE); p++) begin
        acc[p]  <= '0;
        obuf[p] <= '0;
      end
    end else begin
      if (out_valid && out_ready) begin
        ocnt <= ocnt - 1'b1;
        optr <= optr + 1'b1;
      end
      if (in_fire) begin
        if (grp_last) begin
          for (int p = 0; p < int'(PE); p++) begin
            obuf[p] <= act[p];
            acc[p]  <= '0;
          end
          ocnt <= CW'(PE);
          optr <= '0;
          sf   <= '0;
          nf   <= (int'(nf) == int'(NF) - 1) ? '0 : nf + 1'b1;
        end else begin
          for (int p = 0; p < int'(PE); p++) acc[p] <= total[p];
          sf <= sf + 1'b1;
        end
      end
    end
  end

  assign out_valid = (ocnt != '0);
  assign out_data  = obuf[int'(optr) % int'(PE)];

  // The output buffer is only refilled once it has drained.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    in_fire && grp_last |-> ocnt == '0 || (ocnt == CW'(1) && out_ready));

endmodule
