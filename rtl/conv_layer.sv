// conv_layer: one quantized convolution layer with its activation.
//
// A sliding_window turns the incoming HWC element stream into K x K zero-
// padded windows (stride 1, "same" output size) and hands them, SIMD
// channels per beat and once per neuron fold, to an mvau that multiplies them
// with the on-chip weights and applies the activation. Output is the HWC
// element stream of the COUT-channel result, one element per beat.
//
// Clocks per output pixel in steady state: (K*K*CIN/SIMD) * (COUT/PE).
// Parameters are loaded through the cfg port (see mvau).
//
// Layer shapes follow the paper's network table; the folding values are set
// by the top level.
module conv_layer
  import lpyolo_pkg::*;
#(
  parameter int unsigned H     = 416,
  parameter int unsigned W     = 416,
  parameter int unsigned CIN   = 3,
  parameter int unsigned COUT  = 8,
  parameter int unsigned K     = 3,
  parameter int unsigned SIMD  = 3,
  parameter int unsigned PE    = 8,
  parameter int unsigned WB    = 8,
  parameter int unsigned IB    = 8,
  parameter int unsigned OB    = 4,
  parameter act_kind_e   ACT   = ACT_THRESH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_we,
  input  cfg_kind_e              cfg_kind,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [CFG_LANE_W-1:0]  cfg_lane,
  input  logic [CFG_DATA_W-1:0]  cfg_data,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [IB-1:0]          in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [OB-1:0]          out_data
);

  logic              win_valid, win_ready;
  logic [SIMD*IB-1:0] win_data;

  sliding_window #(
    .H(H), .W(W), .C(CIN), .K(K), .SIMD(SIMD), .A(IB), .NF(COUT / PE)
  ) u_swu (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data)
  );

  mvau #(
    .MW(K * K * CIN), .MH(COUT), .SIMD(SIMD), .PE(PE),
    .WB(WB), .IB(IB), .OB(OB), .ACT(ACT)
  ) u_mvau (
    .clk, .rst_n,
    .cfg_we, .cfg_kind, .cfg_addr, .cfg_lane, .cfg_data,
    .in_valid(win_valid), .in_ready(win_ready), .in_data(win_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
