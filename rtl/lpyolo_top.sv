// lpyolo_top: LPYOLO face-detection CNN as a streaming dataflow pipeline.
//
// Ten quantized convolution layers, the first six each followed by a 2x2 max
// pooling, are chained element stream to element stream, so every layer
// works on a different part of the frame at the same time:
//
//   conv0 3->8   416  pool/2 | conv1 8->8    208 pool/2 | conv2 8->16  104 pool/2
//   conv3 16->32  52  pool/2 | conv4 32->56   26 pool/2 | conv5 56->104 13 pool/1
//   conv6 104->208 13 | conv7 1x1 208->56 13 | conv8 56->104 13 | conv9 104->18 13
//
// (sizes for a 416x416 image; all kernels 3x3 unless marked). Conv0..8 use
// an A_BITS-bit quantized ReLU (default 4), conv9 an 8-bit rescaled
// HardTanh; conv1..8 have W_BITS-bit weights (default 4), conv0 and conv9
// 8-bit weights. W_BITS/A_BITS select the paper's other mWnA models; the
// default is its main 4W4A model. The result is
// a 13x13x18 UINT8 grid: per cell and for each of 3 anchors, box centre x, y,
// width, height, class and confidence, decoded by software.
//
// Interfaces:
//   s_axis_*  input image, UINT8 elements in HWC order (row, column, then
//             R,G,B), one element per beat; fed by a DMA from processor
//             memory.
//   m_axis_*  result grid, UINT8 elements in HWC order, one per beat;
//             m_axis_tlast marks the last element of a frame.
//   cfg       parameter writes (weights, thresholds, HardTanh scale/bias),
//             one per clock, to be done before the first frame.
// All streams are valid/ready; a frame can follow the previous one directly.
//
// Timing: the slowest layer is conv0 at 9 clocks per input pixel, about
// 1.56 M clocks (15.6 ms at 100 MHz) per 416x416 frame in steady state.
//
// The network shape, the bit widths and keeping all parameters on chip are
// the paper's; the stream format, the folding, the parameter bus and the
// frame marker are this design's own choices.
module lpyolo_top
  import lpyolo_pkg::*;
#(
  parameter int unsigned IN_H   = 416,
  parameter int unsigned IN_W   = 416,
  parameter int unsigned W_BITS = DEF_WQ,   // weight bits of conv1..conv8
  parameter int unsigned A_BITS = DEF_AQ    // activation bits between layers
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_wr_t     cfg,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [7:0]  s_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic [7:0]  m_axis_tdata,
  output logic        m_axis_tlast
);

  localparam int unsigned NPOOL   = 6;
  localparam int unsigned OUT_LEN = (IN_H >> 5) * (IN_W >> 5) * L_COUT[NUM_CONV-1];

  initial assert (IN_H % 32 == 0 && IN_W % 32 == 0)
    else $error("image size must be a multiple of 32");
  initial assert (W_BITS >= 2 && W_BITS <= 8 && A_BITS >= 1 && A_BITS <= 8)
    else $error("W_BITS must be 2..8 and A_BITS 1..8");

  // Stage i input stream (stage 10 is the pipeline output). Elements are at
  // most 8 bits wide; narrower ones sit in the low bits.
  logic       st_valid [NUM_CONV+1];
  logic       st_ready [NUM_CONV+1];
  logic [7:0] st_data  [NUM_CONV+1];

  assign st_valid[0]   = s_axis_tvalid;
  assign s_axis_tready = st_ready[0];
  assign st_data[0]    = s_axis_tdata;

  for (genvar i = 0; i < int'(NUM_CONV); i++) begin : g_layer
    localparam int unsigned H  = IN_H >> L_SHIFT_HW[i];
    localparam int unsigned W  = IN_W >> L_SHIFT_HW[i];
    localparam int unsigned IB = layer_ibits(i, A_BITS);
    localparam int unsigned OB = layer_obits(i, A_BITS);

    logic          cv_valid, cv_ready;
    logic [OB-1:0] cv_data;

    conv_layer #(
      .H(H), .W(W), .CIN(L_CIN[i]), .COUT(L_COUT[i]), .K(L_KSZ[i]),
      .SIMD(L_SIMD[i]), .PE(L_PE[i]), .WB(layer_wbits(i, W_BITS)), .IB(IB), .OB(OB),
      .ACT((i == int'(NUM_CONV) - 1) ? ACT_AFFINE : ACT_THRESH)
    ) u_conv (
      .clk, .rst_n,
      .cfg_we  (cfg.we && (int'(cfg.layer) == i)),
      .cfg_kind(cfg.kind),
      .cfg_addr(cfg.addr),
      .cfg_lane(cfg.lane),
      .cfg_data(cfg.data),
      .in_valid(st_valid[i]), .in_ready(st_ready[i]), .in_data(st_data[i][IB-1:0]),
      .out_valid(cv_valid), .out_ready(cv_ready), .out_data(cv_data)
    );

    if (i < int'(NPOOL)) begin : g_pool
      logic [OB-1:0] pl_data;
      maxpool #(
        .H(H), .W(W), .C(L_COUT[i]), .S((i == int'(NPOOL) - 1) ? 1 : 2), .A(OB)
      ) u_pool (
        .clk, .rst_n,
        .in_valid(cv_valid), .in_ready(cv_ready), .in_data(cv_data),
        .out_valid(st_valid[i+1]), .out_ready(st_ready[i+1]), .out_data(pl_data)
      );
      assign st_data[i+1] = 8'(pl_data);
    end else begin : g_nopool
      assign st_valid[i+1] = cv_valid;
      assign cv_ready      = st_ready[i+1];
      assign st_data[i+1]  = 8'(cv_data);
    end
  end

  assign m_axis_tvalid      = st_valid[NUM_CONV];
  assign st_ready[NUM_CONV] = m_axis_tready;
  assign m_axis_tdata       = st_data[NUM_CONV];

  // End-of-frame marker on the output stream.
  logic [31:0] out_cnt;
  assign m_axis_tlast = (out_cnt == 32'(OUT_LEN - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) out_cnt <= '0;
    else if (m_axis_tvalid && m_axis_tready)
      out_cnt <= m_axis_tlast ? '0 : out_cnt + 1'b1;
  end

endmodule
