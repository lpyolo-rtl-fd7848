// lpyolo_prec_chk: runs one frame through an lpyolo_top built for one mWnA
// precision (WQ-bit weights in conv1..conv8, AQ-bit activations) and checks
// every output element and tlast against an lpyolo_ref model of the same
// precision. Random input gaps and output back-pressure throughout.
module lpyolo_prec_chk
  import lpyolo_pkg::*;
  import lpyolo_ref_pkg::*;
#(
  parameter int IH = 64,
  parameter int IW = 64,
  parameter int WQ = 4,
  parameter int AQ = 4
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int IN_LEN  = IH * IW * 3;
  localparam int OUT_LEN = (IH / 32) * (IW / 32) * 18;

  logic rst_n = 1'b0;
  cfg_wr_t cfg;
  logic s_tvalid, s_tready, m_tvalid, m_tlast;
  logic m_tready = 1'b0;
  logic [7:0] s_tdata, m_tdata;

  lpyolo_top #(.IN_H(IH), .IN_W(IW), .W_BITS(WQ), .A_BITS(AQ)) dut (
    .clk, .rst_n, .cfg,
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata),
    .m_axis_tlast(m_tlast)
  );

  lpyolo_ref model = new(WQ, AQ);
  int img_q[$], exp_q[$];
  int in_idx = 0, out_idx = 0;
  logic feed_en = 1'b0, gap = 1'b0;

  assign s_tvalid = feed_en && !gap && (in_idx < IN_LEN);
  assign s_tdata  = (in_idx < IN_LEN) ? 8'(img_q[in_idx]) : 8'h00;

  always @(posedge clk) begin
    if (feed_en) begin
      gap <= ($urandom_range(7) == 0);
      if (s_tvalid && s_tready) in_idx <= in_idx + 1;
    end
    m_tready <= feed_en && ($urandom_range(3) != 0);
    if (rst_n && m_tvalid && m_tready) begin
      checks++;
      if (out_idx >= OUT_LEN || int'(m_tdata) != exp_q[out_idx] ||
          m_tlast != (out_idx == OUT_LEN - 1)) begin
        failures++;
        if (failures < 5) $display("%0dW%0dA: output %0d got %0d expected %0d", WQ, AQ, out_idx,
                                   m_tdata, out_idx < OUT_LEN ? exp_q[out_idx] : -1);
      end
      out_idx <= out_idx + 1;
    end
  end

  task automatic cfg_write(int layer, cfg_kind_e kind, int addr, int lane, int data);
    @(negedge clk);
    cfg.we    = 1'b1;
    cfg.layer = 4'(layer);
    cfg.kind  = kind;
    cfg.addr  = CFG_ADDR_W'(addr);
    cfg.lane  = CFG_LANE_W'(lane);
    cfg.data  = CFG_DATA_W'(data);
  endtask

  initial begin
    int img[$], res[$];
    int word, lane, mw;
    done = 1'b0; checks = 0; failures = 0;
    cfg = '0;
    model.rand_weights();
    for (int j = 0; j < IN_LEN; j++) img.push_back(int'($urandom_range(255)));
    model.infer(IH, IW, img, 1'b1, res);
    foreach (img[j]) img_q.push_back(img[j]);
    foreach (res[j]) exp_q.push_back(res[j]);
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NUM_CONV; i++) begin
      mw = L_KSZ[i] * L_KSZ[i] * L_CIN[i];
      for (int oc = 0; oc < L_COUT[i]; oc++)
        for (int k = 0; k < mw; k++) begin
          model.wpos(i, oc, k, word, lane);
          cfg_write(i, CFG_WEIGHT, word, lane, model.wts[i][oc*mw + k]);
        end
      for (int oc = 0; oc < L_COUT[i]; oc++)
        if (i < NUM_CONV - 1) begin
          for (int t = 0; t < model.nthr(i); t++)
            cfg_write(i, CFG_ACT, oc, t, model.thr[i][oc*model.nthr(i) + t]);
        end else begin
          cfg_write(i, CFG_ACT, oc, AFF_MUL, model.amul[oc]);
          cfg_write(i, CFG_ACT, oc, AFF_BIAS, model.abias[oc]);
        end
    end
    @(negedge clk);
    cfg = '0;
    feed_en = 1'b1;
    wait (out_idx == OUT_LEN);
    repeat (20) @(posedge clk);
    checks++;
    if (in_idx != IN_LEN || m_tvalid) begin
      failures++;
      $display("%0dW%0dA: stream counts wrong", WQ, AQ);
    end
    $display("%0dW%0dA: %0d outputs checked, %0d failures", WQ, AQ, out_idx, failures);
    done = 1'b1;
  end

endmodule
