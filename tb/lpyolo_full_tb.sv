// lpyolo_full_tb: two full-size 416x416x3 frames, back to back, through the
// LPYOLO pipeline with every parameter of the top at its default.
//
// Random weights and image, activation parameters derived by the software
// model in lpyolo_ref_pkg, all parameters written over the cfg bus, then the
// frames are streamed in without gaps and the 13x13x18 results are read
// without back-pressure. Every output element and the tlast marker are
// checked. The first frame's latency (first input beat to last output beat)
// must stay within 5.23 M clocks, the 52.3 ms CNN latency of the 4W4A model
// at 100 MHz, and the interval between the two frames' last outputs within
// 5.56 M clocks, the 18 frames per second of the complete system.
module lpyolo_full_tb;
  import lpyolo_pkg::*;
  import lpyolo_ref_pkg::*;

  localparam int IH = 416, IW = 416, NFR = 2;
  localparam int IN_LEN  = IH * IW * 3;
  localparam int OUT_LEN = (IH / 32) * (IW / 32) * 18;
  localparam bit STALLS  = 0;
  localparam int WATCHDOG = 8_000_000;
  localparam longint LAT_MAX = 5_230_000;   // 52.3 ms at 100 MHz
  localparam longint INT_MAX = 5_555_555;   // 18 frames per second at 100 MHz

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg;
  logic s_tvalid, s_tready, m_tvalid, m_tlast;
  logic m_tready = 1'b0;
  logic [7:0] s_tdata, m_tdata;

  always #5 clk = ~clk;

  lpyolo_top dut (
    .clk, .rst_n, .cfg,
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata),
    .m_axis_tlast(m_tlast)
  );

  lpyolo_ref model = new();
  int checks = 0, failures = 0;
  int img_q[$], exp_q[$];
  int in_idx = 0, out_idx = 0;
  logic feed_en = 1'b0, gap = 1'b0;
  longint cyc = 0, t_first_in = -1;
  longint t_tlast[$];
  int n_gap = 0, n_in_bp = 0, n_out_bp = 0, n_frames = 0;
  int m_zero = 0, m_full = 0, m_htl = 0, m_hth = 0, m_pool1 = 0;

  assign s_tvalid = feed_en && !gap && (in_idx < NFR * IN_LEN);
  assign s_tdata  = (in_idx < NFR * IN_LEN) ? 8'(img_q[in_idx]) : 8'h00;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (feed_en) begin
      gap <= STALLS && ($urandom_range(7) == 0);
      if (gap) n_gap++;
      if (s_tvalid && s_tready) begin
        if (t_first_in < 0) t_first_in = cyc;
        in_idx <= in_idx + 1;
      end
      if (s_tvalid && !s_tready) n_in_bp++;
    end
    m_tready <= feed_en && (!STALLS || $urandom_range(3) != 0);
    if (rst_n && m_tvalid && !m_tready) n_out_bp++;
    if (rst_n && m_tvalid && m_tready) begin
      checks++;
      if (out_idx >= NFR * OUT_LEN || int'(m_tdata) != exp_q[out_idx]) begin
        failures++;
        if (failures < 10) $display("mismatch at output %0d: got %0d expected %0d", out_idx,
                                    m_tdata, out_idx < NFR * OUT_LEN ? exp_q[out_idx] : -1);
      end
      checks++;
      if (m_tlast != ((out_idx % OUT_LEN) == OUT_LEN - 1)) begin
        failures++;
        $display("tlast wrong at output %0d", out_idx);
      end
      if (m_tlast) begin
        n_frames++;
        t_tlast.push_back(cyc);
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

  task automatic load_all();
    int word, lane;
    for (int i = 0; i < NUM_CONV; i++) begin
      int mw = L_KSZ[i] * L_KSZ[i] * L_CIN[i];
      for (int oc = 0; oc < L_COUT[i]; oc++)
        for (int k = 0; k < mw; k++) begin
          model.wpos(i, oc, k, word, lane);
          cfg_write(i, CFG_WEIGHT, word, lane, model.wts[i][oc*mw + k]);
        end
      if (i < NUM_CONV - 1) begin
        for (int oc = 0; oc < L_COUT[i]; oc++)
          for (int t = 0; t < model.nthr(i); t++)
            cfg_write(i, CFG_ACT, oc, t, model.thr[i][oc*model.nthr(i) + t]);
      end else begin
        for (int oc = 0; oc < L_COUT[i]; oc++) begin
          cfg_write(i, CFG_ACT, oc, AFF_MUL, model.amul[oc]);
          cfg_write(i, CFG_ACT, oc, AFF_BIAS, model.abias[oc]);
        end
      end
    end
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d of %0d outputs", out_idx, NFR * OUT_LEN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img[$], res[$];
    cfg = '0;
    model.rand_weights();
    for (int f = 0; f < NFR; f++) begin
      img.delete();
      for (int j = 0; j < IN_LEN; j++) img.push_back(int'($urandom_range(255)));
      model.infer(IH, IW, img, f == 0, res);
      m_zero += model.n_act_zero; m_full += model.n_act_full; m_htl += model.n_ht_low; m_hth += model.n_ht_high;
      m_pool1 += model.n_pool1_changed;
      foreach (img[j]) img_q.push_back(img[j]);
      foreach (res[j]) exp_q.push_back(res[j]);
    end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    load_all();
    @(negedge clk);
    feed_en = 1'b1;
    wait (out_idx == NFR * OUT_LEN);
    repeat (20) @(posedge clk);
    checks++;
    if (in_idx != NFR * IN_LEN || m_tvalid) begin
      failures++;
      $display("stream counts wrong: in %0d out %0d", in_idx, out_idx);
    end
    $display("frame 0 latency: %0d cycles, frame interval: %0d cycles",
             t_tlast[0] - t_first_in + 1, t_tlast[1] - t_tlast[0]);
    $display("mechanisms: input gaps %0d, input back-pressure %0d, output back-pressure %0d",
             n_gap, n_in_bp, n_out_bp);
    $display("mechanisms: relu zero %0d, relu full %0d, hardtanh low %0d, high %0d, pool1 changed %0d, frames %0d",
             m_zero, m_full, m_htl, m_hth, m_pool1, n_frames);
    checks++;
    if (t_tlast[0] - t_first_in + 1 > LAT_MAX) begin
      failures++;
      $display("frame latency above %0d cycles", LAT_MAX);
    end
    checks++;
    if (t_tlast[1] - t_tlast[0] > INT_MAX) begin
      failures++;
      $display("frame interval above %0d cycles", INT_MAX);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
