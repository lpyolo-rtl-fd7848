// sliding_window: convolution input generator for one QuantConv layer.
//
// The feature map arrives as a stream of unsigned A-bit elements in
// row-major, channel-minor order (HWC), one element per beat. Elements are
// grouped into words of SIMD channels and written into a row buffer of SLOTS
// image rows (SLOTS = 4 for a 3x3 kernel, 2 for 1x1), so that the next input
// row can be written while the current output row is being read.
//
// For every output pixel (stride 1, zero "same" padding of (K-1)/2 on all
// sides) the window is emitted NF times, once per neuron fold of the mvau
// that follows, as K*K*C/SIMD beats of SIMD elements each, in the order
// (ky, kx, channel fold). Positions outside the image read as zero, which is
// the value of a real zero for unsigned activations.
//
// Interface: valid/ready streams on both sides; out_data lane s holds channel
// cf*SIMD+s. One output beat per clock once the rows it needs are in the
// buffer. Between frames the reader finishes the whole frame before the
// writer accepts the first row of the next one.
//
// The paper gives the convolutions (3x3 and 1x1, stride 1, size kept) and
// builds each layer from a library of streaming layer blocks without
// describing them; this row-buffer organisation, the zero padding, the
// element-wide input and the replay of the window per neuron fold are this
// design's own choices.
module sliding_window #(
  parameter int unsigned H    = 416,
  parameter int unsigned W    = 416,
  parameter int unsigned C    = 3,
  parameter int unsigned K    = 3,
  parameter int unsigned SIMD = 3,
  parameter int unsigned A    = 8,
  parameter int unsigned NF   = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [A-1:0]        in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [SIMD*A-1:0]   out_data
);

  localparam int unsigned P      = (K - 1) / 2;
  localparam int unsigned CF     = C / SIMD;
  localparam int unsigned SLOTS  = (K > 1) ? 4 : 2;
  localparam int unsigned SW     = $clog2(SLOTS);
  localparam int unsigned DEPTH  = SLOTS * W * CF;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned CW     = 16;   // counter width, covers 0..H

  initial begin
    assert (C % SIMD == 0) else $error("SIMD must divide C");
    assert (K % 2 == 1) else $error("K must be odd");
  end

  logic [SIMD*A-1:0] mem [DEPTH];

  // ---------------- write side ----------------
  logic [CW-1:0] ws, wcf, wx, wrow;
  logic [CW-1:0] oy, ox, nf, ky, kx, rcf;
  localparam int unsigned PW = (SIMD > 1 ? SIMD - 1 : 1) * A;
  logic [PW-1:0] pack;     // channels received so far of the current word
  logic          wr_fire;
  logic [AW-1:0] wr_addr;
  logic [SIMD*A-1:0] wr_word;

  assign in_ready = (int'(wrow) < int'(H)) && (int'(wrow) < int'(oy) + int'(SLOTS) - int'(P));
  assign wr_fire  = in_valid && in_ready;

  always_comb begin
    wr_addr = AW'(((int'(wrow[SW-1:0]) * int'(W)) + int'(wx)) * int'(CF) + int'(wcf));
    wr_word = (SIMD*A)'({in_data, pack} >> ((SIMD > 1) ? 0 : A));
  end

  always_ff @(posedge clk) begin
    if (wr_fire && int'(ws) == int'(SIMD) - 1) mem[wr_addr] <= wr_word;
  end

  // ---------------- read side ----------------
  logic          row_ready, issue, last;
  int            iy, ix;
  logic          in_img;
  logic [AW-1:0] rd_addr;

  always_comb begin
    row_ready = int'(wrow) >= ((int'(oy) + int'(P) + 1 < int'(H)) ? int'(oy) + int'(P) + 1 : int'(H));
    issue     = row_ready && (!out_valid || out_ready);
    iy        = int'(oy) + int'(ky) - int'(P);
    ix        = int'(ox) + int'(kx) - int'(P);
    in_img    = (iy >= 0) && (iy < int'(H)) && (ix >= 0) && (ix < int'(W));
    rd_addr   = in_img ? AW'(((int'(iy[SW-1:0]) * int'(W)) + ix) * int'(CF) + int'(rcf)) : '0;
    last      = (int'(oy) == int'(H) - 1) && (int'(ox) == int'(W) - 1) && (int'(nf) == int'(NF) - 1) &&
                (int'(ky) == int'(K) - 1) && (int'(kx) == int'(K) - 1) && (int'(rcf) == int'(CF) - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ws <= '0; wcf <= '0; wx <= '0; wrow <= '0; pack <= '0;
      oy <= '0; ox <= '0; nf <= '0; ky <= '0; kx <= '0; rcf <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      // writer
      if (wr_fire) begin
        pack <= wr_word[SIMD*A-1 -: PW];
        if (int'(ws) == int'(SIMD) - 1) begin
          ws <= '0;
          if (int'(wcf) == int'(CF) - 1) begin
            wcf <= '0;
            if (int'(wx) == int'(W) - 1) begin
              wx   <= '0;
              wrow <= wrow + 1'b1;
            end else wx <= wx + 1'b1;
          end else wcf <= wcf + 1'b1;
        end else ws <= ws + 1'b1;
      end
      // reader
      if (out_valid && out_ready && !issue) out_valid <= 1'b0;
      if (issue) begin
        out_valid <= 1'b1;
        out_data  <= in_img ? mem[rd_addr] : '0;
        if (last) begin
          {oy, ox, nf, ky, kx, rcf} <= '0;
          wrow <= '0;
        end else if (int'(rcf) != int'(CF) - 1) rcf <= rcf + 1'b1;
        else begin
          rcf <= '0;
          if (int'(kx) != int'(K) - 1) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (int'(ky) != int'(K) - 1) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (int'(nf) != int'(NF) - 1) nf <= nf + 1'b1;
              else begin
                nf <= '0;
                if (int'(ox) != int'(W) - 1) ox <= ox + 1'b1;
                else begin
                  ox <= '0;
                  oy <= oy + 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end

  // A stalled output beat holds its data.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
