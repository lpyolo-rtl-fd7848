// maxpool: streaming 2x2 max pooling of an unsigned feature map.
//
// Input and output are streams of A-bit elements in HWC order, one element
// per beat. Incoming rows are written into a buffer of four image rows; the
// reader takes, for each output element, the maximum of the four elements of
// its 2x2 window (four reads of the buffer in one clock) once both input rows
// of the window are present, while the writer fills the next rows.
//
//   S = 2 : stride 2, H x W -> H/2 x W/2 (pooling layers 1 to 5).
//   S = 1 : stride 1, H x W -> H x W. The window of output (y, x) is
//           (y..y+1, x..x+1); positions beyond the right or bottom edge are
//           left out of the maximum (pooling layer 6, 13x13 -> 13x13).
//
// Because activations are unsigned, leaving a position out is the same as
// reading it as zero, which is what the hardware does. One output per clock
// at most; the reader finishes a frame before the writer starts the next.
//
// The layer sizes follow the network table of the paper. The table gives the
// sixth pooling layer as 2x2 with stride 2 but with equal input and output
// size; this design follows the sizes and uses stride 1 with the padding
// TinyYOLOv3 uses there. The buffer organisation is this design's own.
module maxpool #(
  parameter int unsigned H = 416,
  parameter int unsigned W = 416,
  parameter int unsigned C = 8,
  parameter int unsigned S = 2,
  parameter int unsigned A = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [A-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [A-1:0] out_data
);

  localparam int unsigned HO    = (S == 2) ? H / 2 : H;
  localparam int unsigned WO    = (S == 2) ? W / 2 : W;
  localparam int unsigned SLOTS = 4;
  localparam int unsigned DEPTH = SLOTS * W * C;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned CW    = 16;

  initial assert (S == 1 || S == 2) else $error("S must be 1 or 2");

  logic [A-1:0] mem [DEPTH];

  logic [CW-1:0] wx, wc, wrow;
  logic [CW-1:0] oy, ox, oc;
  logic          wr_fire, row_ready, issue, last;
  logic [AW-1:0] wr_addr;
  int            y0, x0;
  logic [A-1:0]  win [4];
  logic [A-1:0]  mx;

  assign in_ready = (int'(wrow) < int'(H)) && (int'(wrow) < int'(oy) * int'(S) + int'(SLOTS));
  assign wr_fire  = in_valid && in_ready;
  assign wr_addr  = AW'(((int'(wrow[1:0]) * int'(W)) + int'(wx)) * int'(C) + int'(wc));

  always_ff @(posedge clk) begin
    if (wr_fire) mem[wr_addr] <= in_data;
  end

  always_comb begin
    y0 = int'(oy) * int'(S);
    x0 = int'(ox) * int'(S);
    row_ready = int'(wrow) >= ((y0 + 2 < int'(H)) ? y0 + 2 : int'(H));
    issue     = row_ready && (!out_valid || out_ready);
    last      = (int'(oy) == int'(HO) - 1) && (int'(ox) == int'(WO) - 1) && (int'(oc) == int'(C) - 1);
    mx        = '0;
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++) begin
        if (y0 + dy < int'(H) && x0 + dx < int'(W))
          win[dy*2+dx] = mem[AW'(((((y0 + dy) % int'(SLOTS)) * int'(W)) + x0 + dx) * int'(C) + int'(oc))];
        else
          win[dy*2+dx] = '0;
        if (win[dy*2+dx] > mx) mx = win[dy*2+dx];
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wx <= '0; wc <= '0; wrow <= '0;
      oy <= '0; ox <= '0; oc <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (wr_fire) begin
        if (int'(wc) == int'(C) - 1) begin
          wc <= '0;
          if (int'(wx) == int'(W) - 1) begin
            wx   <= '0;
            wrow <= wrow + 1'b1;
          end else wx <= wx + 1'b1;
        end else wc <= wc + 1'b1;
      end
      if (out_valid && out_ready && !issue) out_valid <= 1'b0;
      if (issue) begin
        out_valid <= 1'b1;
        out_data  <= mx;
        if (last) begin
          {oy, ox, oc} <= '0;
          wrow <= '0;
        end else if (int'(oc) != int'(C) - 1) oc <= oc + 1'b1;
        else begin
          oc <= '0;
          if (int'(ox) != int'(WO) - 1) ox <= ox + 1'b1;
          else begin
            ox <= '0;
            oy <= oy + 1'b1;
          end
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
