// window_gen: streaming sliding-window generator with line buffers.
//
// Pixels arrive in raster order, at most one per clock, with a valid/ready
// handshake. WIN_H-1 line buffers of IMG_W entries hold the rows above the
// current one, and a WIN_H x WIN_W register array shifts one column per
// accepted pixel. The window is anchored at the entry (CY, CX): a centred
// 5x5 window has CY = CX = 2, a window that only looks up and left has CY at
// the bottom row. Because the anchor lags the newest pixel by LY rows and LX
// columns, the block "flushes" after the last pixel of a frame: it deasserts
// in_ready and pushes LY*IMG_W+LX padding pixels by itself, so every pixel of
// the frame leaves as an anchor exactly once and in raster order.
//
// Outputs (registered, one clock after the push that completes a window):
// out_valid, the window out_win, out_inside (which entries lie inside the
// image; the others hold stale data and must be ignored by the user), the
// anchor coordinates out_x/out_y and out_last on the frame's last pixel.
//
// This block is this design's own infrastructure: the paper describes
// windowed operations (median, support check, redundancy check, census) but
// not how the windows are buffered.
module window_gen #(
  parameter int IMG_W  = 1242,
  parameter int IMG_H  = 375,
  parameter int WIN_H  = 3,
  parameter int WIN_W  = 3,
  parameter int CY     = 1,
  parameter int CX     = 1,
  parameter int DATA_W = 9,
  localparam int XW    = $clog2(IMG_W + 1),
  localparam int YW    = $clog2(IMG_H + WIN_H + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_win    [WIN_H][WIN_W],
  output logic              out_inside [WIN_H][WIN_W],
  output logic [XW-1:0]     out_x,
  output logic [YW-1:0]     out_y,
  output logic              out_last
);

  localparam int LY      = WIN_H - 1 - CY;
  localparam int LX      = WIN_W - 1 - CX;
  localparam int FLUSH_N = LY * IMG_W + LX;
  localparam int FW      = $clog2(FLUSH_N + 2);

  logic [XW-1:0] px;
  logic [YW-1:0] py;
  logic          flushing;
  logic [FW-1:0] flush_cnt;
  logic          push, real_push, last_in;

  logic [DATA_W-1:0] col_new [WIN_H];

  assign in_ready  = !flushing;
  assign real_push = in_valid && in_ready;
  assign push      = real_push || flushing;
  assign last_in   = real_push && (px == XW'(IMG_W - 1)) && (py == YW'(IMG_H - 1));

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk) begin
    if (rst) begin
      px        <= '0;
      py        <= '0;
      flushing  <= 1'b0;
      flush_cnt <= '0;
    end else if (push) begin
      if ((last_in && FLUSH_N == 0) || (flushing && flush_cnt == FW'(1))) begin
        px       <= '0;
        py       <= '0;
        flushing <= 1'b0;
      end else begin
        if (px == XW'(IMG_W - 1)) begin
          px <= '0;
          py <= py + 1'b1;
        end else begin
          px <= px + 1'b1;
        end
        if (last_in) begin
          flushing  <= 1'b1;
          flush_cnt <= FW'(FLUSH_N);
        end else if (flushing) begin
          flush_cnt <= flush_cnt - 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------ line buffers
  generate
    if (WIN_H > 1) begin : g_lb
      logic [DATA_W-1:0] lb [WIN_H-1][IMG_W];
      always_comb begin
        for (int r = 0; r < WIN_H - 1; r++) col_new[r] = lb[WIN_H-2-r][px];
        col_new[WIN_H-1] = flushing ? '0 : in_data;
      end
      always_ff @(posedge clk) begin
        if (push) begin
          lb[0][px] <= col_new[WIN_H-1];
          for (int k = 1; k < WIN_H - 1; k++) lb[k][px] <= lb[k-1][px];
        end
      end
    end else begin : g_nolb
      assign col_new[0] = flushing ? '0 : in_data;
    end
  endgenerate

  // ---------------------------------------------------------- window shifter
  always_ff @(posedge clk) begin
    if (push) begin
      for (int r = 0; r < WIN_H; r++) begin
        for (int c = 0; c < WIN_W - 1; c++) out_win[r][c] <= out_win[r][c+1];
        out_win[r][WIN_W-1] <= col_new[r];
      end
    end
  end

  // ------------------------------------------------------- anchor position
  logic signed [YW+1:0] cy_s;
  logic [XW-1:0]        cx_n;
  always_comb begin
    if (int'(px) >= LX) begin
      cx_n = XW'(int'(px) - LX);
      cy_s = $signed({2'b00, py}) - (YW+2)'(LY);
    end else begin
      cx_n = XW'(IMG_W + int'(px) - LX);
      cy_s = $signed({2'b00, py}) - (YW+2)'(LY + 1);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= push && (cy_s >= 0);
      out_last  <= push && (cy_s == (YW+2)'(IMG_H - 1)) && (cx_n == XW'(IMG_W - 1));
      if (push) begin
        out_x <= cx_n;
        out_y <= YW'(cy_s);
      end
    end
  end

  always_comb begin
    for (int r = 0; r < WIN_H; r++)
      for (int c = 0; c < WIN_W; c++)
        out_inside[r][c] = (int'(out_x) + c - CX >= 0) && (int'(out_x) + c - CX < IMG_W) &&
                           (int'(out_y) + r - CY >= 0) && (int'(out_y) + r - CY < IMG_H);
  end

endmodule
