// redundancy_check: thins the support point image into sparse anchors.
//
// Support points arrive in raster order, up to one per clock. A valid point
// at (x,y) is invalidated when a valid support point with the same disparity
// lies in the window behind and above it:
//   { (x+dx, y+dy) : -K <= dx <= K, -2K <= dy < 0 }  U  { (x-dx, y) : 0 < dx <= K }.
// The window is held by a (2K+1) x (2K+1) register array fed by 2K line
// buffers and anchored on its bottom row, so the output lags the input by K
// pixels plus two clocks; the block flushes those K pixels by itself after a
// frame. Output order and rate equal the input's.
//
// The window shape follows the paper. Two points are this design's reading:
// "already been seen" is taken as an exact match of disparity, and the
// comparison is made against the incoming support points (not against the
// anchors already kept). K = 5 is the value the paper quotes for the earlier
// row/column window; it gives no separate value for the larger window.
module redundancy_check
  import stereo_pkg::*;
#(
  parameter int IMG_W = 1242,
  parameter int IMG_H = 375,
  parameter int K     = 5
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  output logic  in_ready,
  input  disp_t in_disp,
  output logic  out_valid,
  output disp_t out_disp
);

  localparam int WH = 2 * K + 1;
  localparam int WW = 2 * K + 1;
  localparam int XW = $clog2(IMG_W + 1);
  localparam int YW = $clog2(IMG_H + WH + 1);

  logic              w_valid, w_last;
  logic [DISP_W:0]   w_win    [WH][WW];
  logic              w_inside [WH][WW];
  logic [XW-1:0]     w_x;
  logic [YW-1:0]     w_y;

  window_gen #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN_H(WH), .WIN_W(WW),
    .CY(2 * K), .CX(K), .DATA_W(DISP_W + 1)
  ) u_win (
    .clk, .rst,
    .in_valid, .in_ready, .in_data(in_disp),
    .out_valid(w_valid), .out_win(w_win), .out_inside(w_inside),
    .out_x(w_x), .out_y(w_y), .out_last(w_last)
  );

  disp_t centre;
  logic  seen;

  always_comb begin
    centre = disp_t'(w_win[2*K][K]);
    seen   = 1'b0;
    for (int r = 0; r < WH; r++)
      for (int c = 0; c < WW; c++) begin
        disp_t e;
        e = disp_t'(w_win[r][c]);
        // rows above: the full width; own row: only the K pixels to the left
        if ((r < 2 * K || c < K) && w_inside[r][c] && e.valid && e.d == centre.d)
          seen = 1'b1;
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_disp  <= DISP_NONE;
    end else begin
      out_valid <= w_valid;
      if (w_valid) out_disp <= (centre.valid && !seen) ? centre : DISP_NONE;
    end
  end

  always_ff @(posedge clk)
    if (!rst && in_valid)
      assert (in_ready) else $error("redundancy_check: input while flushing");

endmodule
