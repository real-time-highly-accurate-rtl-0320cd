// support_check: keeps only disparities that their neighbourhood supports.
//
// For each pixel of a sparse disparity map (raster order, up to one per
// clock) a WIN x WIN window centred on it is examined. The pixel keeps its
// disparity only if it is valid and at least MIN_SUPPORT other valid pixels
// in the window differ from it by less than MAX_DIFF; otherwise the output is
// marked invalid. The result is the support point image. Output order and
// rate equal the input's; latency is IMG_W*(WIN-1)/2+(WIN-1)/2+2 clocks, and
// the block flushes by itself after a frame (in_ready low meanwhile).
//
// The rule and the example numbers (at least 10 pixels in a 5x5 window that
// differ by less than 5) are the paper's; the streaming structure and the
// treatment of the image border (outside pixels never support) are this
// design's choice.
module support_check
  import stereo_pkg::*;
#(
  parameter int IMG_W       = 1242,
  parameter int IMG_H       = 375,
  parameter int WIN         = 5,
  parameter int MIN_SUPPORT = 10,
  parameter int MAX_DIFF    = 5
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  output logic  in_ready,
  input  disp_t in_disp,
  output logic  out_valid,
  output disp_t out_disp
);

  localparam int C  = (WIN - 1) / 2;
  localparam int XW = $clog2(IMG_W + 1);
  localparam int YW = $clog2(IMG_H + WIN + 1);
  localparam int CW = $clog2(WIN * WIN + 1);

  logic              w_valid, w_last;
  logic [DISP_W:0]   w_win    [WIN][WIN];
  logic              w_inside [WIN][WIN];
  logic [XW-1:0]     w_x;
  logic [YW-1:0]     w_y;

  window_gen #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN_H(WIN), .WIN_W(WIN),
    .CY(C), .CX(C), .DATA_W(DISP_W + 1)
  ) u_win (
    .clk, .rst,
    .in_valid, .in_ready, .in_data(in_disp),
    .out_valid(w_valid), .out_win(w_win), .out_inside(w_inside),
    .out_x(w_x), .out_y(w_y), .out_last(w_last)
  );

  disp_t         centre;
  logic [CW-1:0] support;

  always_comb begin
    centre  = disp_t'(w_win[C][C]);
    support = '0;
    for (int r = 0; r < WIN; r++)
      for (int c = 0; c < WIN; c++) begin
        disp_t e;
        e = disp_t'(w_win[r][c]);
        if (!(r == C && c == C) && w_inside[r][c] && e.valid &&
            absdiff(e.d, centre.d) < (DISP_W+1)'(MAX_DIFF))
          support = support + 1'b1;
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_disp  <= DISP_NONE;
    end else begin
      out_valid <= w_valid;
      if (w_valid)
        out_disp <= (centre.valid && support >= CW'(MIN_SUPPORT)) ? centre : DISP_NONE;
    end
  end

  always_ff @(posedge clk)
    if (!rst && in_valid)
      assert (in_ready) else $error("support_check: input while flushing");

endmodule
