// grid_vector_extraction: per-cell sets of viable disparities.
//
// The support point image streams in raster order, up to one pixel per clock.
// The image is divided into CELL x CELL cells; for every valid support point
// with disparity d, bits d-1, d and d+1 of its cell's NDISP-bit vector are set.
// One accumulator per cell column collects the current band of cells; when a
// cell's last pixel arrives its vector is written to the grid memory (one
// write per clock) and the accumulator is cleared. frame_done pulses when the
// last cell of the frame has been written.
//
// The read port is combinational: given a pixel position (rd_x, rd_y) it
// returns the vector of the cell holding it; the combined optimisation uses
// it to mask the pixel's cost vector. The memory is a single buffer: a new
// support image overwrites the vectors band by band.
//
// Cell size (50 x 50) and the +-1 neighbourhood follow the paper; vectors
// hold only disparities found inside the cell itself, as the paper states.
module grid_vector_extraction
  import stereo_pkg::*;
#(
  parameter int IMG_W = 1242,
  parameter int IMG_H = 375,
  parameter int CELL  = 50,
  parameter int NDISP = 128,
  localparam int XW   = $clog2(IMG_W + 1),
  localparam int YW   = $clog2(IMG_H + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  disp_t            in_disp,
  output logic             frame_done,
  input  logic [XW-1:0]    rd_x,
  input  logic [YW-1:0]    rd_y,
  output logic [NDISP-1:0] rd_vec
);

  localparam int NCX = (IMG_W + CELL - 1) / CELL;
  localparam int NCY = (IMG_H + CELL - 1) / CELL;
  localparam int CW  = $clog2(CELL + 1);
  localparam int NXW = (NCX > 1) ? $clog2(NCX) : 1;
  localparam int NYW = (NCY > 1) ? $clog2(NCY) : 1;

  logic [NDISP-1:0] gmem [NCY][NCX];
  logic [NDISP-1:0] acc  [NCX];

  logic [XW-1:0]  x;
  logic [YW-1:0]  y;
  logic [CW-1:0]  xin, yin;
  logic [NXW-1:0] cx;
  logic [NYW-1:0] cyr;

  logic [NDISP-1:0] bits, merged;
  logic             last_col, last_row;

  always_comb begin
    bits = '0;
    if (in_disp.valid)
      for (int d = 0; d < NDISP; d++)
        if (int'(in_disp.d) == d || int'(in_disp.d) == d + 1 || int'(in_disp.d) + 1 == d)
          bits[d] = 1'b1;
    merged   = acc[cx] | bits;
    last_col = (xin == CW'(CELL - 1)) || (x == XW'(IMG_W - 1));
    last_row = (yin == CW'(CELL - 1)) || (y == YW'(IMG_H - 1));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x <= '0; y <= '0; xin <= '0; yin <= '0; cx <= '0; cyr <= '0;
      frame_done <= 1'b0;
      for (int i = 0; i < NCX; i++) acc[i] <= '0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid) begin
        if (last_row && last_col) begin
          gmem[cyr][cx] <= merged;
          acc[cx]       <= '0;
        end else begin
          acc[cx]       <= merged;
        end
        if (x == XW'(IMG_W - 1)) begin
          x <= '0; xin <= '0; cx <= '0;
          if (y == YW'(IMG_H - 1)) begin
            y <= '0; yin <= '0; cyr <= '0;
            frame_done <= 1'b1;
          end else begin
            y <= y + 1'b1;
            if (yin == CW'(CELL - 1)) begin
              yin <= '0; cyr <= cyr + 1'b1;
            end else begin
              yin <= yin + 1'b1;
            end
          end
        end else begin
          x <= x + 1'b1;
          if (xin == CW'(CELL - 1)) begin
            xin <= '0; cx <= cx + 1'b1;
          end else begin
            xin <= xin + 1'b1;
          end
        end
      end
    end
  end

  assign rd_vec = gmem[NYW'(rd_y / YW'(CELL))][NXW'(rd_x / XW'(CELL))];

endmodule
