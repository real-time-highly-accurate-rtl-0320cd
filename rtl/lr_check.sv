// lr_check: left-right consistency check of two disparity images.
//
// Two disparity streams arrive in raster order, each at up to one pixel per
// clock and each with its own valid: the left-referenced map and the
// right-referenced map (the right one may lag, as it does behind Fast R3SGM).
// Each stream is written into a two-row ping-pong buffer. Once row y of both
// has arrived, the row is swept out at one pixel per clock: the left
// disparity dL at x is kept if the right map at x - dL is valid and differs
// from dL by at most THRESH; otherwise the output is invalid. Output order is
// raster, the latency is one row after the later stream completes the row.
// The sweep needs no input, so the block has no flush and no back-pressure;
// a stream must not run more than one row ahead of the sweep (asserted).
//
// The paper names the check and where it is used (inside each Fast R3SGM
// pass and as the consolidating check between the raster and the flipped
// reverse-raster results); the row buffering and THRESH = 1 are this
// design's choice.
module lr_check
  import stereo_pkg::*;
#(
  parameter int IMG_W  = 1242,
  parameter int IMG_H  = 375,
  parameter int THRESH = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  l_valid,
  input  disp_t l_disp,
  input  logic  r_valid,
  input  disp_t r_disp,
  output logic  out_valid,
  output disp_t out_disp,
  output logic  out_last
);

  localparam int XW = $clog2(IMG_W + 1);
  localparam int YW = $clog2(IMG_H + 1);

  disp_t lmem [2][IMG_W];
  disp_t rmem [2][IMG_W];

  logic [XW-1:0] lx, rx, sx;
  logic [15:0]   lrows, rrows, srow;   // free-running row counters
  logic [YW-1:0] sy;                   // row of the sweep inside the frame
  logic          sweeping;

  logic  l_ahead, r_ahead;
  disp_t lval, rval;
  logic  keep;

  assign l_ahead = (lrows != srow);
  assign r_ahead = (rrows != srow);

  always_ff @(posedge clk) begin
    if (rst) begin
      lx <= '0; rx <= '0; lrows <= '0; rrows <= '0;
    end else begin
      if (l_valid) begin
        lmem[lrows[0]][lx] <= l_disp;
        if (lx == XW'(IMG_W - 1)) begin lx <= '0; lrows <= lrows + 1'b1; end
        else lx <= lx + 1'b1;
      end
      if (r_valid) begin
        rmem[rrows[0]][rx] <= r_disp;
        if (rx == XW'(IMG_W - 1)) begin rx <= '0; rrows <= rrows + 1'b1; end
        else rx <= rx + 1'b1;
      end
    end
  end

  always_comb begin
    lval = lmem[srow[0]][sx];
    rval = DISP_NONE;
    if (int'(sx) >= int'(lval.d)) rval = rmem[srow[0]][XW'(int'(sx) - int'(lval.d))];
    keep = lval.valid && rval.valid && absdiff(lval.d, rval.d) <= (DISP_W+1)'(THRESH);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sweeping  <= 1'b0;
      sx        <= '0;
      sy        <= '0;
      srow      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_disp  <= DISP_NONE;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (!sweeping) begin
        if (l_ahead && r_ahead) sweeping <= 1'b1;
      end else begin
        out_valid <= 1'b1;
        out_disp  <= keep ? lval : DISP_NONE;
        if (sx == XW'(IMG_W - 1)) begin
          out_last <= (sy == YW'(IMG_H - 1));
          sx       <= '0;
          srow     <= srow + 1'b1;
          sy       <= (sy == YW'(IMG_H - 1)) ? '0 : sy + 1'b1;
          sweeping <= (lrows != srow + 1'b1) && (rrows != srow + 1'b1);
        end else begin
          sx <= sx + 1'b1;
        end
      end
    end
  end

  // A stream may fill the other bank, but must not reach the bank being swept
  // ahead of the sweep position.
  always_ff @(posedge clk) begin
    if (!rst && l_valid)
      assert (16'(lrows - srow) < 16'd2 || (16'(lrows - srow) == 16'd2 && sweeping && lx < sx))
        else $error("lr_check: left stream overran the sweep");
    if (!rst && r_valid)
      assert (16'(rrows - srow) < 16'd2 || (16'(rrows - srow) == 16'd2 && sweeping && rx < sx))
        else $error("lr_check: right stream overran the sweep");
  end

endmodule
