// stereo_accel_top: programmable-logic side of the hybrid stereo pipeline.
//
// One datapath, reused in three modes selected by `mode` (change it only
// between frames, when every stream has drained):
//
//   MODE_SGM    Stream a stereo pair in through pix_*. fast_r3sgm produces a
//               first-image and a second-image disparity map, each goes
//               through its own median_filter, and lr_check keeps the
//               consistent disparities of the first image. Result on disp_*.
//               Run once on the raster pair (left, right) and once on the
//               reverse-raster pair (right and left images rotated by 180
//               degrees, right first), giving a left map and a rotated right map.
//   MODE_PRIOR  Stream the left map and the un-rotated right map (the rotation
//               is undone by the host CPU) in through dm_*, pixel-aligned.
//               The same lr_check does the consolidating check; support_check
//               turns the result into the support point image (out on sup_*),
//               redundancy_check thins it into sparse anchors (out on anc_*,
//               for the CPU's triangulation and interpolation) and
//               grid_vector_extraction stores one disparity vector per cell;
//               grid_done pulses when the last cell is stored.
//   MODE_DENSE  Stream the pair again through pix_*, now with each pixel's
//               support point and plane prior filled in. fast_r3sgm modifies
//               the cost vectors with them and with the stored grid vectors,
//               and the first-image result, median filtered, is the dense
//               disparity map on disp_*.
//
// All streams are raster order, one pixel per clock at most. Only pix_* has
// back-pressure (pix_ready low while the datapath flushes at a frame's end);
// dm_* must be driven without gaps inside a row pair and needs none.
// The block set and their order follow the paper's pipeline figure; running
// the consolidating check on the same lr_check instance and passing the
// support image through memory between the modes are this design's choices.
module stereo_accel_top
  import stereo_pkg::*;
#(
  parameter int IMG_W     = 1242,
  parameter int IMG_H     = 375,
  parameter int NDISP     = 128,
  parameter int GRID_CELL = 50
) (
  input  logic       clk,
  input  logic       rst,
  input  mode_e      mode,
  // stereo pair (+ priors in MODE_DENSE)
  input  logic       pix_valid,
  output logic       pix_ready,
  input  sgm_pixel_t pix,
  // left and flipped right disparity maps (MODE_PRIOR)
  input  logic       dm_valid,
  input  disp_t      dm_left,
  input  disp_t      dm_right,
  // disparity result (MODE_SGM: L/R-checked map, MODE_DENSE: dense map)
  output logic       disp_valid,
  output disp_t      disp_out,
  // support point image and sparse anchors (MODE_PRIOR)
  output logic       sup_valid,
  output disp_t      sup_out,
  output logic       anc_valid,
  output disp_t      anc_out,
  output logic       grid_done
);

  localparam int XW  = $clog2(IMG_W + 1);
  localparam int YWS = $clog2(IMG_H + 5 + 1);
  localparam int YW  = $clog2(IMG_H + 1);

  logic              sgm_ready, sgm_l_valid, sgm_r_valid;
  disp_t             sgm_l_disp, sgm_r_disp;
  logic [XW-1:0]     grid_x;
  logic [YWS-1:0]    grid_y;
  logic [NDISP-1:0]  grid_vec;

  logic              ml_ready, ml_valid, mr_ready, mr_valid;
  disp_t             ml_disp, mr_disp;

  logic              lr_l_valid, lr_r_valid, lr_valid, lr_last;
  disp_t             lr_l_disp, lr_r_disp, lr_disp;

  logic              sc_ready, rc_ready;

  assign pix_ready = sgm_ready && (mode != MODE_PRIOR);

  fast_r3sgm #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NDISP(NDISP)) u_sgm (
    .clk, .rst,
    .prior_en(mode == MODE_DENSE),
    .in_valid(pix_valid && mode != MODE_PRIOR), .in_ready(sgm_ready), .in_pix(pix),
    .grid_x, .grid_y, .grid_vec,
    .l_valid(sgm_l_valid), .l_disp(sgm_l_disp),
    .r_valid(sgm_r_valid), .r_disp(sgm_r_disp)
  );

  median_filter #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_med_l (
    .clk, .rst,
    .in_valid(sgm_l_valid), .in_ready(ml_ready), .in_disp(sgm_l_disp),
    .out_valid(ml_valid), .out_disp(ml_disp)
  );

  median_filter #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_med_r (
    .clk, .rst,
    .in_valid(sgm_r_valid && mode == MODE_SGM), .in_ready(mr_ready), .in_disp(sgm_r_disp),
    .out_valid(mr_valid), .out_disp(mr_disp)
  );

  always_comb begin
    if (mode == MODE_PRIOR) begin
      lr_l_valid = dm_valid;
      lr_l_disp  = dm_left;
      lr_r_valid = dm_valid;
      lr_r_disp  = dm_right;
    end else begin
      lr_l_valid = ml_valid && mode == MODE_SGM;
      lr_l_disp  = ml_disp;
      lr_r_valid = mr_valid;
      lr_r_disp  = mr_disp;
    end
  end

  lr_check #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_lr (
    .clk, .rst,
    .l_valid(lr_l_valid), .l_disp(lr_l_disp),
    .r_valid(lr_r_valid), .r_disp(lr_r_disp),
    .out_valid(lr_valid), .out_disp(lr_disp), .out_last(lr_last)
  );

  always_comb begin
    if (mode == MODE_DENSE) begin
      disp_valid = ml_valid;
      disp_out   = ml_disp;
    end else begin
      disp_valid = lr_valid && mode == MODE_SGM;
      disp_out   = lr_disp;
    end
  end

  support_check #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_sup (
    .clk, .rst,
    .in_valid(lr_valid && mode == MODE_PRIOR), .in_ready(sc_ready), .in_disp(lr_disp),
    .out_valid(sup_valid), .out_disp(sup_out)
  );

  redundancy_check #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_red (
    .clk, .rst,
    .in_valid(sup_valid), .in_ready(rc_ready), .in_disp(sup_out),
    .out_valid(anc_valid), .out_disp(anc_out)
  );

  grid_vector_extraction #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .CELL(GRID_CELL), .NDISP(NDISP)
  ) u_grid (
    .clk, .rst,
    .in_valid(sup_valid), .in_disp(sup_out), .frame_done(grid_done),
    .rd_x(grid_x), .rd_y(YW'(grid_y)), .rd_vec(grid_vec)
  );

  // The mode may only change while the datapath is idle.
  logic prev_mode_valid;
  mode_e prev_mode;
  always_ff @(posedge clk) begin
    if (rst) begin
      prev_mode_valid <= 1'b0;
      prev_mode       <= MODE_SGM;
    end else begin
      prev_mode_valid <= 1'b1;
      prev_mode       <= mode;
      if (prev_mode_valid && mode != prev_mode)
        assert (!sgm_l_valid && !sgm_r_valid && !ml_valid && !mr_valid && !lr_valid &&
                !sup_valid && !anc_valid && sgm_ready && ml_ready && mr_ready &&
                sc_ready && rc_ready)
          else $error("stereo_accel_top: mode changed while the datapath was busy");
    end
  end

endmodule
