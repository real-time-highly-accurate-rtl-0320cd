// tb_stereo_accel_top_full: the end-to-end run of tb_stereo_accel_top with the
// accelerator at its default size (1242 x 375 pixels, 128 disparities,
// 50 x 50 grid cells). The sequence and the checks are the same:
//
// The testbench plays the host CPU and the DMA engines. The right image is
// the left one shifted by SHIFT pixels, so the true disparity is SHIFT
// wherever it is defined. The sequence is the pipeline of the design:
//   1. MODE_SGM on the raster pair            -> left disparity map
//   2. MODE_SGM on the pair rotated by 180 degrees (right image first)
//                                             -> rotated right map, which the
//                                                "CPU" rotates back
//   3. MODE_PRIOR on both maps                -> support image, anchors, grid
//   4. a crude CPU stand-in turns the anchors into priors (each pixel takes
//      the last anchor disparity met in raster order; the real system uses a
//      Delaunay triangulation and plane interpolation)
//   5. MODE_DENSE with supports and priors    -> dense map
// Checks: every stream delivers IMG_W*IMG_H pixels; the kept disparities of
// the sparse maps and the support points are mostly SHIFT; anchors are a
// subset of the support points; the dense map is valid everywhere and mostly
// SHIFT. Each mechanism must occur at least once: L/R rejection, support
// rejection, redundancy removal, back-pressure during a flush, grid-vector
// completion, a support point and a prior fed to the dense pass, and each of
// the three modes.
module tb_stereo_accel_top_full;
  import stereo_pkg::*;

  localparam int W = 1242, H = 375, ND = 128, CELL = 50, SHIFT = 5;
  localparam longint WATCHDOG = 8 * W * H + 200000;

  logic       clk = 0, rst = 1;
  mode_e      mode = MODE_SGM;
  logic       pix_valid = 0, pix_ready;
  sgm_pixel_t pix = '0;
  logic       dm_valid = 0;
  disp_t      dm_left = DISP_NONE, dm_right = DISP_NONE;
  logic       disp_valid, sup_valid, anc_valid, grid_done;
  disp_t      disp_out, sup_out, anc_out;

  stereo_accel_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // images and maps
  logic [7:0] li [H][W], ri [H][W];
  disp_t      lmap [H][W], rmap [H][W], supm [H][W], ancm [H][W], dense [H][W], prior [H][W];

  // collectors
  disp_t dq [$], sq [$], aq [$];
  int    n_grid_done = 0, n_backpressure = 0;

  always @(posedge clk) if (!rst) begin
    if (disp_valid) dq.push_back(disp_out);
    if (sup_valid)  sq.push_back(sup_out);
    if (anc_valid)  aq.push_back(anc_out);
    if (grid_done)  n_grid_done++;
    if (pix_valid && !pix_ready) n_backpressure++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic settle();
    repeat (4 * W + 64) @(posedge clk);
  endtask

  // stream a pair (and, for MODE_DENSE, supports and priors) through pix_*
  task automatic stream_pair(bit rotated, bit dense_mode);
    int sent;
    sent = 0;
    while (sent < W * H) begin
      int y, x;
      y = sent / W;
      x = sent % W;
      pix_valid <= 1;
      if (!rotated)
        pix <= '{first: li[y][x], second: ri[y][x],
                 support: dense_mode ? supm[y][x] : DISP_NONE,
                 prior:   dense_mode ? prior[y][x] : DISP_NONE};
      else
        pix <= '{first: ri[H-1-y][W-1-x], second: li[H-1-y][W-1-x],
                 support: DISP_NONE, prior: DISP_NONE};
      @(posedge clk);
      if (pix_ready) sent++;
    end
    pix_valid <= 0;
    // keep offering the next frame's first pixel is not needed; but show
    // back-pressure once: hold valid while the datapath flushes
    if (n_backpressure == 0) begin
      pix_valid <= 1;
      pix <= '0;
      pix.first <= 8'd1;
      @(posedge clk);
      while (pix_ready) @(posedge clk);
      pix_valid <= 0;
    end
  endtask

  int d_ok, d_valid, n_lr_rej, n_sup_rej, n_red_rej, n_sup, n_anc, n_pri;

  initial begin
    // textured left image; right image = left shifted by SHIFT
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) li[y][x] = 8'($urandom_range(255));
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) ri[y][x] = (x + SHIFT < W) ? li[y][x + SHIFT] : 8'($urandom_range(255));

    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);

    // ---- 1. raster pass
    mode <= MODE_SGM;
    @(posedge clk);
    stream_pair(0, 0);
    wait (dq.size() == W * H);
    for (int i = 0; i < W * H; i++) lmap[i / W][i % W] = dq.pop_front();
    settle();

    // ---- 2. reverse-raster pass, then the CPU flips the result
    stream_pair(1, 0);
    wait (dq.size() == W * H);
    for (int i = 0; i < W * H; i++) rmap[H - 1 - i / W][W - 1 - i % W] = dq.pop_front();
    settle();
    check(n_backpressure > 0, "back-pressure during a flush was never seen");

    d_ok = 0; d_valid = 0; n_lr_rej = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (lmap[y][x].valid) begin
          d_valid++;
          if (lmap[y][x].d == SHIFT) d_ok++;
        end else n_lr_rej++;
      end
    $display("raster pass: %0d of %0d pixels kept, %0d of them at the true disparity",
             d_valid, W * H, d_ok);
    check(d_valid > W * H / 2, "raster pass kept too few pixels");
    check(d_ok * 10 >= d_valid * 9, "raster pass disparities mostly wrong");
    check(n_lr_rej > 0, "L/R check never rejected a pixel");

    // ---- 3. prior generation
    mode <= MODE_PRIOR;
    @(posedge clk);
    for (int i = 0; i < W * H; i++) begin
      dm_valid <= 1;
      dm_left  <= lmap[i / W][i % W];
      dm_right <= rmap[i / W][i % W];
      @(posedge clk);
    end
    dm_valid <= 0;
    wait (sq.size() == W * H && aq.size() == W * H);
    settle();
    check(n_grid_done == 1, "grid vectors were not completed exactly once");
    n_sup = 0; n_anc = 0; n_sup_rej = 0; n_red_rej = 0; d_ok = 0;
    for (int i = 0; i < W * H; i++) begin
      int y, x;
      y = i / W;
      x = i % W;
      supm[y][x] = sq.pop_front();
      ancm[y][x] = aq.pop_front();
      if (supm[y][x].valid) begin
        n_sup++;
        if (supm[y][x].d == SHIFT) d_ok++;
        if (!ancm[y][x].valid) n_red_rej++;
      end
      if (lmap[y][x].valid && !supm[y][x].valid) n_sup_rej++;
      if (ancm[y][x].valid) begin
        n_anc++;
        checks++;
        if (ancm[y][x] != supm[y][x]) begin
          failures++;
          $display("anchor at (%0d,%0d) is not a support point", x, y);
        end
      end
    end
    $display("support points %0d, anchors %0d", n_sup, n_anc);
    check(n_sup > 0 && d_ok * 10 >= n_sup * 9, "support points missing or wrong");
    check(n_sup_rej > 0, "support check never removed a pixel");
    check(n_red_rej > 0, "redundancy check never removed a support point");
    check(n_anc > 0, "no anchors");

    // ---- 4. CPU stand-in for triangulation and interpolation
    n_pri = 0;
    begin
      disp_t last;
      last = DISP_NONE;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          if (ancm[y][x].valid) last = ancm[y][x];
          prior[y][x] = last;
          if (last.valid) n_pri++;
        end
    end
    check(n_pri > 0, "no priors fed to the dense pass");

    // ---- 5. combined optimisation
    mode <= MODE_DENSE;
    @(posedge clk);
    stream_pair(0, 1);
    wait (dq.size() == W * H);
    d_ok = 0; d_valid = 0;
    for (int i = 0; i < W * H; i++) begin
      dense[i / W][i % W] = dq.pop_front();
      if (dense[i / W][i % W].valid) d_valid++;
      if (i % W >= SHIFT + 2 && dense[i / W][i % W].d == SHIFT) d_ok++;
    end
    $display("dense pass: %0d valid, %0d of %0d interior pixels at the true disparity",
             d_valid, d_ok, (W - SHIFT - 2) * H);
    check(d_valid == W * H, "dense map has invalid pixels");
    check(d_ok * 10 >= (W - SHIFT - 2) * H * 9, "dense map mostly wrong");
    settle();
    mode <= MODE_SGM;
    repeat (4) @(posedge clk);
    check(dq.size() == 0 && sq.size() == 0 && aq.size() == 0, "stray outputs");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
