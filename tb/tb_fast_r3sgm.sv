// tb_fast_r3sgm: self-checking test of fast_r3sgm against a frame-level model.
//
// A 20 x 6 stereo pair (8 disparities) with a random texture and a known
// shift is streamed three times: as a plain pass (prior_en low), as a
// combined-optimisation pass with random support points, plane priors and a
// grid vector that the testbench returns for the grid_x/grid_y the block asks
// for, and as a plain pass again. The model below recomputes everything on
// whole arrays: 5x5 census (outside pixels give 0 bits), Hamming costs, cost
// 63 for x - d < 0, the prior rules, the three top scanline recursions with
// P1 = 3 and P2 = 20, the first-image argmin over d <= x and the second-image
// argmin_d S(xr + d, d), smallest d on ties. Every output of both streams is
// compared in order. The test also checks the rate of one disparity per clock
// (a frame's first-image outputs on consecutive clocks) and the latency of
// the first output, 2*IMG_W + 6 edges after the first input (edge-sampled).
module tb_fast_r3sgm;
  import stereo_pkg::*;

  localparam int W = 20, H = 6, ND = 8, SHIFT = 3;
  localparam int P1 = 3, P2 = 20;

  logic       clk = 0, rst = 1;
  logic       prior_en = 0, in_valid = 0, in_ready;
  sgm_pixel_t in_pix = '0;
  logic [4:0] grid_x;
  logic [3:0] grid_y;
  logic [ND-1:0] grid_vec;
  logic       l_valid, r_valid;
  disp_t      l_disp, r_disp;
  int checks = 0, failures = 0, cyc = 0;

  fast_r3sgm #(.IMG_W(W), .IMG_H(H), .NDISP(ND)) dut (.*);

  function automatic logic [ND-1:0] gv(int x, int y);
    logic [ND-1:0] v;
    v = ND'(32'h9E37_79B9 >> ((x / 4 * 3 + y * 5) % 24));
    return v | ND'(8'h18);
  endfunction

  assign grid_vec = gv(int'(grid_x), int'(grid_y));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int    li [H][W], ri [H][W];
  disp_t sup [H][W], pri [H][W];
  int    cl [H][W], cr [H][W];
  int    cost [H][W][ND];
  int    lul [H][W][ND], lup [H][W][ND], lur [H][W][ND], s [H][W][ND];
  disp_t lq [$], rq [$];
  int    gtab [5] = '{16, 14, 10, 5, 2};

  function automatic int census(ref int img [H][W], input int x, input int y);
    int v, b;
    v = 0;
    b = 0;
    for (int dy = -2; dy <= 2; dy++)
      for (int dx = -2; dx <= 2; dx++) begin
        if (dx != 0 || dy != 0) begin
          if (x + dx >= 0 && x + dx < W && y + dy >= 0 && y + dy < H &&
              img[y + dy][x + dx] < img[y][x])
            v |= (1 << b);
          b++;
        end
      end
    return v;
  endfunction

  // one scanline step; has = 0 when the pixel has no predecessor
  function automatic void step(input int c [ND], input int prev [ND], input bit has,
                               output int l [ND]);
    int m, best;
    m = prev[0];
    for (int d = 1; d < ND; d++) if (prev[d] < m) m = prev[d];
    for (int d = 0; d < ND; d++) begin
      if (!has) begin
        l[d] = c[d];
      end else begin
        best = m + P2;
        if (prev[d] < best) best = prev[d];
        if (d > 0 && prev[d-1] + P1 < best) best = prev[d-1] + P1;
        if (d < ND - 1 && prev[d+1] + P1 < best) best = prev[d+1] + P1;
        l[d] = c[d] + best - m;
      end
    end
  endfunction

  task automatic model(bit pen);
    int c, k, bd;
    int cv [ND], l [ND], p [ND];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        cl[y][x] = census(li, x, y);
        cr[y][x] = census(ri, x, y);
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int d = 0; d < ND; d++) begin
          if (d > x) c = 63;
          else c = $countones(cl[y][x] ^ cr[y][x - d]);
          if (pen) begin
            k = d - int'(pri[y][x].d);
            if (k < 0) k = -k;
            if (pri[y][x].valid && k <= 4) c = (c > gtab[k]) ? c - gtab[k] : 0;
            if (!gv(x, y)[d]) c = 63;
            if (sup[y][x].valid) c = (d == int'(sup[y][x].d)) ? 0 : 63;
          end
          cost[y][x][d] = c;
        end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        for (int d = 0; d < ND; d++) cv[d] = cost[y][x][d];
        for (int d = 0; d < ND; d++) p[d] = (y > 0 && x > 0) ? lul[y-1][x-1][d] : 0;
        step(cv, p, y > 0 && x > 0, l);
        for (int d = 0; d < ND; d++) lul[y][x][d] = l[d];
        for (int d = 0; d < ND; d++) p[d] = (y > 0) ? lup[y-1][x][d] : 0;
        step(cv, p, y > 0, l);
        for (int d = 0; d < ND; d++) lup[y][x][d] = l[d];
        for (int d = 0; d < ND; d++) p[d] = (y > 0 && x < W - 1) ? lur[y-1][x+1][d] : 0;
        step(cv, p, y > 0 && x < W - 1, l);
        for (int d = 0; d < ND; d++) lur[y][x][d] = l[d];
        for (int d = 0; d < ND; d++) s[y][x][d] = lul[y][x][d] + lup[y][x][d] + lur[y][x][d];
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        bd = 0;
        for (int d = 1; d <= x && d < ND; d++) if (s[y][x][d] < s[y][x][bd]) bd = d;
        if (pen && sup[y][x].valid) lq.push_back(sup[y][x]);
        else lq.push_back('{valid: 1'b1, d: DISP_W'(bd)});
      end
    for (int y = 0; y < H; y++)
      for (int xr = 0; xr < W; xr++) begin
        bd = 0;
        for (int d = 1; d < ND && xr + d < W; d++) if (s[y][xr + d][d] < s[y][xr + bd][bd]) bd = d;
        rq.push_back('{valid: 1'b1, d: DISP_W'(bd)});
      end
  endtask

  int first_in, first_l, last_l, nl, nr, gaps_l;

  always @(posedge clk) if (!rst) begin
    if (l_valid) begin
      disp_t e;
      if (nl == 0) first_l = cyc;
      else if (cyc != last_l + 1) gaps_l++;
      last_l = cyc;
      nl++;
      e = lq.pop_front();
      checks++;
      if (l_disp !== e) begin
        failures++;
        if (failures < 10) $display("left #%0d: got %p exp %p", nl - 1, l_disp, e);
      end
    end
    if (r_valid) begin
      disp_t e;
      nr++;
      e = rq.pop_front();
      checks++;
      if (r_disp !== e) begin
        failures++;
        if (failures < 10) $display("right #%0d: got %p exp %p", nr - 1, r_disp, e);
      end
    end
  end

  task automatic run_frame(bit pen);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        li[y][x]  = $urandom_range(255);
        sup[y][x] = '{valid: ($urandom_range(9) == 0), d: DISP_W'($urandom_range(ND - 1))};
        pri[y][x] = '{valid: ($urandom_range(1) == 0), d: DISP_W'($urandom_range(ND - 1))};
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) ri[y][x] = (x + SHIFT < W) ? li[y][x + SHIFT] : $urandom_range(255);
    model(pen);
    nl = 0; nr = 0; gaps_l = 0;
    prior_en <= pen;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        in_valid <= 1;
        in_pix   <= '{first: 8'(li[y][x]), second: 8'(ri[y][x]),
                      support: pen ? sup[y][x] : DISP_NONE, prior: pen ? pri[y][x] : DISP_NONE};
        @(posedge clk);
        if (x == 0 && y == 0) first_in = cyc;
      end
    in_valid <= 0;
    while (lq.size() != 0 || rq.size() != 0) @(posedge clk);
    checks++;
    if (nl != W * H || nr != W * H || gaps_l != 0) begin
      failures++;
      $display("counts left %0d right %0d, gaps in left stream %0d", nl, nr, gaps_l);
    end
    checks++;
    if (first_l - first_in != 2 * W + 6) begin
      failures++;
      $display("first output %0d edges after first input, expected %0d", first_l - first_in, 2 * W + 6);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run_frame(0);
    run_frame(1);
    run_frame(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
