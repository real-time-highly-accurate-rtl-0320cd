// tb_support_check: self-checking test of support_check.
//
// Random sparse disparity frames (about 70% valid, disparities clustered so
// that some pixels are supported and some are not) are streamed through the
// block with the paper's 5x5 window, 10 supporters and difference below 5.
// Each output is compared with a count made here over the same window. The
// test also requires that both outcomes (kept and removed) occur and checks
// that the last output of a frame streamed at one pixel per clock leaves
// IMG_W*IMG_H + 2*IMG_W + 3 edges after the first input (edge-sampled).
module tb_support_check;
  import stereo_pkg::*;

  localparam int W = 16, H = 10;

  logic  clk = 0, rst = 1;
  logic  in_valid = 0, in_ready, out_valid;
  disp_t in_disp = DISP_NONE, out_disp;
  int    checks = 0, failures = 0, cyc = 0;
  int    kept = 0, removed = 0;

  support_check #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  disp_t img [H][W];
  disp_t expq [$];
  bit    img_valid_q [$];
  int    first_in, last_out;

  function automatic disp_t ref_sup(int x, int y);
    int n = 0;
    if (!img[y][x].valid) return DISP_NONE;
    for (int dy = -2; dy <= 2; dy++)
      for (int dx = -2; dx <= 2; dx++) begin
        int xx = x + dx, yy = y + dy;
        if ((dx != 0 || dy != 0) && xx >= 0 && xx < W && yy >= 0 && yy < H &&
            img[yy][xx].valid) begin
          int diff = int'(img[yy][xx].d) - int'(img[y][x].d);
          if (diff < 0) diff = -diff;
          if (diff < 5) n++;
        end
      end
    return (n >= 10) ? img[y][x] : DISP_NONE;
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    disp_t e;
    last_out = cyc;
    e = expq.pop_front();
    checks++;
    if (img_valid_q.pop_front()) begin
      if (e.valid) kept++; else removed++;
    end
    if (out_disp !== e) begin
      failures++;
      if (failures < 10) $display("support mismatch at output %0d: got %p exp %p", checks, out_disp, e);
    end
  end

  task automatic run_frame(bit gaps);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = '{valid: ($urandom_range(9) < 7),
                      d: DISP_W'((x < W / 2 ? 20 : 60) + $urandom_range(y < H / 2 ? 3 : 12))};
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        expq.push_back(ref_sup(x, y));
        img_valid_q.push_back(img[y][x].valid);
      end
    while (!in_ready) @(posedge clk);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (gaps) while ($urandom_range(2) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_disp  <= img[y][x];
        @(posedge clk);
        if (x == 0 && y == 0) first_in = cyc;
      end
    in_valid <= 0;
    while (expq.size() != 0) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run_frame(0);
    checks++;
    if (last_out - first_in != W * H + 2 * W + 3) begin
      failures++;
      $display("latency %0d, expected %0d", last_out - first_in, W * H + 2 * W + 3);
    end
    run_frame(1);
    checks++;
    if (kept == 0 || removed == 0) begin
      failures++;
      $display("kept %0d removed %0d: both outcomes must occur", kept, removed);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
