// tb_median_filter: self-checking test of median_filter.
//
// Two random 3x3-filtered frames go through the block, the first at one
// pixel per clock, the second with random gaps. Every output is compared with
// a median computed here by sorting the window (border pixels replaced by the
// centre, as the block specifies). The first frame also checks the timing:
// the last output must come IMG_W*IMG_H + IMG_W + 2 clock edges after the edge that takes the first
// input.
module tb_median_filter;
  import stereo_pkg::*;

  localparam int W = 12, H = 7;

  logic  clk = 0, rst = 1;
  logic  in_valid = 0, in_ready, out_valid;
  disp_t in_disp = DISP_NONE, out_disp;
  int    checks = 0, failures = 0, cyc = 0;

  median_filter #(.IMG_W(W), .IMG_H(H)) dut (.*);

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
  int    first_in, last_out, nout;

  function automatic disp_t ref_med(int x, int y);
    int v [9];
    int n = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int xx = x + dx, yy = y + dy;
        if (xx >= 0 && xx < W && yy >= 0 && yy < H) v[n] = img[yy][xx].d;
        else v[n] = img[y][x].d;
        n++;
      end
    v.sort();
    return '{valid: img[y][x].valid, d: DISP_W'(v[4])};
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    disp_t e;
    last_out = cyc;
    nout++;
    e = expq.pop_front();
    checks++;
    if (out_disp !== e) begin
      failures++;
      if (failures < 10) $display("median mismatch: got %p exp %p", out_disp, e);
    end
  end

  task automatic run_frame(bit gaps);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        img[y][x] = '{valid: ($urandom_range(9) != 0), d: DISP_W'($urandom_range(40))};
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) expq.push_back(ref_med(x, y));
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
    nout = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run_frame(0);
    checks++;
    if (last_out - first_in != W * H + W + 2) begin
      failures++;
      $display("latency: last output %0d clocks after first input, expected %0d",
               last_out - first_in, W * H + W + 2);
    end
    run_frame(1);
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 2 * W * H) begin failures++; $display("output count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
