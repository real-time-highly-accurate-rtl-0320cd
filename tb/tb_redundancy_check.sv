// tb_redundancy_check: self-checking test of redundancy_check.
//
// Random sparse support images (about 20% valid, disparities 0..5 so that
// repeats are frequent) go through the block with K = 2 and with the default
// K = 5. Each output is compared with a search made here over the window
// {(x+dx, y+dy): -K<=dx<=K, -2K<=dy<0} U {(x-dx, y): 0<dx<=K}. Both outcomes
// (kept, removed) must occur.
module tb_redundancy_check;
  import stereo_pkg::*;

  localparam int W = 24, H = 16;

  logic  clk = 0, rst = 1;
  int    checks = 0, failures = 0;
  int    kept = 0, removed = 0;

  logic  in_valid = 0, in_ready2, in_ready5, ov2, ov5;
  disp_t in_disp = DISP_NONE, od2, od5;

  redundancy_check #(.IMG_W(W), .IMG_H(H), .K(2)) dut2 (
    .clk, .rst, .in_valid, .in_ready(in_ready2), .in_disp, .out_valid(ov2), .out_disp(od2));
  redundancy_check #(.IMG_W(W), .IMG_H(H)) dut5 (
    .clk, .rst, .in_valid, .in_ready(in_ready5), .in_disp, .out_valid(ov5), .out_disp(od5));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  disp_t img [H][W];
  disp_t q2 [$], q5 [$];
  bit    v2 [$];

  function automatic disp_t ref_red(int x, int y, int k);
    if (!img[y][x].valid) return DISP_NONE;
    for (int dy = -2 * k; dy <= 0; dy++)
      for (int dx = -k; dx <= k; dx++) begin
        int xx = x + dx, yy = y + dy;
        if ((dy < 0 || dx < 0) && xx >= 0 && xx < W && yy >= 0 &&
            img[yy][xx].valid && img[yy][xx].d == img[y][x].d)
          return DISP_NONE;
      end
    return img[y][x];
  endfunction

  always @(posedge clk) begin
    if (!rst && ov2) begin
      disp_t e;
      e = q2.pop_front();
      checks++;
      if (v2.pop_front()) begin if (e.valid) kept++; else removed++; end
      if (od2 !== e) begin
        failures++;
        if (failures < 10) $display("K=2 mismatch: got %p exp %p", od2, e);
      end
    end
    if (!rst && ov5) begin
      disp_t e;
      e = q5.pop_front();
      checks++;
      if (od5 !== e) begin
        failures++;
        if (failures < 10) $display("K=5 mismatch: got %p exp %p", od5, e);
      end
    end
  end

  task automatic run_frame(bit gaps);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = '{valid: ($urandom_range(9) < 2), d: DISP_W'($urandom_range(5))};
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        q2.push_back(ref_red(x, y, 2));
        q5.push_back(ref_red(x, y, 5));
        v2.push_back(img[y][x].valid);
      end
    while (!(in_ready2 && in_ready5)) @(posedge clk);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (gaps) while ($urandom_range(2) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_disp  <= img[y][x];
        @(posedge clk);
      end
    in_valid <= 0;
    while (q2.size() != 0 || q5.size() != 0) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run_frame(0);
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
