// tb_lr_check: self-checking test of lr_check.
//
// Three random frames of left and right disparity maps are streamed, the
// right stream repeating the left stream's valid pattern a few clocks later
// and, in the last frame, with random gaps. Right disparities are built from the left ones so that
// about half the pixels are consistent. Each output is compared with the
// check |dL(x) - dR(x - dL(x))| <= 1 made here. Both outcomes must occur, and
// with gap-free streams a row must leave within IMG_W + 2 edges of the later
// stream finishing it.
module tb_lr_check;
  import stereo_pkg::*;

  localparam int W = 20, H = 5, LAG = 6;

  logic  clk = 0, rst = 1;
  logic  l_valid = 0, r_valid = 0, out_valid, out_last;
  disp_t l_disp = DISP_NONE, r_disp = DISP_NONE, out_disp;
  int    checks = 0, failures = 0, cyc = 0;
  int    kept = 0, rejected = 0, nlast = 0;

  lr_check #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  disp_t lm [H][W], rm [H][W];
  disp_t expq [$];
  int    last_out, r_done;

  always @(posedge clk) if (!rst && out_valid) begin
    disp_t e;
    last_out = cyc;
    e = expq.pop_front();
    checks++;
    if (e.valid) kept++; else rejected++;
    if (out_last) nlast++;
    if (out_disp !== e) begin
      failures++;
      if (failures < 10) $display("lr mismatch at output %0d: got %p exp %p", checks - 1, out_disp, e);
    end
  end

  task automatic run_frame(bit gaps);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        lm[y][x] = '{valid: ($urandom_range(7) != 0), d: DISP_W'($urandom_range(8))};
        rm[y][x] = '{valid: ($urandom_range(7) != 0), d: DISP_W'($urandom_range(8))};
      end
    // make about half of the left pixels consistent
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        if ($urandom_range(1) && x >= lm[y][x].d)
          rm[y][x - lm[y][x].d].d = lm[y][x].d + DISP_W'($urandom_range(1));
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        disp_t l, r;
        l = lm[y][x];
        r = (x >= l.d) ? rm[y][x - l.d] : DISP_NONE;
        if (l.valid && r.valid && (int'(l.d) - int'(r.d) <= 1) && (int'(r.d) - int'(l.d) <= 1))
          expq.push_back(l);
        else
          expq.push_back(DISP_NONE);
      end
    begin
      // the right stream repeats the left stream's valid pattern LAG clocks later
      bit hist [$];
      int li = 0, ri = 0;
      while (ri < W * H) begin
        bit lv, rv;
        lv = (li < W * H) && (!gaps || $urandom_range(2) != 0);
        hist.push_back(lv);
        rv = (hist.size() > LAG) ? hist.pop_front() : 1'b0;
        l_valid <= lv;
        r_valid <= rv;
        if (lv) begin l_disp <= lm[li / W][li % W]; li++; end
        if (rv) begin r_disp <= rm[ri / W][ri % W]; ri++; end
        @(posedge clk);
        if (rv) r_done = cyc;
      end
      l_valid <= 0;
      r_valid <= 0;
    end
    while (expq.size() != 0) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run_frame(0);
    checks++;
    if (last_out - r_done > W + 2) begin
      failures++;
      $display("last row left %0d edges after the right stream ended", last_out - r_done);
    end
    run_frame(0);
    run_frame(1);
    checks++;
    if (kept == 0 || rejected == 0 || nlast != 3) begin
      failures++;
      $display("kept %0d rejected %0d frame ends %0d", kept, rejected, nlast);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
