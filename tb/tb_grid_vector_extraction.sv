// tb_grid_vector_extraction: self-checking test of grid_vector_extraction.
//
// Two random sparse support images (23 x 12 pixels, 5 x 5 cells, so the last
// csz column and row are partial) are streamed with random gaps. After
// frame_done, every csz's vector is read through the lookup port, once per
// pixel of the image, and compared with a vector built here: bits d-1, d, d+1
// for every valid support disparity d in the csz. The default 50 x 50 csz
// size is checked on a third instance with one frame of 120 x 60 pixels.
module tb_grid_vector_extraction;
  import stereo_pkg::*;

  localparam int W = 23, H = 12, CELL = 5, ND = 16;
  localparam int W2 = 120, H2 = 60;

  logic  clk = 0, rst = 1;
  logic  in_valid = 0, done, done2;
  disp_t in_disp = DISP_NONE;
  logic [4:0]    rd_x = '0;
  logic [3:0]    rd_y = '0;
  logic [ND-1:0] rd_vec;
  logic [6:0]    rd_x2 = '0;
  logic [5:0]    rd_y2 = '0;
  logic [ND-1:0] rd_vec2;
  logic          in_valid2 = 0;
  int    checks = 0, failures = 0;

  grid_vector_extraction #(.IMG_W(W), .IMG_H(H), .CELL(CELL), .NDISP(ND)) dut (
    .clk, .rst, .in_valid, .in_disp, .frame_done(done), .rd_x, .rd_y, .rd_vec);
  grid_vector_extraction #(.IMG_W(W2), .IMG_H(H2), .NDISP(ND)) dut50 (
    .clk, .rst, .in_valid(in_valid2), .in_disp, .frame_done(done2),
    .rd_x(rd_x2), .rd_y(rd_y2), .rd_vec(rd_vec2));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ND-1:0] refv [8][25];
  disp_t         img [H2][W2];
  int ndone = 0;
  always @(posedge clk) if (!rst && done) ndone++;

  task automatic run(int w, int h, int csz, bit big, bit gaps);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 25; j++) refv[i][j] = '0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        img[y][x] = '{valid: ($urandom_range(30) == 0), d: DISP_W'($urandom_range(ND - 1))};
        if (img[y][x].valid)
          for (int k = -1; k <= 1; k++)
            if (int'(img[y][x].d) + k >= 0 && int'(img[y][x].d) + k < ND)
              refv[y / csz][x / csz][int'(img[y][x].d) + k] = 1'b1;
      end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        if (gaps) while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
        if (big) in_valid2 <= 1; else in_valid <= 1;
        in_disp <= img[y][x];
        @(posedge clk);
      end
    in_valid  <= 0;
    in_valid2 <= 0;
    @(posedge clk);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        if (big) begin rd_x2 <= 7'(x); rd_y2 <= 6'(y); end
        else begin rd_x <= 5'(x); rd_y <= 4'(y); end
        #1;
        checks++;
        if ((big ? rd_vec2 : rd_vec) !== refv[y / csz][x / csz]) begin
          failures++;
          if (failures < 10) $display("csz (%0d,%0d): got %h exp %h", x / csz, y / csz,
                                      big ? rd_vec2 : rd_vec, refv[y / csz][x / csz]);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run(W, H, CELL, 0, 1);
    run(W, H, CELL, 0, 1);
    run(W2, H2, 50, 1, 0);
    checks++;
    if (ndone != 2) begin failures++; $display("frame_done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
