// median_filter: streaming WIN x WIN median filter of a disparity image.
//
// Disparities enter in raster order, at most one per clock, and leave in the
// same order at the same rate, IMG_W*((WIN-1)/2)+(WIN-1)/2+2 clocks later
// (the window generator's lag plus one output register). The median is taken
// by rank selection: each window entry counts how many entries are smaller
// (ties broken by position) and the entry whose rank is WIN*WIN/2 is the
// output. Entries outside the image are replaced by the centre pixel. After
// the last pixel of a frame the block flushes on its own and holds in_ready
// low; its producers cannot stall, so an input during the flush is an error.
//
// The paper applies a median filter to both outputs of the first Fast R3SGM
// passes and to the final dense result, but gives neither its size nor its
// border rule: the 3x3 default and the border rule are this design's choice.
// The median is taken over the disparity value; the output carries the
// centre pixel's valid flag.
module median_filter
  import stereo_pkg::*;
#(
  parameter int IMG_W = 1242,
  parameter int IMG_H = 375,
  parameter int WIN   = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  output logic  in_ready,
  input  disp_t in_disp,
  output logic  out_valid,
  output disp_t out_disp
);

  localparam int N  = WIN * WIN;
  localparam int C  = (WIN - 1) / 2;
  localparam int XW = $clog2(IMG_W + 1);
  localparam int YW = $clog2(IMG_H + WIN + 1);

  logic              w_valid, w_last;
  logic [DISP_W:0]   w_win    [WIN][WIN];
  logic              w_inside [WIN][WIN];
  logic [XW-1:0]     w_x;
  logic [YW-1:0]     w_y;

  window_gen #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN_H(WIN), .WIN_W(WIN),
    .CY(C), .CX(C), .DATA_W(DISP_W + 1)
  ) u_win (
    .clk, .rst,
    .in_valid, .in_ready, .in_data(in_disp),
    .out_valid(w_valid), .out_win(w_win), .out_inside(w_inside),
    .out_x(w_x), .out_y(w_y), .out_last(w_last)
  );

  disp_t             centre;
  logic [DISP_W-1:0] v [N];
  logic [DISP_W-1:0] med;

  always_comb begin
    centre = disp_t'(w_win[C][C]);
    for (int r = 0; r < WIN; r++)
      for (int c = 0; c < WIN; c++)
        v[r*WIN+c] = w_inside[r][c] ? w_win[r][c][DISP_W-1:0] : centre.d;
    med = v[0];
    for (int i = 0; i < N; i++) begin
      int rank;
      rank = 0;
      for (int j = 0; j < N; j++)
        if ((v[j] < v[i]) || (v[j] == v[i] && j < i)) rank++;
      if (rank == N / 2) med = v[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_disp  <= DISP_NONE;
    end else begin
      out_valid <= w_valid;
      if (w_valid) out_disp <= '{valid: centre.valid, d: med};
    end
  end

  always_ff @(posedge clk)
    if (!rst && in_valid)
      assert (in_ready) else $error("median_filter: input while flushing");

endmodule
