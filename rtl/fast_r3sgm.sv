// fast_r3sgm: streaming semi-global matching, one disparity per clock.
//
// The input is a stream of sgm_pixel_t in raster order (up to one per clock,
// valid/ready): the first (reference) image, the second image and, for the
// combined optimisation, the pixel's support point and plane prior.
//   Stage W  window_gen buffers a CENSUS_WIN x CENSUS_WIN window of the stream.
//   Stage C  census transform of both images around the window centre. The
//            second image's census of the last NDISP-1 centres is kept in a
//            shift register, so the matching cost for disparity d is the
//            Hamming distance between the first image's census at x and the
//            second image's census at x - d. Costs for x - d < 0 are COST_MAX.
//            The cost vector then goes through prior_cost_modifier, which
//            changes it only when prior_en is high.
//   Stage A  cost aggregation along the three scanlines that come from above:
//            from the upper-left, from straight above and from the upper-right
//            neighbour, with the SGM recursion
//              L(p,d) = C(p,d) + min(L(q,d), L(q,d+-1)+P1, min_k L(q,k)+P2) - min_k L(q,k)
//            where q is the predecessor on the scanline. The previous row's L
//            vectors of the three paths are held in three IMG_W-entry row
//            memories; a path without predecessor (image border) starts with
//            L = C. The three L are summed into S(p,d).
//   Stage D  winner-take-all. The first-image disparity is argmin_d S(x,d)
//            over d <= x (smallest d on ties); in the combined mode a support
//            point keeps its own disparity. The second-image disparity of
//            pixel xr is argmin_d S(xr+d,d), found by a systolic chain of NDISP
//            running minima that shifts by one slot per pixel; it leaves NDISP-1
//            pixels behind the first-image one (the tail of a row leaves during
//            the next row, the tail of the frame in a flush of NDISP-1 clocks
//            during which in_ready is low).
// Both outputs are valid-only streams in raster order. Latency of the first
// output: IMG_W*(CENSUS_WIN-1)/2 + (CENSUS_WIN-1)/2 + 4 clocks. IMG_W must be
// at least NDISP.
//
// From the paper: aggregation over only the scanlines above the pixel (the
// left scanline of the original R3SGM is dropped), one disparity per clock,
// a first-image map and a second-image map for the consistency check, and
// the cost modification of the combined optimisation. The paper refers
// elsewhere for the block's insides, so the census cost, CENSUS_WIN = 5,
// P1 = 3, P2 = 20, NDISP = 128 and all widths are this design's choice.
module fast_r3sgm
  import stereo_pkg::*;
#(
  parameter int IMG_W      = 1242,
  parameter int IMG_H      = 375,
  parameter int NDISP      = 128,
  parameter int CENSUS_WIN = 5,
  parameter int COST_W     = 6,
  parameter int P1         = 3,
  parameter int P2         = 20,
  localparam int XW        = $clog2(IMG_W + 1),
  localparam int YW        = $clog2(IMG_H + CENSUS_WIN + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             prior_en,
  input  logic             in_valid,
  output logic             in_ready,
  input  sgm_pixel_t       in_pix,
  // grid vector lookup for the pixel being costed (combined optimisation)
  output logic [XW-1:0]    grid_x,
  output logic [YW-1:0]    grid_y,
  input  logic [NDISP-1:0] grid_vec,
  // first-image (left) disparity stream
  output logic             l_valid,
  output disp_t            l_disp,
  // second-image (right) disparity stream
  output logic             r_valid,
  output disp_t            r_disp
);

  localparam int CC  = (CENSUS_WIN - 1) / 2;
  localparam int CB  = CENSUS_WIN * CENSUS_WIN - 1;
  localparam int DW  = $bits(sgm_pixel_t);
  localparam int LW  = $clog2((1 << COST_W) + P2 + 1);
  localparam int SW  = LW + 2;
  localparam int RFW = $clog2(NDISP + 1);
  localparam logic [COST_W-1:0] COST_MAX = '1;

  typedef logic [NDISP-1:0][LW-1:0] lvec_t;
  typedef logic [NDISP-1:0][SW-1:0] svec_t;

  // ------------------------------------------------------------ stage W
  logic           w_valid, w_last, w_ready;
  logic [DW-1:0]  w_win    [CENSUS_WIN][CENSUS_WIN];
  logic           w_inside [CENSUS_WIN][CENSUS_WIN];
  logic [XW-1:0]  w_x;
  logic [YW-1:0]  w_y;
  logic           rflush;
  logic [RFW-1:0] rflush_cnt;

  assign in_ready = w_ready && !rflush;

  window_gen #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN_H(CENSUS_WIN), .WIN_W(CENSUS_WIN),
    .CY(CC), .CX(CC), .DATA_W(DW)
  ) u_win (
    .clk, .rst,
    .in_valid(in_valid && !rflush), .in_ready(w_ready), .in_data(in_pix),
    .out_valid(w_valid), .out_win(w_win), .out_inside(w_inside),
    .out_x(w_x), .out_y(w_y), .out_last(w_last)
  );

  assign grid_x = w_x;
  assign grid_y = w_y;

  // ------------------------------------------------------------ stage C
  sgm_pixel_t        ctr;
  logic [CB-1:0]     cen_l, cen_r;
  logic [CB-1:0]     rc_sr [NDISP];     // rc_sr[k]: census of centre x-1-k
  logic [COST_W-1:0] raw_cost [NDISP];
  logic [COST_W-1:0] mod_cost [NDISP];

  always_comb begin
    int b;
    ctr   = sgm_pixel_t'(w_win[CC][CC]);
    b     = 0;
    cen_l = '0;
    cen_r = '0;
    for (int r = 0; r < CENSUS_WIN; r++)
      for (int c = 0; c < CENSUS_WIN; c++)
        if (!(r == CC && c == CC)) begin
          sgm_pixel_t e;
          e = sgm_pixel_t'(w_win[r][c]);
          cen_l[b] = w_inside[r][c] && (e.first  < ctr.first);
          cen_r[b] = w_inside[r][c] && (e.second < ctr.second);
          b++;
        end
    for (int d = 0; d < NDISP; d++) begin
      logic [CB-1:0] other;
      int            hd;
      other = (d == 0) ? cen_r : rc_sr[(d == 0) ? 0 : d - 1];
      hd    = $countones(cen_l ^ other);
      if (d > int'(w_x)) raw_cost[d] = COST_MAX;
      else               raw_cost[d] = (hd > int'(COST_MAX)) ? COST_MAX : COST_W'(hd);
    end
  end

  prior_cost_modifier #(.NDISP(NDISP), .COST_W(COST_W)) u_mod (
    .enable(prior_en), .cost_in(raw_cost), .support(ctr.support), .prior(ctr.prior),
    .grid_vec, .cost_out(mod_cost)
  );

  logic              c_valid, c_last;
  logic [COST_W-1:0] c_cost [NDISP];
  logic [XW-1:0]     c_x;
  logic [YW-1:0]     c_y;
  disp_t             c_sup;

  always_ff @(posedge clk) begin
    if (rst) begin
      c_valid <= 1'b0;
      c_last  <= 1'b0;
    end else begin
      c_valid <= w_valid;
      c_last  <= w_valid && w_last;
    end
    if (w_valid) begin
      rc_sr[0] <= cen_r;
      for (int k = 1; k < NDISP; k++) rc_sr[k] <= rc_sr[k-1];
      c_cost <= mod_cost;
      c_x    <= w_x;
      c_y    <= w_y;
      c_sup  <= prior_en ? ctr.support : DISP_NONE;
    end
  end

  // ------------------------------------------------------------ stage A
  lvec_t mem_ul [IMG_W];   // path from the upper-left neighbour
  lvec_t mem_up [IMG_W];   // path from the neighbour straight above
  lvec_t mem_ur [IMG_W];   // path from the upper-right neighbour
  lvec_t ul_save;          // previous row's upper-left L at c_x - 1

  function automatic lvec_t sgm_step(input logic [COST_W-1:0] cost [NDISP],
                                     input lvec_t prev, input logic has_prev);
    lvec_t         l;
    logic [LW-1:0] m;
    logic [LW+1:0] best, cand;
    m = prev[0];
    for (int d = 1; d < NDISP; d++) if (prev[d] < m) m = prev[d];
    for (int d = 0; d < NDISP; d++) begin
      if (!has_prev) begin
        l[d] = LW'(cost[d]);
      end else begin
        best = (LW+2)'(m) + (LW+2)'(P2);
        if ((LW+2)'(prev[d]) < best) best = (LW+2)'(prev[d]);
        if (d > 0) begin
          cand = (LW+2)'(prev[d-1]) + (LW+2)'(P1);
          if (cand < best) best = cand;
        end
        if (d < NDISP - 1) begin
          cand = (LW+2)'(prev[d+1]) + (LW+2)'(P1);
          if (cand < best) best = cand;
        end
        l[d] = LW'((LW+2)'(cost[d]) + best - (LW+2)'(m));
      end
    end
    return l;
  endfunction

  lvec_t         prev_ul, prev_up, prev_ur, l_ul, l_up, l_ur;
  logic          has_ul, has_up, has_ur;
  logic [XW-1:0] x_right;
  svec_t         s_sum;

  always_comb begin
    x_right = (c_x == XW'(IMG_W - 1)) ? c_x : c_x + 1'b1;
    has_ul  = (c_y != '0) && (c_x != '0);
    has_up  = (c_y != '0);
    has_ur  = (c_y != '0) && (c_x != XW'(IMG_W - 1));
    prev_ul = ul_save;
    prev_up = mem_up[c_x];
    prev_ur = mem_ur[x_right];
    l_ul    = sgm_step(c_cost, prev_ul, has_ul);
    l_up    = sgm_step(c_cost, prev_up, has_up);
    l_ur    = sgm_step(c_cost, prev_ur, has_ur);
    for (int d = 0; d < NDISP; d++)
      s_sum[d] = SW'(l_ul[d]) + SW'(l_up[d]) + SW'(l_ur[d]);
  end

  logic          a_valid, a_last;
  svec_t         a_sum;
  logic [XW-1:0] a_x;
  logic [YW-1:0] a_y;
  disp_t         a_sup;

  always_ff @(posedge clk) begin
    if (rst) begin
      a_valid <= 1'b0;
      a_last  <= 1'b0;
    end else begin
      a_valid <= c_valid;
      a_last  <= c_valid && c_last;
    end
    if (c_valid) begin
      ul_save     <= mem_ul[c_x];
      mem_ul[c_x] <= l_ul;
      mem_up[c_x] <= l_up;
      mem_ur[c_x] <= l_ur;
      a_sum       <= s_sum;
      a_x         <= c_x;
      a_y         <= c_y;
      a_sup       <= c_sup;
    end
  end

  // ------------------------------------------------------------ stage D
  logic [SW-1:0]     slot_c [NDISP];
  logic [DISP_W-1:0] slot_d [NDISP];
  logic [SW-1:0]     best_s;
  logic [DISP_W-1:0] best_d;

  always_comb begin
    best_s = a_sum[0];
    best_d = '0;
    for (int d = 1; d < NDISP; d++)
      if (d <= int'(a_x) && a_sum[d] < best_s) begin
        best_s = a_sum[d];
        best_d = DISP_W'(d);
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      l_valid    <= 1'b0;
      r_valid    <= 1'b0;
      l_disp     <= DISP_NONE;
      r_disp     <= DISP_NONE;
      rflush     <= 1'b0;
      rflush_cnt <= '0;
    end else begin
      l_valid <= a_valid;
      r_valid <= 1'b0;
      if (a_valid) begin
        l_disp <= a_sup.valid ? a_sup : '{valid: 1'b1, d: best_d};
        // systolic second-image minima: slot i holds pixel a_x - i
        slot_c[0] <= a_sum[0];
        slot_d[0] <= '0;
        for (int i = 1; i < NDISP; i++) begin
          if (i <= int'(a_x) && a_sum[i] < slot_c[i-1]) begin
            slot_c[i] <= a_sum[i];
            slot_d[i] <= DISP_W'(i);
          end else begin
            slot_c[i] <= slot_c[i-1];
            slot_d[i] <= slot_d[i-1];
          end
        end
        // the pixel leaving the chain is complete
        r_valid <= (int'(a_x) >= NDISP - 1) || (a_y != '0);
        if (int'(a_x) >= NDISP - 1 && a_sum[NDISP-1] < slot_c[NDISP-2])
          r_disp <= '{valid: 1'b1, d: DISP_W'(NDISP - 1)};
        else
          r_disp <= '{valid: 1'b1, d: slot_d[NDISP-2]};
        if (a_last) begin
          rflush     <= 1'b1;
          rflush_cnt <= RFW'(NDISP - 1);
        end
      end else if (rflush) begin
        for (int i = 1; i < NDISP; i++) begin
          slot_c[i] <= slot_c[i-1];
          slot_d[i] <= slot_d[i-1];
        end
        r_valid <= 1'b1;
        r_disp  <= '{valid: 1'b1, d: slot_d[NDISP-2]};
        if (rflush_cnt == RFW'(1)) rflush <= 1'b0;
        rflush_cnt <= rflush_cnt - 1'b1;
      end
    end
  end

endmodule
