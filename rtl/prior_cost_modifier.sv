// prior_cost_modifier: folds the ELAS-style priors into a pixel's cost vector.
//
// Combinational. With enable low the cost vector passes unchanged (the plain
// Fast R3SGM passes). With enable high, for each disparity d:
//   1. plane prior: if the prior is valid and |d - prior| <= PRIOR_RADIUS,
//      subtract G(|d - prior|) (a sampled Gaussian, saturating at 0), i.e. a
//      negative Gaussian centred on the prior is superimposed on the costs;
//   2. grid vector: if bit d of the pixel's grid-cell vector is 0, the cost is
//      set to COST_MAX, the "arbitrarily large value";
//   3. support point: if the pixel is a support point, every cost becomes
//      COST_MAX except the one at the support disparity, which becomes 0.
// The three rules are the paper's. The Gaussian's amplitude, width and radius
// and the value of the large cost are not given there: GAUSS_AMP = 16,
// GAUSS_SIGMA = 2, PRIOR_RADIUS = 4 and COST_MAX = all ones are this design's
// choice. G(k) = round(GAUSS_AMP * exp(-k^2 / (2 GAUSS_SIGMA^2))), evaluated
// at elaboration time.
module prior_cost_modifier
  import stereo_pkg::*;
#(
  parameter int  NDISP        = 128,
  parameter int  COST_W       = 6,
  parameter int  PRIOR_RADIUS = 4,
  parameter int  GAUSS_AMP    = 16,
  parameter real GAUSS_SIGMA  = 2.0
) (
  input  logic              enable,
  input  logic [COST_W-1:0] cost_in  [NDISP],
  input  disp_t             support,
  input  disp_t             prior,
  input  logic [NDISP-1:0]  grid_vec,
  output logic [COST_W-1:0] cost_out [NDISP]
);

  localparam logic [COST_W-1:0] COST_MAX = '1;

  function automatic int gauss(input int k);
    return int'($floor(GAUSS_AMP * $exp(-(k * k) / (2.0 * GAUSS_SIGMA * GAUSS_SIGMA)) + 0.5));
  endfunction

  typedef logic [COST_W-1:0] gtab_t [PRIOR_RADIUS+1];

  function automatic gtab_t make_gtab();
    gtab_t t;
    for (int k = 0; k <= PRIOR_RADIUS; k++) t[k] = COST_W'(gauss(k));
    return t;
  endfunction

  localparam gtab_t GTAB = make_gtab();

  always_comb begin
    for (int d = 0; d < NDISP; d++) begin
      logic [COST_W-1:0] c;
      logic [DISP_W:0]   gap;
      c    = cost_in[d];
      gap = absdiff(DISP_W'(d), prior.d);
      if (enable) begin
        if (prior.valid && gap <= (DISP_W+1)'(PRIOR_RADIUS))
          c = (c > GTAB[gap]) ? c - GTAB[gap] : '0;
        if (!grid_vec[d]) c = COST_MAX;
        if (support.valid) c = (support.d == DISP_W'(d)) ? '0 : COST_MAX;
      end
      cost_out[d] = c;
    end
  end

endmodule
