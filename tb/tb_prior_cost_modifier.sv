// tb_prior_cost_modifier: self-checking test of prior_cost_modifier.
//
// Random cost vectors, priors, support points and grid vectors are applied;
// the output is compared with the rules evaluated here: Gaussian subtraction
// G(k) = round(16 exp(-k^2/8)) for |d - prior| <= 4 (the table 16, 14, 10, 5,
// 2 is written out here), cost 63 where the grid vector bit is 0, and 0/63
// around a support point. With enable low the costs must pass unchanged.
// Counts of each rule firing must be non-zero.
module tb_prior_cost_modifier;
  import stereo_pkg::*;

  localparam int ND = 16;

  logic       enable;
  logic [5:0] cost_in [ND], cost_out [ND];
  disp_t      support, prior;
  logic [ND-1:0] grid_vec;
  int checks = 0, failures = 0, n_gauss = 0, n_grid = 0, n_sup = 0;
  int gtab [5] = '{16, 14, 10, 5, 2};

  prior_cost_modifier #(.NDISP(ND)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      enable   = (t % 8 != 0);
      for (int d = 0; d < ND; d++) cost_in[d] = 6'($urandom_range(63));
      support  = '{valid: ($urandom_range(4) == 0), d: DISP_W'($urandom_range(ND - 1))};
      prior    = '{valid: ($urandom_range(3) != 0), d: DISP_W'($urandom_range(ND + 3))};
      grid_vec = ND'($urandom());
      #1;
      for (int d = 0; d < ND; d++) begin
        automatic int e = cost_in[d];
        automatic int k = d - int'(prior.d);
        if (k < 0) k = -k;
        if (enable) begin
          if (prior.valid && k <= 4) begin
            e = e - gtab[k];
            if (e < 0) e = 0;
            n_gauss++;
          end
          if (!grid_vec[d]) begin e = 63; n_grid++; end
          if (support.valid) begin e = (d == int'(support.d)) ? 0 : 63; n_sup++; end
        end
        checks++;
        if (int'(cost_out[d]) != e) begin
          failures++;
          if (failures < 10) $display("test %0d d=%0d: got %0d exp %0d", t, d, cost_out[d], e);
        end
      end
      #1;
    end
    checks++;
    if (n_gauss == 0 || n_grid == 0 || n_sup == 0) begin
      failures++;
      $display("rules fired: gauss %0d grid %0d support %0d", n_gauss, n_grid, n_sup);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
