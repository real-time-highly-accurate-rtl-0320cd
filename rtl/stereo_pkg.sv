// stereo_pkg: types and constants shared by the stereo depth accelerator.
//
// Every block exchanges disparities as a disp_t: a valid flag plus an 8-bit
// disparity, so a sparse map (after a consistency, support or redundancy
// check) can mark a pixel as "no disparity" without reserving a code. The
// 8-bit field allows up to 256 disparity levels; the disparity range actually
// used is the NDISP parameter of each block. The widths are this design's
// choice: the paper does not give them.
package stereo_pkg;

  localparam int DISP_W = 8;   // bits of a disparity value
  localparam int PIX_W  = 8;   // bits of an input grey-level pixel

  typedef struct packed {
    logic              valid;
    logic [DISP_W-1:0] d;
  } disp_t;

  localparam disp_t DISP_NONE = '{valid: 1'b0, d: '0};

  // One pixel of the Fast R3SGM input stream: the reference (first) and the
  // second image's grey levels, and, for the combined optimisation only, the
  // pixel's support point and plane prior (invalid in the plain passes).
  typedef struct packed {
    logic [PIX_W-1:0] first;
    logic [PIX_W-1:0] second;
    disp_t            support;
    disp_t            prior;
  } sgm_pixel_t;

  // Operating modes of the accelerator top (one reused datapath, Fig. 1):
  // SGM     - one Fast R3SGM pass with median filters and L/R check
  // PRIOR   - consolidating L/R check, support check, redundancy check and
  //           grid vector extraction
  // DENSE   - Fast R3SGM with the prior-modified cost vectors, then median
  typedef enum logic [1:0] {
    MODE_SGM   = 2'd0,
    MODE_PRIOR = 2'd1,
    MODE_DENSE = 2'd2
  } mode_e;

  function automatic logic [DISP_W:0] absdiff(input logic [DISP_W-1:0] a,
                                              input logic [DISP_W-1:0] b);
    return (a > b) ? {1'b0, a - b} : {1'b0, b - a};
  endfunction

endpackage
