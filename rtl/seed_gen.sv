// seed_gen: initial seed decision for one pixel.
//
// A pixel becomes a seed when both Bayesian tests pass:
//   pure probability   P(skin) >= th_pure
//   likelihood ratio   P(skin) / P(non-skin) >= theta / 16
// theta is chosen by the pixel's tags: theta_amb for an ambulant pixel,
// theta_fb for a pixel that was in the previous frame's first-diffusion set,
// theta_hi for every other pixel (non-ambulant pixels need a high score).
// The two tests and the three grades of strictness follow the algorithm; the
// priority ambulant > feedback > other and the 1/16 scale are this design's
// choices. Combinational.
module seed_gen
  import skin_pkg::*;
(
  input  logic [5:0] ps,
  input  logic [5:0] pn,
  input  logic       ambulant,
  input  logic       prev_fd,
  input  cfg_t       cfg,
  output logic       seed
);
  logic [7:0] theta;
  always_comb begin
    theta = ambulant ? cfg.theta_amb : (prev_fd ? cfg.theta_fb : cfg.theta_hi);
    seed  = (ps >= cfg.th_pure) && ratio_ok(ps, pn, theta);
  end
endmodule
