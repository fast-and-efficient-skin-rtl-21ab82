// final_mask: filtering of the second-diffusion output.
//
// A pixel kept by the second diffusion stays skin only if a Bayesian ratio
// test with a low threshold, P(skin)/P(non-skin) >= theta_final/16, passes.
// This removes leakage near boundaries. Combinational.
module final_mask
  import skin_pkg::*;
(
  input  logic       diff2,
  input  logic [5:0] ps,
  input  logic [5:0] pn,
  input  logic [7:0] theta_final,
  output logic       mask
);
  assign mask = diff2 && ratio_ok(ps, pn, theta_final);
endmodule
