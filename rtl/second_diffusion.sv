// second_diffusion: feature-weighted single-pass diffusion.
//
// Starting from the first-diffusion set (the new seed), every other pixel x
// is scored with
//   F(x) = w1*f1 + w2*f2 + w3*f3 + w4*f4 + w5*f5
// and joins the set when F(x) >= th_f. The five features are those of the
// algorithm:
//   f1 homogeneity  exp(-alpha * sum_i d_i) + beta, d_i = |class difference|
//                   to the master pixel in channel i (alpha = 1, 8-bit table
//                   255*exp(-d), beta from the configuration)
//   f2 distance     63 if the master is an 8-neighbour, 31 if it is two
//                   pixels away; no master within two pixels: x cannot join
//   f3 probability  P(skin), 0..63
//   f4 motion       63 if x is ambulant
//   f5 feedback     63 if x was in the previous frame's first diffusion
// The master is the nearest set pixel, first in raster order at equal
// distance. Newly joined pixels do not propagate further (single pass). A
// pixel on a strong edge never joins; strong edges are recomputed here from
// the window's luma, |dY/dx| + |dY/dy| > th_edge2, so that only edges above
// this higher threshold stop the second diffusion. Feature scaling, alpha,
// the master choice and the radius are this design's choices. Combinational.
module second_diffusion
  import skin_pkg::*;
(
  input  logic [NPIX-1:0] seed,
  input  logic [1:0]      cls [3][NPIX],
  input  logic [7:0]      y   [NPIX],
  input  logic [5:0]      ps  [NPIX],
  input  logic [NPIX-1:0] amb,
  input  logic [NPIX-1:0] prev_fd,
  input  cfg_t            cfg,
  output logic [NPIX-1:0] edge2,
  output logic [NPIX-1:0] set_out
);
  function automatic logic [8:0] absd(input logic [7:0] a, input logic [7:0] b);
    return (a > b) ? 9'(a - b) : 9'(b - a);
  endfunction

  always_comb begin
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        logic [9:0] g;
        g = '0;
        if (c > 0) g = g + 10'(absd(y[r * WIN + c], y[r * WIN + c - 1]));
        if (r > 0) g = g + 10'(absd(y[r * WIN + c], y[(r - 1) * WIN + c]));
        edge2[r * WIN + c] = g > 10'(cfg.th_edge2);
      end
    end
  end

  always_comb begin
    set_out = seed;
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        logic [5:0] i, m;
        logic       found;
        logic [5:0] f2;
        logic [2:0] d;
        logic [8:0] f1;
        logic [13:0] f;
        i = 6'(r * WIN + c);
        m = '0;
        found = 1'b0;
        f2 = '0;
        // nearest master: ring of radius 1, then radius 2
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            if (!found && (dr != 0 || dc != 0) && r + dr >= 0 && r + dr < WIN &&
                c + dc >= 0 && c + dc < WIN && seed[(r + dr) * WIN + (c + dc)]) begin
              found = 1'b1;
              m     = 6'((r + dr) * WIN + (c + dc));
              f2    = 6'd63;
            end
        for (int dr = -2; dr <= 2; dr++)
          for (int dc = -2; dc <= 2; dc++)
            if (!found && (dr == 2 || dr == -2 || dc == 2 || dc == -2) && r + dr >= 0 &&
                r + dr < WIN && c + dc >= 0 && c + dc < WIN && seed[(r + dr) * WIN + (c + dc)]) begin
              found = 1'b1;
              m     = 6'((r + dr) * WIN + (c + dc));
              f2    = 6'd31;
            end
        d = '0;
        for (int ch = 0; ch < 3; ch++)
          d = d + 3'((cls[ch][i] > cls[ch][m]) ? cls[ch][i] - cls[ch][m] : cls[ch][m] - cls[ch][i]);
        f1 = 9'(exp_tab(d)) + 9'(cfg.beta);
        f  = 14'(cfg.w[0]) * 14'(f1) + 14'(cfg.w[1]) * 14'(f2) + 14'(cfg.w[2]) * 14'(ps[i])
           + 14'(cfg.w[3]) * (amb[i] ? 14'd63 : 14'd0)
           + 14'(cfg.w[4]) * (prev_fd[i] ? 14'd63 : 14'd0);
        if (!seed[i] && found && !edge2[i] && f >= cfg.th_f) set_out[i] = 1'b1;
      end
    end
  end
endmodule
