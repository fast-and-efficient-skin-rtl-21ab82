// first_diffusion: one propagation step of the conservative first diffusion.
//
// A pixel outside the set joins it when it is not an edge point and one of
// its 8 neighbours inside the window is in the set (its master) with a
// homogeneity distance  d = sum over the three channels of |class(x) -
// class(master)|  no larger than the threshold: the weak (larger) threshold
// th_amb for an ambulant pixel, the strong one th for any other. The skin
// core repeats the step until the set stops growing, so propagation starts at
// the nearest neighbours and moves outwards. Homogeneity-only diffusion, the
// edge stop and the weak/strong thresholds follow the algorithm; the
// 8-neighbourhood and the summed class distance are this design's choices.
// Combinational.
module first_diffusion
  import skin_pkg::*;
(
  input  logic [NPIX-1:0] set_in,
  input  logic [1:0]      cls [3][NPIX],
  input  logic [NPIX-1:0] edg,
  input  logic [NPIX-1:0] amb,
  input  logic [2:0]      th,
  input  logic [2:0]      th_amb,
  output logic [NPIX-1:0] set_out
);
  function automatic logic [2:0] cdist(input logic [1:0] c [3][NPIX], input int unsigned a, input int unsigned b);
    logic [2:0] d;
    d = '0;
    for (int ch = 0; ch < 3; ch++)
      d = d + 3'((c[ch][a] > c[ch][b]) ? c[ch][a] - c[ch][b] : c[ch][b] - c[ch][a]);
    return d;
  endfunction

  always_comb begin
    set_out = set_in;
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        if (!set_in[r * WIN + c] && !edg[r * WIN + c]) begin
          for (int dr = -1; dr <= 1; dr++) begin
            for (int dc = -1; dc <= 1; dc++) begin
              if ((dr != 0 || dc != 0) && r + dr >= 0 && r + dr < WIN &&
                  c + dc >= 0 && c + dc < WIN) begin
                if (set_in[(r + dr) * WIN + (c + dc)] &&
                    cdist(cls, r * WIN + c, (r + dr) * WIN + (c + dc)) <= (amb[r * WIN + c] ? th_amb : th))
                  set_out[r * WIN + c] = 1'b1;
              end
            end
          end
        end
      end
    end
  end
endmodule
