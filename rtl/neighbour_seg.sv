// neighbour_seg: neighbour-based re-classification of a ternary window.
//
// For a pixel that is not already white, the white and gray pixels around it
// are counted in its 3x3 and its 5x5 neighbourhood (centre excluded) and
// scored  T = 2*white3 + gray3,  Phi = 2*white5 + gray5,  xi = K*T + Phi.
// xi < th1 makes the pixel black, xi > th2 white, anything between gray.
// The score form xi = K*T + Phi and the two thresholds follow the algorithm;
// the per-class weights 2/1/0 inside T and Phi are this design's choice.
//
// The block works on the 8x8 window a skin core holds. Only the 4x4 centre
// pixels (rows and columns 2..5) own a full 5x5 neighbourhood inside the
// window; with windows stepped by 4 pixels these centres tile the frame.
// All other pixels pass unchanged. Combinational.
module neighbour_seg
  import skin_pkg::*;
(
  input  tern_t      tern_in  [NPIX],
  input  logic [3:0] k,
  input  logic [9:0] th1,
  input  logic [9:0] th2,
  output tern_t      tern_out [NPIX]
);
  function automatic logic [1:0] wt(input tern_t t);
    case (t)
      T_WHITE: return 2'd2;
      T_GRAY:  return 2'd1;
      default: return 2'd0;
    endcase
  endfunction

  always_comb begin
    for (int i = 0; i < NPIX; i++) tern_out[i] = tern_in[i];
    for (int r = 2; r < 6; r++) begin
      for (int c = 2; c < 6; c++) begin
        logic [4:0] t3;   // T, at most 16
        logic [5:0] phi;  // Phi, at most 48
        logic [9:0] xi;
        t3  = '0;
        phi = '0;
        for (int dr = -2; dr <= 2; dr++) begin
          for (int dc = -2; dc <= 2; dc++) begin
            if (dr != 0 || dc != 0) begin
              phi = phi + 6'(wt(tern_in[(r + dr) * WIN + (c + dc)]));
              if (dr >= -1 && dr <= 1 && dc >= -1 && dc <= 1)
                t3 = t3 + 5'(wt(tern_in[(r + dr) * WIN + (c + dc)]));
            end
          end
        end
        xi = 10'(k) * 10'(t3) + 10'(phi);
        if (tern_in[r * WIN + c] != T_WHITE) begin
          if (xi < th1)      tern_out[r * WIN + c] = T_BLACK;
          else if (xi > th2) tern_out[r * WIN + c] = T_WHITE;
          else               tern_out[r * WIN + c] = T_GRAY;
        end
      end
    end
  end
endmodule
