// motion_detector: ternary-gated frame differencing.
//
// A pixel "moved" when its luma differs from the same pixel of the previous
// frame by more than th_motion. Plain differencing also fires on a moving
// camera and on moving non-skin objects, so the result is combined with the
// ternary image: only pixels that are not ternary black can be ambulant.
// Using luma for the difference and an AND with "not black" as the
// combination are this design's choices. Combinational.
module motion_detector
  import skin_pkg::*;
(
  input  logic [7:0] y_cur,
  input  logic [7:0] y_prev,
  input  tern_t      tern,
  input  logic [7:0] th_motion,
  output logic       ambulant
);
  logic [7:0] diff;
  always_comb begin
    diff     = (y_cur > y_prev) ? y_cur - y_prev : y_prev - y_cur;
    ambulant = (diff > th_motion) && (tern != T_BLACK);
  end
endmodule
