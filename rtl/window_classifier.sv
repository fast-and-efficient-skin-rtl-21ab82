// window_classifier: the window processing module of a skin core.
//
// Refines the 8x8 ternary window with neighbour_seg, then counts its white
// and gray pixels. The window is a candidate for skin segmentation when it
// has at least min_white white pixels (and always at least one) and at least
// min_gray gray pixels. A window without any white pixel is never kept; a
// minimum for both counts follows the algorithm, the exact rule is this
// design's reading of it. Combinational.
module window_classifier
  import skin_pkg::*;
(
  input  tern_t      tern [NPIX],
  input  cfg_t       cfg,
  output logic [6:0] n_white,
  output logic [6:0] n_gray,
  output logic       candidate
);
  tern_t refined [NPIX];

  neighbour_seg u_nb (
    .tern_in(tern), .k(cfg.nb_k), .th1(cfg.nb_th1), .th2(cfg.nb_th2),
    .tern_out(refined)
  );

  always_comb begin
    n_white = '0;
    n_gray  = '0;
    for (int i = 0; i < NPIX; i++) begin
      if (refined[i] == T_WHITE) n_white = n_white + 1'b1;
      if (refined[i] == T_GRAY)  n_gray  = n_gray + 1'b1;
    end
    candidate = (n_white != 0) && (n_white >= cfg.min_white) && (n_gray >= cfg.min_gray);
  end
endmodule
