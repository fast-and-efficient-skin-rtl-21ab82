// tb_window_classifier: random windows; counts and the candidate decision are
// recomputed from the reference refinement.
module tb_window_classifier;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  tern_t t_in [NPIX];
  cfg_t cfg;
  logic [6:0] nw, ng;
  logic cand;
  int checks = 0, failures = 0;
  window_classifier dut (.tern(t_in), .cfg, .n_white(nw), .n_gray(ng), .candidate(cand));
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ncand = 0, nrej = 0;
    cfg = '0;
    for (int n = 0; n < 800; n++) begin
      int t [64], o [64], ew, eg, pw;
      pw = $urandom_range(0, 40);
      for (int i = 0; i < 64; i++) begin
        int r;
        r = $urandom_range(0, 99);
        t[i] = (r < pw) ? 3 : (r < pw + 30) ? 2 : 0;
        t_in[i] = tern_t'(t[i]);
      end
      cfg.nb_k = 4'($urandom_range(0, 6)); cfg.nb_th1 = 10'($urandom_range(0, 40));
      cfg.nb_th2 = cfg.nb_th1 + 10'($urandom_range(10, 60));
      cfg.min_white = 7'($urandom_range(0, 12)); cfg.min_gray = 7'($urandom_range(0, 20));
      #1;
      nb_ref(t, int'(cfg.nb_k), int'(cfg.nb_th1), int'(cfg.nb_th2), o);
      ew = 0; eg = 0;
      for (int i = 0; i < 64; i++) begin ew += (o[i] == 3); eg += (o[i] == 2); end
      checks += 3;
      if (nw != 7'(ew)) failures++;
      if (ng != 7'(eg)) failures++;
      if (cand !== (ew > 0 && ew >= cfg.min_white && eg >= cfg.min_gray)) failures++;
      if (cand) ncand++; else nrej++;
    end
    if (ncand == 0 || nrej == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
