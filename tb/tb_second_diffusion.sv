// tb_second_diffusion: random windows, features and weights against the
// reference diffusion score.
module tb_second_diffusion;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  logic [NPIX-1:0] seed, amb, fb, e2, so;
  logic [1:0] cls [3][NPIX];
  logic [7:0] y [NPIX];
  logic [5:0] ps [NPIX];
  cfg_t cfg;
  int checks = 0, failures = 0;
  second_diffusion dut (.seed, .cls, .y, .ps, .amb, .prev_fd(fb), .cfg, .edge2(e2), .set_out(so));
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int grown = 0, refused = 0;
    cfg = '0;
    for (int n = 0; n < 400; n++) begin
      bit sd [64], a [64], f [64], e [64];
      int c [3][64], yy [64], pp [64], w [5];
      for (int i = 0; i < 64; i++) begin
        sd[i] = ($urandom_range(0, 99) < 10);
        a[i] = 1'($urandom); f[i] = 1'($urandom);
        yy[i] = (n % 2) ? 100 + $urandom_range(0, 30) : $urandom_range(0, 255);
        pp[i] = $urandom_range(0, 63);
        for (int ch = 0; ch < 3; ch++) begin c[ch][i] = $urandom_range(0, 2); cls[ch][i] = 2'(c[ch][i]); end
        seed[i] = sd[i]; amb[i] = a[i]; fb[i] = f[i]; y[i] = 8'(yy[i]); ps[i] = 6'(pp[i]);
      end
      for (int k = 0; k < 5; k++) begin w[k] = $urandom_range(0, 15); cfg.w[k] = 4'(w[k]); end
      cfg.beta = 8'($urandom_range(0, 60));
      cfg.th_f = 14'($urandom_range(500, 4000));
      cfg.th_edge2 = 8'($urandom_range(30, 120));
      #1;
      diff2_ref(sd, c, yy, pp, a, f, w, cfg.beta, cfg.th_f, cfg.th_edge2, e);
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (so[i] !== e[i]) failures++;
        if (e[i] && !sd[i]) grown++;
        if (!e[i] && !sd[i]) refused++;
      end
    end
    if (grown == 0 || refused == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
