// tb_seed_gen: random probabilities, tags and thresholds against the
// real-valued seed rule.
module tb_seed_gen;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  logic [5:0] ps, pn;
  logic amb, fb, seed;
  cfg_t cfg;
  int checks = 0, failures = 0;
  seed_gen dut (.ps, .pn, .ambulant(amb), .prev_fd(fb), .cfg, .seed);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int hit [3] = '{0, 0, 0};
    cfg = '0;
    for (int n = 0; n < 5000; n++) begin
      bit e;
      ps = 6'($urandom); pn = 6'($urandom); amb = 1'($urandom); fb = 1'($urandom);
      cfg.th_pure = 6'($urandom_range(0, 40));
      cfg.theta_amb = 8'($urandom_range(0, 30)); cfg.theta_fb = 8'($urandom_range(10, 60));
      cfg.theta_hi = 8'($urandom_range(30, 255));
      #1;
      e = seed_ref(ps, pn, amb, fb, cfg.th_pure, cfg.theta_amb, cfg.theta_fb, cfg.theta_hi);
      if (e) hit[amb ? 0 : fb ? 1 : 2]++;
      checks++;
      if (seed !== e) failures++;
    end
    if (hit[0] == 0 || hit[1] == 0 || hit[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
