// tb_neighbour_seg: random ternary windows and constants against the
// reference neighbour refinement.
module tb_neighbour_seg;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  tern_t ti [NPIX], to [NPIX];
  logic [3:0] k;
  logic [9:0] th1, th2;
  int checks = 0, failures = 0;
  neighbour_seg dut (.tern_in(ti), .k, .th1, .th2, .tern_out(to));
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int changed = 0;
    for (int n = 0; n < 600; n++) begin
      int t [64], o [64];
      for (int i = 0; i < 64; i++) begin
        t[i] = (n % 3 == 0) ? 2 * $urandom_range(0, 1) + $urandom_range(0, 1) : $urandom_range(0, 3);
        if (t[i] == 1) t[i] = 0;
        ti[i] = tern_t'(t[i]);
      end
      k = 4'($urandom_range(0, 8)); th1 = 10'($urandom_range(0, 60)); th2 = th1 + 10'($urandom_range(0, 80));
      #1;
      nb_ref(t, int'(k), int'(th1), int'(th2), o);
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (int'(to[i]) != o[i]) failures++;
        if (o[i] != t[i]) changed++;
      end
    end
    if (changed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
