// tb_first_diffusion: iterates the one-step block until it stops changing
// (as the skin core does) and compares the fixed point with a worklist
// reference; also checks that one step never shrinks the set.
module tb_first_diffusion;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  logic [NPIX-1:0] si, so, edg, amb;
  logic [1:0] cls [3][NPIX];
  logic [2:0] th, tha;
  int checks = 0, failures = 0;
  first_diffusion dut (.set_in(si), .cls, .edg, .amb, .th, .th_amb(tha), .set_out(so));
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int grown = 0;
    for (int n = 0; n < 300; n++) begin
      bit seed [64], e [64], ed [64], am [64];
      int c [3][64];
      for (int i = 0; i < 64; i++) begin
        seed[i] = ($urandom_range(0, 99) < 5);
        ed[i] = ($urandom_range(0, 99) < 15);
        am[i] = ($urandom_range(0, 99) < 30);
        for (int ch = 0; ch < 3; ch++) begin
          c[ch][i] = (n % 2) ? ((i % 8) / 3) : $urandom_range(0, 2);
          cls[ch][i] = 2'(c[ch][i]);
        end
        si[i] = seed[i]; edg[i] = ed[i]; amb[i] = am[i];
      end
      th = 3'($urandom_range(0, 2)); tha = th + 3'($urandom_range(0, 2));
      for (int it = 0; it < 70; it++) begin
        #1;
        checks++;
        if ((so & si) != si) failures++;
        if (so == si) break;
        si = so;
      end
      diff1_ref(seed, c, ed, am, int'(th), int'(tha), e);
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (si[i] !== e[i]) failures++;
        if (e[i] && !seed[i]) grown++;
      end
    end
    if (grown == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
