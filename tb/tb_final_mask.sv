// tb_final_mask: exhaustive probabilities, random thresholds.
module tb_final_mask;
  import skin_ref_pkg::*;
  logic d2, m;
  logic [5:0] ps, pn;
  logic [7:0] th;
  int checks = 0, failures = 0;
  final_mask dut (.diff2(d2), .ps, .pn, .theta_final(th), .mask(m));
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int kept = 0, cut = 0;
    for (int a = 0; a < 64; a++)
      for (int b = 0; b < 64; b++) begin
        bit e;
        ps = 6'(a); pn = 6'(b); d2 = 1'($urandom); th = 8'($urandom_range(0, 64));
        #1;
        e = d2 && ratio_ref(a, b, th);
        if (d2 && e) kept++;
        if (d2 && !e) cut++;
        checks++;
        if (m !== e) failures++;
      end
    if (kept == 0 || cut == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
