// tb_motion_detector: random luma pairs, thresholds and ternary codes.
module tb_motion_detector;
  import skin_pkg::*;
  logic [7:0] yc, yp, th;
  tern_t t;
  logic amb;
  int checks = 0, failures = 0;
  motion_detector dut (.y_cur(yc), .y_prev(yp), .tern(t), .th_motion(th), .ambulant(amb));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int hits = 0;
    for (int n = 0; n < 4000; n++) begin
      int d; bit e;
      yc = 8'($urandom); yp = 8'($urandom); th = 8'($urandom_range(0, 80));
      case ($urandom_range(0, 2)) 0: t = T_BLACK; 1: t = T_GRAY; default: t = T_WHITE; endcase
      #1;
      d = int'(yc) - int'(yp); if (d < 0) d = -d;
      e = (d > int'(th)) && (t != T_BLACK);
      hits += e;
      checks++;
      if (amb !== e) failures++;
    end
    if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
