// tb_color_space_conv: random and corner colours against a real-valued
// BT.601 conversion; each channel may differ by at most 1 (rounding).
module tb_color_space_conv;
  import skin_ref_pkg::*;
  logic [23:0] rgb, ycc;
  int checks = 0, failures = 0;
  color_space_conv dut (.rgb(rgb), .ycc(ycc));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      if (n < 8) rgb = {{8{n[2]}}, {8{n[1]}}, {8{n[0]}}};
      else rgb = 24'($urandom);
      #1;
      for (int ch = 0; ch < 3; ch++) begin
        int e, got;
        e = ycc_ref(rgb[23:16], rgb[15:8], rgb[7:0], ch);
        got = ycc[23 - 8 * ch -: 8];
        checks++;
        if (got - e > 1 || e - got > 1) begin
          failures++;
          if (failures < 10) $display("mismatch rgb=%h ch=%0d got=%0d exp=%0d", rgb, ch, got, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
