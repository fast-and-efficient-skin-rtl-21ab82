// tb_otsu_threshold: random and clustered windows; the chosen threshold
// pair must reach the maximum between-class variance found by an exhaustive
// real-valued search, the pixel classes must follow the pair, and the search
// must take 105 clocks from start to done.
module tb_otsu_threshold;
  import skin_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [7:0] pix [64];
  logic [1:0] cls [64];
  logic [3:0] t1, t2;
  int checks = 0, failures = 0;
  otsu_threshold #(.N_PIX(64), .BINS(16)) dut (.clk, .rst_n, .start, .pix, .busy, .done, .t1_o(t1), .t2_o(t2), .cls);
  always #5 clk = ~clk;
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      int v [64], et1, et2, cyc;
      real best, got;
      for (int i = 0; i < 64; i++) begin
        case (n % 3)
          0: v[i] = $urandom_range(0, 255);
          1: v[i] = 40 * $urandom_range(1, 5) + $urandom_range(0, 20);
          default: v[i] = (i < 20) ? $urandom_range(10, 40) : (i < 45) ? $urandom_range(100, 140) : $urandom_range(200, 250);
        endcase
        pix[i] = 8'(v[i]);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      otsu_ref(v, et1, et2, best);
      got = otsu_var(v, int'(t1), int'(t2));
      checks += 3;
      if (got < best * (1.0 - 1e-9)) begin
        failures++;
        if (failures < 5) $display("n=%0d got (%0d,%0d) %f exp (%0d,%0d) %f", n, t1, t2, got, et1, et2, best);
      end
      if (cyc != 106) begin failures++; if (failures < 5) $display("cycles %0d", cyc); end
      if (!(t1 < t2)) failures++;
      for (int i = 0; i < 64; i++) begin
        int b, ec;
        b = v[i] / 16;
        ec = (b <= int'(t1)) ? 0 : (b <= int'(t2)) ? 1 : 2;
        checks++;
        if (int'(cls[i]) != ec) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
