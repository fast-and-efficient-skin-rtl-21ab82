// tb_ternary_conv: programs each polygon as an axis-aligned rectangle (four
// half-planes, the other edges left at zero) and checks random pixels
// against rectangle membership computed directly.
module tb_ternary_conv;
  import skin_pkg::*;
  localparam int NE = 6;
  logic clk = 0, rst_n = 0, we = 0;
  logic [5:0] addr;
  logic [47:0] data;
  logic [23:0] ycc;
  tern_t tern;
  int checks = 0, failures = 0;
  int lo_u [6], hi_u [6], lo_v [6], hi_v [6];
  ternary_conv #(.N_EDGES(NE)) dut (.clk, .rst_n, .cfg_we(we), .cfg_addr(addr), .cfg_data(data), .ycc, .tern);
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic wr(input int p, input int e, input int a, input int b, input int c);
    @(negedge clk);
    we = 1; addr = 6'(p * NE + e); data = {12'(a), 12'(b), 24'(c)};
    @(negedge clk);
    we = 0;
  endtask
  function automatic bit in_rect(input int p, input int u, input int v);
    return u >= lo_u[p] && u <= hi_u[p] && v >= lo_v[p] && v <= hi_v[p];
  endfunction
  initial begin
    int cnt [4] = '{0, 0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // outer boxes wide, inner boxes narrow (inner inside outer)
    for (int p = 0; p < 6; p++) begin
      int cu, cv, hw;
      cu = 100 + 10 * (p % 3); cv = 130 - 5 * (p % 3);
      hw = (p < 3) ? 40 : 90;
      lo_u[p] = cu - hw; hi_u[p] = cu + hw; lo_v[p] = cv - hw; hi_v[p] = cv + hw;
      wr(p, 0,  1,  0, -lo_u[p]);   // u >= lo
      wr(p, 1, -1,  0,  hi_u[p]);   // u <= hi
      wr(p, 2,  0,  1, -lo_v[p]);
      wr(p, 3,  0, -1,  hi_v[p]);
    end
    for (int n = 0; n < 3000; n++) begin
      int y, cb, cr;
      tern_t e;
      bit inner, outer;
      y = $urandom_range(0, 255); cb = $urandom_range(0, 255); cr = $urandom_range(0, 255);
      if (n % 2 == 0) begin y = $urandom_range(50, 200); cb = $urandom_range(40, 200); cr = $urandom_range(40, 200); end
      ycc = {8'(y), 8'(cb), 8'(cr)};
      @(negedge clk);
      inner = in_rect(0, cb, y) && in_rect(1, cr, y) && in_rect(2, cr, cb);
      outer = in_rect(3, cb, y) && in_rect(4, cr, y) && in_rect(5, cr, cb);
      e = inner ? T_WHITE : outer ? T_GRAY : T_BLACK;
      cnt[e[1:0]]++;
      checks++;
      if (tern !== e) begin
        failures++;
        if (failures < 10) $display("ycc=%0d,%0d,%0d got %b exp %b", y, cb, cr, tern, e);
      end
    end
    if (cnt[0] == 0 || cnt[2] == 0 || cnt[3] == 0) failures++;
    $display("classes black=%0d gray=%0d white=%0d", cnt[0], cnt[2], cnt[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
