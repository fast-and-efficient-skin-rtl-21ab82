// tb_edge_detector: streams random frames (16 pixels wide) and compares each
// edge bit with the gradient computed from the stored frame.
module tb_edge_detector;
  localparam int W = 16, H = 6;
  logic clk = 0, valid = 0, first_row, e;
  logic [7:0] y, th;
  logic [3:0] x;
  int img [H][W];
  int checks = 0, failures = 0;
  edge_detector #(.IMG_W(W)) dut (.clk, .valid, .y, .x, .first_row, .th_edge(th), .edge_o(e));
  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int edges = 0;
    th = 8'd40;
    for (int f = 0; f < 3; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          int g;
          img[r][c] = (f == 0) ? $urandom_range(0, 255) : ($urandom_range(0, 3) == 0 ? $urandom_range(0, 255) : 100);
          @(negedge clk);
          valid = 1; y = 8'(img[r][c]); x = 4'(c); first_row = (r == 0);
          #1;
          g = 0;
          if (c > 0) g += (img[r][c] > img[r][c-1]) ? img[r][c] - img[r][c-1] : img[r][c-1] - img[r][c];
          if (r > 0) g += (img[r][c] > img[r-1][c]) ? img[r][c] - img[r-1][c] : img[r-1][c] - img[r][c];
          checks++;
          edges += (g > 40);
          if (e !== (g > 40)) failures++;
        end
    if (edges == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
