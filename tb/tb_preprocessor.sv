// tb_preprocessor: two 16x8 frames with random stalls on the camera and the
// memory side. Every output word is checked field by field: colour passed
// through, YCbCr within 1 of the real-valued transform, ternary class from
// the programmed rectangles, motion against the first frame's luma and edge
// against the frame's luma. Addresses must run in raster order and
// frame_done must pulse once per frame.
module tb_preprocessor;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  localparam int W = 16, H = 8, N = W * H, NE = 6;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic tc_we = 0;
  logic [5:0] tc_addr;
  logic [47:0] tc_data;
  logic pix_valid = 0, pix_ready, prev_valid = 0, prev_ready, out_valid, out_ready = 0, frame_done;
  logic [23:0] pix_rgb;
  pix_word_t prev_word, out_word;
  logic [6:0] out_addr;
  int checks = 0, failures = 0;
  int lo_u [6], hi_u [6], lo_v [6], hi_v [6];
  logic [23:0] frame [2][N];
  int ylum [2][N];
  int n_amb = 0, n_edge = 0, n_stall = 0, n_fd = 0;

  preprocessor #(.IMG_W(W), .IMG_H(H), .FIFO_DEPTH(4)) dut (
    .clk, .rst_n, .cfg, .tc_we, .tc_addr, .tc_data,
    .pix_valid, .pix_ready, .pix_rgb, .prev_valid, .prev_ready, .prev_word,
    .out_valid, .out_ready, .out_addr, .out_word, .frame_done);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit in_rect(input int p, input int u, input int v);
    return u >= lo_u[p] && u <= hi_u[p] && v >= lo_v[p] && v <= hi_v[p];
  endfunction

  // camera side
  initial begin
    int f, i;
    cfg = '0;
    cfg.th_motion = 8'd20;
    cfg.th_edge1  = 8'd50;
    for (f = 0; f < 2; f++)
      for (i = 0; i < N; i++)
        frame[f][i] = (f == 1 && $urandom_range(0, 1)) ? frame[0][i] :
                      ($urandom_range(0, 1) ? {8'($urandom_range(150, 230)), 8'($urandom_range(90, 160)), 8'($urandom_range(60, 130))} : 24'($urandom));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 6; p++) begin
      int cu, cv, hw;
      cu = (p % 3 == 2) ? 150 : (p % 3 == 0) ? 110 : 150; cv = (p % 3 == 2) ? 110 : 140;
      hw = (p < 3) ? 25 : 60;
      lo_u[p] = cu - hw; hi_u[p] = cu + hw; lo_v[p] = cv - hw; hi_v[p] = cv + hw;
      for (int e = 0; e < 4; e++) begin
        @(negedge clk);
        tc_we = 1; tc_addr = 6'(p * NE + e);
        case (e)
          0: tc_data = {12'(1), 12'(0), 24'(-lo_u[p])};
          1: tc_data = {-12'sd1, 12'(0), 24'(hi_u[p])};
          2: tc_data = {12'(0), 12'(1), 24'(-lo_v[p])};
          default: tc_data = {12'(0), -12'sd1, 24'(hi_v[p])};
        endcase
      end
    end
    @(negedge clk);
    tc_we = 0;
    for (f = 0; f < 2; f++)
      for (i = 0; i < N; i++) begin
        pix_valid = ($urandom_range(0, 3) != 0);
        while (!pix_valid) begin @(negedge clk); pix_valid = ($urandom_range(0, 3) != 0); end
        pix_rgb = frame[f][i];
        @(posedge clk);
        while (!pix_ready) begin n_stall++; @(posedge clk); end
        @(negedge clk);
        pix_valid = 0;
      end
  end

  // memory side: previous-frame words (first frame: zeros, then frame 0 output)
  pix_word_t stored [N];
  initial begin
    for (int i = 0; i < N; i++) stored[i] = '0;
    wait (rst_n);
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        prev_valid = 1;
        prev_word = (f == 0) ? pix_word_t'('0) : stored[i];
        @(posedge clk);
        while (!prev_ready) @(posedge clk);
        @(negedge clk);
        prev_valid = 0;
        if (f == 0 && i == N - 1) wait (n_fd == 1);
      end
  end

  // memory side: output words
  initial begin
    int f = 0, i = 0;
    wait (rst_n);
    while (f < 2) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        pix_word_t w;
        int ey, gx, gy;
        bit inner, outer, e_amb;
        tern_t et;
        w = out_word;
        checks++;
        if (out_addr != 7'(i)) failures++;
        checks++;
        if ({w.r, w.g, w.b} != frame[f][i]) failures++;
        for (int ch = 0; ch < 3; ch++) begin
          int e, got;
          e = ycc_ref(frame[f][i][23:16], frame[f][i][15:8], frame[f][i][7:0], ch);
          got = (ch == 0) ? w.y : (ch == 1) ? w.cb : w.cr;
          checks++;
          if (got - e > 1 || e - got > 1) failures++;
        end
        inner = in_rect(0, w.cb, w.y) && in_rect(1, w.cr, w.y) && in_rect(2, w.cr, w.cb);
        outer = in_rect(3, w.cb, w.y) && in_rect(4, w.cr, w.y) && in_rect(5, w.cr, w.cb);
        et = inner ? T_WHITE : outer ? T_GRAY : T_BLACK;
        checks++;
        if (w.tern != et) failures++;
        ylum[f][i] = w.y;
        ey = (f == 0) ? 0 : ylum[0][i];
        e_amb = ((w.y > ey ? w.y - ey : ey - w.y) > 20) && (et != T_BLACK);
        checks++;
        if (w.amb != e_amb) failures++;
        n_amb += e_amb;
        gx = (i % W == 0) ? 0 : (w.y > ylum[f][i-1] ? w.y - ylum[f][i-1] : ylum[f][i-1] - w.y);
        gy = (i < W) ? 0 : (w.y > ylum[f][i-W] ? w.y - ylum[f][i-W] : ylum[f][i-W] - w.y);
        checks++;
        if (w.edg != (gx + gy > 50)) failures++;
        n_edge += (gx + gy > 50);
        if (f == 0) stored[i] = w;
        checks++;
        if (frame_done != (i == N - 1)) failures++;
        if (frame_done) n_fd++;
        i++;
        if (i == N) begin i = 0; f++; end
      end
    end
    $display("ambulant=%0d edges=%0d camera stalls=%0d", n_amb, n_edge, n_stall);
    if (n_amb == 0 || n_edge == 0 || n_fd != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
