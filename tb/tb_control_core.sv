// tb_control_core: three behavioural cores with random service times answer
// classification requests from a fixed candidate map (with holes that must
// be annexed). Checks: every window classified exactly once in pass 1, the
// windows segmented in pass 2 are exactly the candidates plus the annexed
// ones, no core is started while busy, the counters, and one done pulse per
// frame. Eight frames are run: a closed ring whose hole is annexed, two
// U shapes whose open side must stop annexing, and six random maps.
module tb_control_core;
  localparam int NC = 3, W = 40, H = 24, NWX = 9, NWY = 5, NFR = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done, mode;
  logic [NC-1:0] cstart, cbusy, cdone, ccand;
  logic [3:0] cwx, wxs [NC];
  logic [2:0] cwy, wys [NC];
  logic [5:0] n_cand, n_annex, n_seg;
  bit cmap [NWY][NWX];
  int cls_cnt [NWY][NWX], seg_cnt [NWY][NWX];
  int timer [NC];
  int checks = 0, failures = 0, ndone = 0;

  control_core #(.N_CORES(NC), .IMG_W(W), .IMG_H(H)) dut (
    .clk, .rst_n, .start, .busy, .done, .core_start(cstart), .cmd_mode(mode),
    .cmd_wx(cwx), .cmd_wy(cwy), .core_busy(cbusy), .core_done(cdone), .core_cand(ccand),
    .core_wx(wxs), .core_wy(wys), .n_cand, .n_annex, .n_seg);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural cores
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cbusy <= '0; cdone <= '0; ccand <= '0;
      for (int k = 0; k < NC; k++) begin timer[k] <= 0; wxs[k] <= '0; wys[k] <= '0; end
    end else begin
      cdone <= '0;
      for (int k = 0; k < NC; k++) begin
        if (cstart[k]) begin
          if (cbusy[k]) failures++;
          cbusy[k] <= 1'b1;
          timer[k] <= $urandom_range(1, 6);
          wxs[k] <= cwx; wys[k] <= cwy;
          if (mode) seg_cnt[cwy][cwx]++; else cls_cnt[cwy][cwx]++;
        end else if (cbusy[k]) begin
          if (timer[k] == 0) begin
            cbusy[k] <= 1'b0;
            cdone[k] <= 1'b1;
            ccand[k] <= cmap[wys[k]][wxs[k]];
          end else timer[k] <= timer[k] - 1;
        end
      end
    end
  end

  always @(posedge clk) if (done) ndone++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NFR; f++) begin
      int ec, ea;
      ec = 0; ea = 0;
      for (int y = 0; y < NWY; y++)
        for (int x = 0; x < NWX; x++) begin
          if (f == 0)       // closed ring: the hole at (4,2) is annexed
            cmap[y][x] = x >= 2 && x <= 6 && y >= 1 && y <= 3 && !(x == 4 && y == 2);
          else if (f == 1)  // U shapes: (4,2) lacks its south, (1,2) its east neighbour
            cmap[y][x] = (x == 4 && y == 1) || (x == 3 && y == 2) || (x == 5 && y == 2) ||
                         (x == 1 && y == 1) || (x == 1 && y == 3) || (x == 0 && y == 2);
          else
            cmap[y][x] = 1'($urandom_range(0, 1));
          cls_cnt[y][x] = 0; seg_cnt[y][x] = 0;
        end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      for (int y = 0; y < NWY; y++)
        for (int x = 0; x < NWX; x++) begin
          bit ann, sel;
          ann = !cmap[y][x] && x > 0 && y > 0 && x < NWX - 1 && y < NWY - 1 &&
                cmap[y][x-1] && cmap[y][x+1] && cmap[y-1][x] && cmap[y+1][x];
          sel = cmap[y][x] || ann;
          ec += cmap[y][x]; ea += ann;
          checks += 2;
          if (cls_cnt[y][x] != 1) begin failures++; $display("cls %0d,%0d = %0d", x, y, cls_cnt[y][x]); end
          if (seg_cnt[y][x] != (sel ? 1 : 0)) begin failures++; $display("seg %0d,%0d = %0d sel %0d", x, y, seg_cnt[y][x], sel); end
        end
      checks += 3;
      if (int'(n_cand) != ec) failures++;
      if (int'(n_annex) != ea) failures++;
      if (int'(n_seg) != ec + ea) failures++;
      $display("frame %0d: candidates=%0d annexed=%0d dut %0d %0d %0d", f, ec, ea, n_cand, n_annex, n_seg);
      if (f == 0 && ea == 0) failures++;
    end
    checks++;
    if (ndone != NFR) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
