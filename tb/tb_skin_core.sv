// tb_skin_core: one core on a 16x16 frame held in a memory model with a
// two-clock read latency and random grant stalls. Every window is first
// classified and then segmented. The candidate bit is checked against the
// reference refinement and counts; each segmented window's 64 written result
// words are checked against the reference chain (Otsu classes, seed, first
// diffusion to its fixed point, second diffusion, final filter).
module tb_skin_core;
  import skin_pkg::*;
  import skin_ref_pkg::*;
  localparam int W = 16, H = 16, N = W * H;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic start = 0, mode = 0, busy, done, cand;
  logic [1:0] wx, wy, cwx, cwy;
  logic [6:0] n_seed, n_fd1, n_fd2, n_mask, n_steps;
  logic rd_req, rd_gnt, rd_valid, wr_req, wr_gnt;
  logic [7:0] rd_addr, wr_addr;
  pix_word_t rd_word;
  res_word_t rd_res, wr_data;
  logic [11:0] hist_addr, hist_data;
  pix_word_t mem [N];
  res_word_t prev_res [N];
  res_word_t got [N];
  bit written [N];
  logic [11:0] hist [4096];
  int checks = 0, failures = 0;
  int m_seed = 0, m_grow1 = 0, m_grow2 = 0, m_cut = 0, m_cand = 0, m_rej = 0, m_stall = 0;

  skin_core #(.IMG_W(W), .IMG_H(H)) dut (
    .clk, .rst_n, .cfg, .start, .mode, .wx, .wy, .busy, .done, .cand,
    .cur_wx(cwx), .cur_wy(cwy), .n_seed, .n_fd1, .n_fd2, .n_mask, .n_fd1_steps(n_steps),
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_word, .rd_res,
    .wr_req, .wr_addr, .wr_data, .wr_gnt, .hist_addr, .hist_data);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: reads answered two clocks after the grant, in order
  logic [7:0] pipe_a [2];
  logic pipe_v [2];
  always_ff @(posedge clk) begin
    hist_data <= hist[hist_addr];
    pipe_v[0] <= rd_req && rd_gnt;
    pipe_a[0] <= rd_addr;
    pipe_v[1] <= pipe_v[0];
    pipe_a[1] <= pipe_a[0];
    if (wr_req && wr_gnt) begin
      got[wr_addr] <= wr_data;
      written[wr_addr] <= 1'b1;
    end
  end
  assign rd_valid = pipe_v[1];
  assign rd_word  = mem[pipe_a[1]];
  assign rd_res   = prev_res[pipe_a[1]];
  always @(negedge clk) begin
    rd_gnt = ($urandom_range(0, 4) != 0);
    wr_gnt = ($urandom_range(0, 4) != 0);
    if (rd_req && !rd_gnt) m_stall++;
  end

  task automatic run(input int x, input int y, input bit md);
    @(negedge clk);
    start = 1; mode = md; wx = 2'(x); wy = 2'(y);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  // full reference for one window
  task automatic check_window(input int x, input int y);
    int base, t [64], o [64], nw, ng, v [3][64], cls [3][64], yy [64], ps [64], pn [64], wts [5];
    bit amb [64], edg [64], fb [64], seed [64], fd1 [64], fd2 [64];
    base = y * 4 * W + x * 4;
    for (int i = 0; i < 64; i++) begin
      pix_word_t p;
      p = mem[base + (i / 8) * W + (i % 8)];
      t[i] = p.tern; v[0][i] = p.y; v[1][i] = p.cb; v[2][i] = p.cr; yy[i] = p.y;
      amb[i] = p.amb; edg[i] = p.edg; fb[i] = prev_res[base + (i / 8) * W + (i % 8)].fd1;
      ps[i] = hist[{p.r[7:4], p.g[7:4], p.b[7:4]}][11:6];
      pn[i] = hist[{p.r[7:4], p.g[7:4], p.b[7:4]}][5:0];
    end
    nb_ref(t, cfg.nb_k, cfg.nb_th1, cfg.nb_th2, o);
    nw = 0; ng = 0;
    for (int i = 0; i < 64; i++) begin nw += (o[i] == 3); ng += (o[i] == 2); end
    run(x, y, 0);
    checks++;
    if (cand !== (nw > 0 && nw >= cfg.min_white && ng >= cfg.min_gray)) failures++;
    if (cand) m_cand++; else m_rej++;
    for (int i = 0; i < N; i++) written[i] = 0;
    run(x, y, 1);
    for (int ch = 0; ch < 3; ch++) begin
      int t1, t2; real best;
      otsu_ref(v[ch], t1, t2, best);
      for (int i = 0; i < 64; i++) cls[ch][i] = (v[ch][i] / 16 <= t1) ? 0 : (v[ch][i] / 16 <= t2) ? 1 : 2;
    end
    for (int i = 0; i < 64; i++)
      seed[i] = seed_ref(ps[i], pn[i], amb[i], fb[i], cfg.th_pure, cfg.theta_amb, cfg.theta_fb, cfg.theta_hi);
    diff1_ref(seed, cls, edg, amb, cfg.d1_th, cfg.d1_th_amb, fd1);
    for (int k = 0; k < 5; k++) wts[k] = cfg.w[k];
    diff2_ref(fd1, cls, yy, ps, amb, fb, wts, cfg.beta, cfg.th_f, cfg.th_edge2, fd2);
    for (int i = 0; i < 64; i++) begin
      int a;
      bit fm;
      a = base + (i / 8) * W + (i % 8);
      fm = fd2[i] && ratio_ref(ps[i], pn[i], cfg.theta_final);
      m_seed += seed[i]; m_grow1 += (fd1[i] && !seed[i]); m_grow2 += (fd2[i] && !fd1[i]); m_cut += (fd2[i] && !fm);
      checks++;
      if (!written[a] || got[a].fd1 !== fd1[i] ||
          got[a].rgb !== (fm ? {mem[a].r, mem[a].g, mem[a].b} : 24'd0)) begin
        failures++;
        if (failures < 6) $display("win %0d,%0d px %0d: got fd1=%b rgb=%h exp fd1=%b mask=%b", x, y, i, got[a].fd1, got[a].rgb, fd1[i], fm);
      end
    end
  endtask

  initial begin
    cfg = '0;
    cfg.th_edge2 = 8'd90;  cfg.nb_k = 4'd2; cfg.nb_th1 = 10'd12; cfg.nb_th2 = 10'd40;
    cfg.min_white = 7'd6;  cfg.min_gray = 7'd4;
    cfg.th_pure = 6'd35;   cfg.theta_amb = 8'd40; cfg.theta_fb = 8'd60; cfg.theta_hi = 8'd120;
    cfg.d1_th = 3'd1;      cfg.d1_th_amb = 3'd2;
    cfg.w = {4'd3, 4'd3, 4'd4, 4'd5, 4'd2};
    cfg.beta = 8'd10;      cfg.th_f = 14'd600; cfg.theta_final = 8'd10;
    for (int i = 0; i < 4096; i++) hist[i] = {6'($urandom), 6'($urandom)};
    for (int i = 0; i < N; i++) begin
      int r, c, q;
      r = i / W; c = i % W;
      q = (r >= 6 && r < 14 && c >= 6 && c < 14) ? 1 : 0;
      mem[i] = '{r: 8'(q ? $urandom_range(170, 230) : $urandom), g: 8'(q ? $urandom_range(110, 150) : $urandom),
                 b: 8'(q ? $urandom_range(80, 120) : $urandom),
                 y: 8'(q ? $urandom_range(120, 160) : $urandom), cb: 8'(q ? $urandom_range(100, 120) : $urandom),
                 cr: 8'(q ? $urandom_range(140, 170) : $urandom),
                 tern: q ? ($urandom_range(0, 2) ? T_WHITE : T_GRAY) : ($urandom_range(0, 3) ? T_BLACK : T_GRAY),
                 amb: 1'($urandom_range(0, 3) == 0), edg: 1'($urandom_range(0, 5) == 0)};
      prev_res[i] = '{fd1: 1'($urandom_range(0, 2) == 0), rgb: 24'($urandom)};
      if (q) hist[{mem[i].r[7:4], mem[i].g[7:4], mem[i].b[7:4]}] = {6'($urandom_range(30, 63)), 6'($urandom_range(0, 20))};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < 3; y++)
      for (int x = 0; x < 3; x++) check_window(x, y);
    $display("cand=%0d rej=%0d seeds=%0d grow1=%0d grow2=%0d final_cut=%0d stalls=%0d",
             m_cand, m_rej, m_seed, m_grow1, m_grow2, m_cut, m_stall);
    if (m_cand == 0 || m_rej == 0 || m_seed == 0 || m_grow1 == 0 || m_grow2 == 0 || m_cut == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
