// top_harness.svh: body shared by the end-to-end testbenches of
// skin_detector_top. The including module defines W, H, NC (frame size and
// core count of the instance), NFRAMES, OVERRUN_AT (index of a frame sent
// back-to-back with the previous one, -1 for none), STALL and REQUIRE_ALL,
// includes this file, and then instantiates skin_detector_top on the signals
// declared here.
//
// The synthetic video shows a skin-coloured "face" that moves one pixel to
// the right per frame, with a dark hole (eyes) in its middle, over a random
// background. For every segmented frame the testbench checks the stored
// words, the candidate / annexed / segmented window counts against a
// reference window selection, and every result word against the reference
// chain of the windows that cover the pixel (any of them may have written
// last). It counts how often each mechanism of the design happened.
  import skin_pkg::*;
  import skin_ref_pkg::*;
  localparam int N = W * H;
  localparam int NWX = (W - 8) / 4 + 1, NWY = (H - 8) / 4 + 1;
  localparam int AW = $clog2(N);

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic tc_we = 0, hist_we = 0;
  logic [5:0] tc_addr;
  logic [47:0] tc_data;
  logic [11:0] hist_waddr, hist_wdata;
  logic pix_valid = 0, pix_ready;
  logic [23:0] pix_rgb;
  logic prev_valid, prev_ready, pp_valid, pp_ready;
  pix_word_t prev_word, pp_word;
  logic [AW-1:0] pp_addr;
  logic rd_req [NC], rd_gnt [NC], rd_valid [NC], wr_req [NC], wr_gnt [NC];
  logic [AW-1:0] rd_addr [NC], wr_addr [NC];
  pix_word_t rd_word [NC];
  res_word_t rd_res [NC], wr_data [NC];
  logic frame_stored, frame_done, seg_busy, overrun;
  logic [$clog2(NWX * NWY + 1)-1:0] n_cand, n_annex, n_seg;
  int n_rd_stall, n_pp_stall;
  int checks = 0, failures = 0;
  int m_amb = 0, m_edge = 0, m_cand = 0, m_rej = 0, m_annex = 0, m_seed = 0, m_grow1 = 0,
      m_grow2 = 0, m_cut = 0, m_fb = 0, m_overrun = 0, m_cam_stall = 0, m_frames = 0;
  logic [23:0] frames [NFRAMES][N];

  always #5 clk = ~clk;

  mem_model #(.IMG_W(W), .IMG_H(H), .N_CORES(NC), .STALL_PCT(STALL)) mem (
    .clk, .rst_n, .frame_stored, .seg_busy,
    .prev_valid, .prev_ready, .prev_word, .pp_valid, .pp_ready, .pp_addr, .pp_word,
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_word, .rd_res,
    .wr_req, .wr_addr, .wr_data, .wr_gnt, .n_rd_stall, .n_pp_stall);

  always @(posedge clk) begin
    if (overrun) m_overrun++;
    if (frame_done) m_frames++;
  end

  function automatic logic [23:0] gen_pix(input int f, input int x, input int y);
    int xs;
    xs = x - f;
    if (xs >= 3 * W / 8 && xs < 5 * W / 8 && y >= H / 3 && y < 2 * H / 3)
      return {8'($urandom_range(10, 30)), 8'($urandom_range(10, 30)), 8'($urandom_range(10, 30))};
    if (xs >= W / 4 && xs < 3 * W / 4)
      return {8'($urandom_range(180, 215)), 8'($urandom_range(130, 160)), 8'($urandom_range(100, 130))};
    return 24'($urandom);
  endfunction

  // histogram: skin box of quantised colours gets high P(skin)
  function automatic logic [11:0] hist_val(input int i);
    int r, g, b;
    bit skin;
    r = i / 256; g = (i / 16) % 16; b = i % 16;
    skin = (r >= 11 && r <= 13 && g >= 8 && g <= 9 && b >= 6 && b <= 8);
    if (skin) return {6'(36 + (i * 7) % 28), 6'((i * 5) % 18)};
    return {6'((i * 3) % 24), 6'(20 + (i * 11) % 44)};
  endfunction

  // reference selection and segmentation of the frame held in half h
  task automatic check_frame(input int f);
    int h, cmap [NWY][NWX], ec, ea, es;
    logic [24:0] refv [][4];
    int nref [];
    h = mem.seg;
    refv = new[N];
    nref = new[N];
    for (int i = 0; i < N; i++) nref[i] = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if ({mem.fbuf[h][i].r, mem.fbuf[h][i].g, mem.fbuf[h][i].b} != frames[f][i]) failures++;
      m_amb += mem.fbuf[h][i].amb;
      m_edge += mem.fbuf[h][i].edg;
    end
    ec = 0; ea = 0; es = 0;
    for (int wy = 0; wy < NWY; wy++)
      for (int wx = 0; wx < NWX; wx++) begin
        int t [64], o [64], nw, ng;
        for (int i = 0; i < 64; i++) t[i] = mem.fbuf[h][(wy * 4 + i / 8) * W + wx * 4 + i % 8].tern;
        nb_ref(t, cfg.nb_k, cfg.nb_th1, cfg.nb_th2, o);
        nw = 0; ng = 0;
        for (int i = 0; i < 64; i++) begin nw += (o[i] == 3); ng += (o[i] == 2); end
        cmap[wy][wx] = (nw > 0 && nw >= cfg.min_white && ng >= cfg.min_gray);
        ec += cmap[wy][wx];
      end
    for (int wy = 0; wy < NWY; wy++)
      for (int wx = 0; wx < NWX; wx++) begin
        bit ann;
        ann = !cmap[wy][wx] && wx > 0 && wy > 0 && wx < NWX - 1 && wy < NWY - 1 &&
              cmap[wy][wx-1] && cmap[wy][wx+1] && cmap[wy-1][wx] && cmap[wy+1][wx];
        ea += ann;
        if (cmap[wy][wx] || ann) begin
          int base, v [3][64], cls [3][64], yy [64], ps [64], pn [64], wts [5];
          bit amb [64], edg [64], fb [64], seed [64], fd1 [64], fd2 [64];
          es++;
          base = wy * 4 * W + wx * 4;
          for (int i = 0; i < 64; i++) begin
            pix_word_t p;
            int a;
            a = base + (i / 8) * W + (i % 8);
            p = mem.fbuf[h][a];
            v[0][i] = p.y; v[1][i] = p.cb; v[2][i] = p.cr; yy[i] = p.y;
            amb[i] = p.amb; edg[i] = p.edg; fb[i] = mem.rbuf[1 - h][a].fd1;
            ps[i] = hist_val({p.r[7:4], p.g[7:4], p.b[7:4]}) >> 6;
            pn[i] = hist_val({p.r[7:4], p.g[7:4], p.b[7:4]}) & 12'h3f;
          end
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
            refv[a][nref[a]] = {fd1[i], fm ? {mem.fbuf[h][a].r, mem.fbuf[h][a].g, mem.fbuf[h][a].b} : 24'd0};
            nref[a]++;
            m_seed += seed[i]; m_grow1 += (fd1[i] && !seed[i]); m_grow2 += (fd2[i] && !fd1[i]);
            m_cut += (fd2[i] && !fm); m_fb += (fb[i] && !amb[i]);
          end
        end
      end
    m_cand += ec; m_annex += ea; m_rej += NWX * NWY - ec - ea;
    checks += 3;
    if (int'(n_cand) != ec || int'(n_annex) != ea || int'(n_seg) != es) begin
      failures++;
      $display("frame %0d windows: dut cand=%0d annex=%0d seg=%0d, ref %0d %0d %0d", f, n_cand, n_annex, n_seg, ec, ea, es);
    end
    for (int i = 0; i < N; i++) begin
      bit ok;
      ok = (nref[i] == 0) ? (mem.rbuf[h][i] == '0) : 1'b0;
      for (int k = 0; k < nref[i]; k++) if (mem.rbuf[h][i] == refv[i][k]) ok = 1'b1;
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 8) $display("frame %0d pixel %0d: result %h not among %0d window results", f, i, mem.rbuf[h][i], nref[i]);
      end
    end
    $display("frame %0d: %0d candidate, %0d annexed, %0d segmented windows of %0d", f, ec, ea, es, NWX * NWY);
  endtask

  task automatic send_frame(input int f);
    for (int i = 0; i < N; i++) begin
      pix_valid = ($urandom_range(0, 9) != 0);
      while (!pix_valid) begin m_cam_stall++; @(negedge clk); pix_valid = ($urandom_range(0, 9) != 0); end
      pix_rgb = frames[f][i];
      @(posedge clk);
      while (!pix_ready) @(posedge clk);
      @(negedge clk);
      pix_valid = 0;
    end
  endtask

  initial begin
    int start_cyc, cyc;
    cfg = '0;
    cfg.th_motion = 8'd25;  cfg.th_edge1 = 8'd60;  cfg.th_edge2 = 8'd110;
    cfg.nb_k = 4'd2;        cfg.nb_th1 = 10'd14;   cfg.nb_th2 = 10'd44;
    cfg.min_white = 7'd20;  cfg.min_gray = 7'd0;
    cfg.th_pure = 6'd38;    cfg.theta_amb = 8'd24; cfg.theta_fb = 8'd40; cfg.theta_hi = 8'd70;
    cfg.d1_th = 3'd1;       cfg.d1_th_amb = 3'd2;
    cfg.w = {4'd2, 4'd3, 4'd6, 4'd4, 4'd3};
    cfg.beta = 8'd8;        cfg.th_f = 14'd700;   cfg.theta_final = 8'd16;
    for (int f = 0; f < NFRAMES; f++)
      for (int i = 0; i < N; i++) frames[f][i] = gen_pix(f, i % W, i / W);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // polygons: inner / outer boxes in (Cb,Y), (Cr,Y), (Cr,Cb)
    for (int p = 0; p < 6; p++) begin
      int lu, hu, lv, hv;
      case (p)
        0: begin lu = 90;  hu = 125; lv = 90;  hv = 200; end
        1: begin lu = 140; hu = 175; lv = 90;  hv = 200; end
        2: begin lu = 140; hu = 175; lv = 90;  hv = 125; end
        3: begin lu = 75;  hu = 140; lv = 50;  hv = 235; end
        4: begin lu = 128; hu = 190; lv = 50;  hv = 235; end
        default: begin lu = 128; hu = 190; lv = 75; hv = 140; end
      endcase
      for (int e = 0; e < 4; e++) begin
        @(negedge clk);
        tc_we = 1; tc_addr = 6'(p * 6 + e);
        case (e)
          0: tc_data = {12'(1), 12'(0), 24'(-lu)};
          1: tc_data = {-12'sd1, 12'(0), 24'(hu)};
          2: tc_data = {12'(0), 12'(1), 24'(-lv)};
          default: tc_data = {12'(0), -12'sd1, 24'(hv)};
        endcase
      end
    end
    @(negedge clk);
    tc_we = 0;
    for (int i = 0; i < 4096; i++) begin
      hist_we = 1; hist_waddr = 12'(i); hist_wdata = hist_val(i);
      @(negedge clk);
    end
    hist_we = 0;
    for (int f = 0; f < NFRAMES; f++) begin
      int target;
      if (f == OVERRUN_AT) continue;   // already sent behind the frame before it
      while (seg_busy) @(negedge clk);
      target = m_frames + 1;
      start_cyc = int'($time / 10);
      send_frame(f);
      if (f + 1 == OVERRUN_AT) send_frame(f + 1);
      while (m_frames < target) @(negedge clk);
      cyc = int'($time / 10) - start_cyc;
      $display("frame %0d: stored and segmented in %0d clocks", f, cyc);
      check_frame(f);
    end
    $display("mechanisms: ambulant=%0d edge=%0d cand=%0d rejected=%0d annexed=%0d seed=%0d grow1=%0d grow2=%0d final_cut=%0d feedback=%0d overrun=%0d rd_stall=%0d pp_stall=%0d cam_stall=%0d frames=%0d",
             m_amb, m_edge, m_cand, m_rej, m_annex, m_seed, m_grow1, m_grow2, m_cut, m_fb,
             m_overrun, n_rd_stall, n_pp_stall, m_cam_stall, m_frames);
    if (m_cand == 0 || m_seed == 0 || m_grow1 == 0 || m_frames == 0) failures++;
    if (REQUIRE_ALL && (m_amb == 0 || m_edge == 0 || m_rej == 0 || m_annex == 0 || m_grow2 == 0 ||
                        m_cut == 0 || m_fb == 0 || m_overrun == 0 || n_rd_stall == 0 || n_pp_stall == 0 ||
                        m_cam_stall == 0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
