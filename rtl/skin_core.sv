// skin_core: one skin detector core with its own control.
//
// The core is handed one 8x8 window (window indices wx, wy; the window's
// top-left pixel is (4*wx, 4*wy)) and a mode:
//   mode 0, classify: fetch the window's 64 tagged words and report whether
//     the window is a candidate (window processing: neighbour-based ternary
//     refinement, then white/gray counts).
//   mode 1, segment: fetch the window, run three-class Otsu on Y, Cb and Cr
//     (three units in parallel) while looking up the skin / non-skin
//     histogram of every pixel, form the initial seed, grow it with the first
//     diffusion until it stops changing, apply the second diffusion and the
//     final Bayesian filter, and write the 64 result words.
// The window buffer (the 8x8 pixel store of the core) is a register array.
//
// Memory ports: rd_req/rd_addr issue one read per clock while rd_gnt is high;
// responses return in order on rd_valid with the stored word and the
// previous frame's result word for the same pixel (its fd1 bit is the
// first-diffusion feedback). wr_req/wr_addr/wr_data write one result word per
// clock while wr_gnt is high. Histogram port: hist_addr in one clock,
// hist_data the next.
//
// Timing (no memory stalls, read latency L): classify 64+L+2 clocks;
// segment about 64+L (fetch) + 106 (Otsu, histogram in parallel) + first-
// diffusion steps + 2 + 64 (write). busy is high from the clock after start
// until done, and done pulses for one clock with cand and the statistics.
// The sequence of steps follows the algorithm and the block diagram; the
// command interface, the memory protocol and the schedule are this design's.
// rst_n is an asynchronous reset that also gates the protocol assertions
// (disable iff), so lint reports it as used both synchronously and
// asynchronously; that is intended.
module skin_core
  import skin_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  localparam int unsigned AW   = $clog2(IMG_W * IMG_H),
  localparam int unsigned NWX  = (IMG_W - WIN) / STRIDE + 1,
  localparam int unsigned NWY  = (IMG_H - WIN) / STRIDE + 1,
  localparam int unsigned WXW  = $clog2(NWX),
  localparam int unsigned WYW  = $clog2(NWY)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  // command
  input  logic             start,
  input  logic             mode,
  input  logic [WXW-1:0]   wx,
  input  logic [WYW-1:0]   wy,
  output logic             busy,
  output logic             done,
  output logic             cand,
  output logic [WXW-1:0]   cur_wx,
  output logic [WYW-1:0]   cur_wy,
  output logic [6:0]       n_seed,
  output logic [6:0]       n_fd1,
  output logic [6:0]       n_fd2,
  output logic [6:0]       n_mask,
  output logic [6:0]       n_fd1_steps,
  // memory read
  output logic             rd_req,
  output logic [AW-1:0]    rd_addr,
  input  logic             rd_gnt,
  input  logic             rd_valid,
  input  pix_word_t        rd_word,
  input  res_word_t        rd_res,
  // memory write
  output logic             wr_req,
  output logic [AW-1:0]    wr_addr,
  output res_word_t        wr_data,
  input  logic             wr_gnt,
  // histogram
  output logic [11:0]      hist_addr,
  input  logic [11:0]      hist_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_CLASS, S_FEAT, S_DIFF1, S_DIFF2, S_WRITE, S_DONE} state_t;
  state_t state;

  logic            mode_r;
  logic [AW-1:0]   base;
  pix_word_t       wbuf [NPIX];
  logic [NPIX-1:0] prev_fd;
  logic [5:0]      ps [NPIX];
  logic [5:0]      pn [NPIX];
  logic [6:0]      ic, rc, hc, wc;
  logic            otsu_start, otsu_fin;
  logic [NPIX-1:0] set1, fd1, set2, maskv;

  // window views
  tern_t           tern_v [NPIX];
  logic [7:0]      yv [NPIX], cbv [NPIX], crv [NPIX];
  logic [NPIX-1:0] amb_v, edg_v;
  always_comb begin
    for (int i = 0; i < NPIX; i++) begin
      tern_v[i] = wbuf[i].tern;
      yv[i]     = wbuf[i].y;
      cbv[i]    = wbuf[i].cb;
      crv[i]    = wbuf[i].cr;
      amb_v[i]  = wbuf[i].amb;
      edg_v[i]  = wbuf[i].edg;
    end
  end

  // window processing
  logic [6:0] nw, ng;
  logic       wc_cand;
  window_classifier u_wc (.tern(tern_v), .cfg(cfg), .n_white(nw), .n_gray(ng), .candidate(wc_cand));

  // Otsu on three channels
  logic [1:0] cls [3][NPIX];
  logic [2:0] o_busy, o_done;
  logic [3:0] o_t1 [3], o_t2 [3];
  otsu_threshold #(.N_PIX(NPIX)) u_otsu_y  (.clk, .rst_n, .start(otsu_start), .pix(yv),
    .busy(o_busy[0]), .done(o_done[0]), .t1_o(o_t1[0]), .t2_o(o_t2[0]), .cls(cls[0]));
  otsu_threshold #(.N_PIX(NPIX)) u_otsu_cb (.clk, .rst_n, .start(otsu_start), .pix(cbv),
    .busy(o_busy[1]), .done(o_done[1]), .t1_o(o_t1[1]), .t2_o(o_t2[1]), .cls(cls[1]));
  otsu_threshold #(.N_PIX(NPIX)) u_otsu_cr (.clk, .rst_n, .start(otsu_start), .pix(crv),
    .busy(o_busy[2]), .done(o_done[2]), .t1_o(o_t1[2]), .t2_o(o_t2[2]), .cls(cls[2]));

  // seed, diffusions, final mask
  logic [NPIX-1:0] seed_v, d1_next, d2_out, edge2, mask_next;
  for (genvar i = 0; i < NPIX; i++) begin : g_pix
    seed_gen u_seed (.ps(ps[i]), .pn(pn[i]), .ambulant(amb_v[i]), .prev_fd(prev_fd[i]),
                     .cfg(cfg), .seed(seed_v[i]));
    final_mask u_fm (.diff2(d2_out[i]), .ps(ps[i]), .pn(pn[i]),
                     .theta_final(cfg.theta_final), .mask(mask_next[i]));
  end

  first_diffusion u_d1 (.set_in(set1), .cls(cls), .edg(edg_v), .amb(amb_v),
                        .th(cfg.d1_th), .th_amb(cfg.d1_th_amb), .set_out(d1_next));

  second_diffusion u_d2 (.seed(fd1), .cls(cls), .y(yv), .ps(ps), .amb(amb_v),
                         .prev_fd(prev_fd), .cfg(cfg), .edge2(edge2), .set_out(d2_out));

  function automatic logic [6:0] popc(input logic [NPIX-1:0] v);
    logic [6:0] n;
    n = '0;
    for (int i = 0; i < NPIX; i++) n = n + 7'(v[i]);
    return n;
  endfunction

  // addresses
  assign rd_req  = (state == S_LOAD) && (ic < 7'(NPIX));
  assign rd_addr = base + AW'(ic[5:3]) * AW'(IMG_W) + AW'(ic[2:0]);
  assign wr_req  = (state == S_WRITE);
  assign wr_addr = base + AW'(wc[5:3]) * AW'(IMG_W) + AW'(wc[2:0]);
  assign wr_data = '{fd1: fd1[wc[5:0]],
                     rgb: maskv[wc[5:0]] ? {wbuf[wc[5:0]].r, wbuf[wc[5:0]].g, wbuf[wc[5:0]].b} : 24'd0};
  assign hist_addr = {wbuf[hc[5:0]].r[7:4], wbuf[hc[5:0]].g[7:4], wbuf[hc[5:0]].b[7:4]};
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      mode_r <= 1'b0; base <= '0; cur_wx <= '0; cur_wy <= '0;
      ic <= '0; rc <= '0; hc <= '0; wc <= '0;
      otsu_start <= 1'b0; otsu_fin <= 1'b0;
      done <= 1'b0; cand <= 1'b0;
      set1 <= '0; fd1 <= '0; set2 <= '0; maskv <= '0; prev_fd <= '0;
      n_seed <= '0; n_fd1 <= '0; n_fd2 <= '0; n_mask <= '0; n_fd1_steps <= '0;
      for (int i = 0; i < NPIX; i++) begin
        wbuf[i] <= '0; ps[i] <= '0; pn[i] <= '0;
      end
    end else begin
      done       <= 1'b0;
      otsu_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          mode_r <= mode;
          cur_wx <= wx;
          cur_wy <= wy;
          base   <= AW'(wy) * AW'(STRIDE * IMG_W) + AW'(wx) * AW'(STRIDE);
          ic <= '0; rc <= '0; hc <= '0; wc <= '0;
          cand <= 1'b0;
          n_seed <= '0; n_fd1 <= '0; n_fd2 <= '0; n_mask <= '0; n_fd1_steps <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (rd_req && rd_gnt) ic <= ic + 1'b1;
          if (rd_valid) begin
            wbuf[rc[5:0]]    <= rd_word;
            prev_fd[rc[5:0]] <= rd_res.fd1;
            rc <= rc + 1'b1;
            if (rc == 7'(NPIX - 1)) begin
              if (mode_r) begin
                state      <= S_FEAT;
                otsu_start <= 1'b1;
                otsu_fin   <= 1'b0;
              end else begin
                state <= S_CLASS;
              end
            end
          end
        end
        S_CLASS: begin
          cand  <= wc_cand;
          state <= S_DONE;
        end
        S_FEAT: begin
          // histogram look-ups: address hc now, data for hc-1 arrives
          if (hc <= 7'(NPIX)) hc <= hc + 1'b1;
          if (hc != 0 && hc <= 7'(NPIX)) begin
            ps[hc[5:0] - 1'b1] <= hist_data[11:6];
            pn[hc[5:0] - 1'b1] <= hist_data[5:0];
          end
          if (o_done[0]) otsu_fin <= 1'b1;
          if (otsu_fin && hc > 7'(NPIX)) begin
            set1   <= seed_v;
            n_seed <= popc(seed_v);
            state  <= S_DIFF1;
          end
        end
        S_DIFF1: begin
          set1 <= d1_next;
          n_fd1_steps <= n_fd1_steps + 1'b1;
          if (d1_next == set1) begin
            fd1   <= set1;
            n_fd1 <= popc(set1);
            state <= S_DIFF2;
          end
        end
        S_DIFF2: begin
          set2   <= d2_out;
          maskv  <= mask_next;
          n_fd2  <= popc(d2_out);
          n_mask <= popc(mask_next);
          state  <= S_WRITE;
        end
        S_WRITE: if (wr_gnt) begin
          wc <= wc + 1'b1;
          if (wc == 7'(NPIX - 1)) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a response must never arrive without an outstanding read
  a_rd_resp: assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> (state == S_LOAD && rc < ic));
  // a window command is only accepted while idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
