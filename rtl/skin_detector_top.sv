// skin_detector_top: real-time skin detector for video frames.
//
// Camera pixels stream into the pre-processor, which tags each pixel with
// YCbCr, its ternary class, motion (ambulant) and edge bits and sends the
// 52-bit words to external memory. When the last word of a frame is out, the
// control core has N_CORES skin cores classify every 8x8 window (step 4) of
// the stored frame, annexes windows surrounded by candidates, and has the
// cores segment the selected windows: Otsu homogeneity classes, Bayesian
// seed with motion and previous-frame feedback, two diffusions and a final
// Bayesian filter. Each core writes 25-bit result words to memory. All cores
// share one skin / non-skin histogram table.
//
// External memory (a memory controller with DRAM behind it) is not part of
// this RTL; its ports are brought out:
//   pp_*          pre-processor writes, {address, 52-bit word}, valid/ready
//   prev_*        the previous frame's words, in raster order, for motion
//   rd_* / wr_*   one read and one write port per core, see skin_core
// The memory side decides where the current and previous frames live.
// A frame that finishes storing while the cores still work on the previous
// one is not segmented and raises overrun for one clock.
module skin_detector_top
  import skin_pkg::*;
#(
  parameter int unsigned N_CORES    = 8,
  parameter int unsigned IMG_W      = 640,
  parameter int unsigned IMG_H      = 480,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned AW        = $clog2(IMG_W * IMG_H),
  localparam int unsigned NWX       = (IMG_W - WIN) / STRIDE + 1,
  localparam int unsigned NWY       = (IMG_H - WIN) / STRIDE + 1,
  localparam int unsigned NWIN_W    = $clog2(NWX * NWY + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  // trained tables
  input  logic              tc_we,
  input  logic [5:0]        tc_addr,
  input  logic [47:0]       tc_data,
  input  logic              hist_we,
  input  logic [11:0]       hist_waddr,
  input  logic [11:0]       hist_wdata,
  // camera
  input  logic              pix_valid,
  output logic              pix_ready,
  input  logic [23:0]       pix_rgb,
  // memory: previous frame words for motion
  input  logic              prev_valid,
  output logic              prev_ready,
  input  pix_word_t         prev_word,
  // memory: pre-processor writes
  output logic              pp_valid,
  input  logic              pp_ready,
  output logic [AW-1:0]     pp_addr,
  output pix_word_t         pp_word,
  // memory: per-core ports
  output logic              rd_req   [N_CORES],
  output logic [AW-1:0]     rd_addr  [N_CORES],
  input  logic              rd_gnt   [N_CORES],
  input  logic              rd_valid [N_CORES],
  input  pix_word_t         rd_word  [N_CORES],
  input  res_word_t         rd_res   [N_CORES],
  output logic              wr_req   [N_CORES],
  output logic [AW-1:0]     wr_addr  [N_CORES],
  output res_word_t         wr_data  [N_CORES],
  input  logic              wr_gnt   [N_CORES],
  // status
  output logic              frame_stored,
  output logic              frame_done,
  output logic              seg_busy,
  output logic              overrun,
  output logic [NWIN_W-1:0] n_cand,
  output logic [NWIN_W-1:0] n_annex,
  output logic [NWIN_W-1:0] n_seg
);
  localparam int unsigned WXW = $clog2(NWX);
  localparam int unsigned WYW = $clog2(NWY);

  preprocessor #(.IMG_W(IMG_W), .IMG_H(IMG_H), .FIFO_DEPTH(FIFO_DEPTH)) u_pre (
    .clk, .rst_n, .cfg,
    .tc_we, .tc_addr, .tc_data,
    .pix_valid, .pix_ready, .pix_rgb,
    .prev_valid, .prev_ready, .prev_word,
    .out_valid(pp_valid), .out_ready(pp_ready), .out_addr(pp_addr), .out_word(pp_word),
    .frame_done(frame_stored)
  );

  logic [N_CORES-1:0] core_start, core_busy, core_done, core_cand;
  logic               cmd_mode;
  logic [WXW-1:0]     cmd_wx;
  logic [WYW-1:0]     cmd_wy;
  logic [WXW-1:0]     core_wx [N_CORES];
  logic [WYW-1:0]     core_wy [N_CORES];
  logic [11:0]        h_addr [N_CORES];
  logic [11:0]        h_data [N_CORES];

  assign overrun = frame_stored && seg_busy;

  control_core #(.N_CORES(N_CORES), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_ctrl (
    .clk, .rst_n, .start(frame_stored), .busy(seg_busy), .done(frame_done),
    .core_start, .cmd_mode, .cmd_wx, .cmd_wy,
    .core_busy, .core_done, .core_cand, .core_wx, .core_wy,
    .n_cand, .n_annex, .n_seg
  );

  skin_histogram #(.N_PORTS(N_CORES)) u_hist (
    .clk, .wr_en(hist_we), .wr_addr(hist_waddr), .wr_data(hist_wdata),
    .rd_addr(h_addr), .rd_data(h_data)
  );

  for (genvar k = 0; k < N_CORES; k++) begin : g_core
    logic [6:0] ns, nf1, nf2, nm, nst;
    skin_core #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_core (
      .clk, .rst_n, .cfg,
      .start(core_start[k]), .mode(cmd_mode), .wx(cmd_wx), .wy(cmd_wy),
      .busy(core_busy[k]), .done(core_done[k]), .cand(core_cand[k]),
      .cur_wx(core_wx[k]), .cur_wy(core_wy[k]),
      .n_seed(ns), .n_fd1(nf1), .n_fd2(nf2), .n_mask(nm), .n_fd1_steps(nst),
      .rd_req(rd_req[k]), .rd_addr(rd_addr[k]), .rd_gnt(rd_gnt[k]),
      .rd_valid(rd_valid[k]), .rd_word(rd_word[k]), .rd_res(rd_res[k]),
      .wr_req(wr_req[k]), .wr_addr(wr_addr[k]), .wr_data(wr_data[k]), .wr_gnt(wr_gnt[k]),
      .hist_addr(h_addr[k]), .hist_data(h_data[k])
    );
  end
endmodule
