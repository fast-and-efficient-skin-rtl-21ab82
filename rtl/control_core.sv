// control_core: frame-level control of the skin detector cores.
//
// Once a frame is stored, the control core walks the window grid twice:
//   pass 1: every 8x8 window (step 4 pixels) is sent to an idle core in
//     classify mode; each core's answer sets the window's bit in the
//     candidate map.
//   morphology: a window that is not a candidate but whose four edge
//     neighbours all are is annexed (this restores face parts such as eyes
//     or glasses whose colour is not skin-like).
//   pass 2: every candidate or annexed window is sent to an idle core in
//     segment mode; other windows are skipped.
// done pulses when the last core of pass 2 has finished. Two passes, so that
// the morphology sees every neighbour, and the four-neighbour rule are this
// design's choices; the candidate selection, the annexing of surrounded
// windows and the dispatch to N_CORES cores follow the design.
//
// Dispatch: at most one window per clock, to the lowest-numbered idle core.
// The command bus (cmd_mode, cmd_wx, cmd_wy) is shared; core_start selects
// the core. Counters give the number of candidate, annexed and segmented
// windows of the last frame.
module control_core
  import skin_pkg::*;
#(
  parameter int unsigned N_CORES = 8,
  parameter int unsigned IMG_W   = 640,
  parameter int unsigned IMG_H   = 480,
  localparam int unsigned NWX    = (IMG_W - WIN) / STRIDE + 1,
  localparam int unsigned NWY    = (IMG_H - WIN) / STRIDE + 1,
  localparam int unsigned WXW    = $clog2(NWX),
  localparam int unsigned WYW    = $clog2(NWY),
  localparam int unsigned NWIN   = NWX * NWY
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // core command / status
  output logic [N_CORES-1:0] core_start,
  output logic               cmd_mode,
  output logic [WXW-1:0]     cmd_wx,
  output logic [WYW-1:0]     cmd_wy,
  input  logic [N_CORES-1:0] core_busy,
  input  logic [N_CORES-1:0] core_done,
  input  logic [N_CORES-1:0] core_cand,
  input  logic [WXW-1:0]     core_wx [N_CORES],
  input  logic [WYW-1:0]     core_wy [N_CORES],
  // statistics of the last frame
  output logic [$clog2(NWIN+1)-1:0] n_cand,
  output logic [$clog2(NWIN+1)-1:0] n_annex,
  output logic [$clog2(NWIN+1)-1:0] n_seg
);
  typedef enum logic [2:0] {C_IDLE, C_PASS1, C_WAIT1, C_PASS2, C_WAIT2} cstate_t;
  cstate_t state;

  logic [NWIN-1:0] cmap;
  logic [WXW-1:0]  wx;
  logic [WYW-1:0]  wy;
  logic            have_idle;
  logic [$clog2(N_CORES > 1 ? N_CORES : 2)-1:0] idle_k;
  logic            last_win;
  logic            is_cand, is_annex;
  logic [$clog2(N_CORES+1)-1:0] n_new_cand;

  always_comb begin
    n_new_cand = '0;
    for (int k = 0; k < N_CORES; k++)
      n_new_cand = n_new_cand + ($bits(n_new_cand))'(core_done[k] && core_cand[k]);
  end

  always_comb begin
    have_idle = 1'b0;
    idle_k    = '0;
    for (int k = N_CORES - 1; k >= 0; k--) begin
      if (!core_busy[k]) begin
        have_idle = 1'b1;
        idle_k    = k[$bits(idle_k)-1:0];
      end
    end
  end

  function automatic logic [$clog2(NWIN)-1:0] widx(input logic [WXW-1:0] x, input logic [WYW-1:0] y);
    return ($clog2(NWIN))'(y) * ($clog2(NWIN))'(NWX) + ($clog2(NWIN))'(x);
  endfunction

  always_comb begin
    last_win = (wx == WXW'(NWX - 1)) && (wy == WYW'(NWY - 1));
    is_cand  = cmap[widx(wx, wy)];
    is_annex = 1'b0;
    if (!is_cand && wx != 0 && wy != 0 && wx != WXW'(NWX - 1) && wy != WYW'(NWY - 1))
      is_annex = cmap[widx(wx - 1'b1, wy)] && cmap[widx(wx + 1'b1, wy)] &&
                 cmap[widx(wx, wy - 1'b1)] && cmap[widx(wx, wy + 1'b1)];
  end

  assign busy     = (state != C_IDLE);
  assign cmd_wx   = wx;
  assign cmd_wy   = wy;
  assign cmd_mode = (state == C_PASS2);

  always_comb begin
    core_start = '0;
    if (have_idle && (state == C_PASS1 || (state == C_PASS2 && (is_cand || is_annex))))
      core_start[idle_k] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      cmap <= '0; wx <= '0; wy <= '0; done <= 1'b0;
      n_cand <= '0; n_annex <= '0; n_seg <= '0;
    end else begin
      done <= 1'b0;
      // record classification answers
      if (state == C_PASS1 || state == C_WAIT1) begin
        for (int k = 0; k < N_CORES; k++)
          if (core_done[k]) cmap[widx(core_wx[k], core_wy[k])] <= core_cand[k];
        n_cand <= n_cand + ($bits(n_cand))'(n_new_cand);
      end
      case (state)
        C_IDLE: if (start) begin
          wx <= '0; wy <= '0;
          n_cand <= '0; n_annex <= '0; n_seg <= '0;
          state <= C_PASS1;
        end
        C_PASS1, C_PASS2: begin
          if ((state == C_PASS2 && !is_cand && !is_annex) || have_idle) begin
            if (state == C_PASS2 && (is_cand || is_annex)) n_seg <= n_seg + 1'b1;
            if (state == C_PASS2 && is_annex) n_annex <= n_annex + 1'b1;
            if (last_win) begin
              wx <= '0; wy <= '0;
              state <= (state == C_PASS1) ? C_WAIT1 : C_WAIT2;
            end else if (wx == WXW'(NWX - 1)) begin
              wx <= '0; wy <= wy + 1'b1;
            end else begin
              wx <= wx + 1'b1;
            end
          end
        end
        C_WAIT1: if (core_busy == '0 && core_done == '0) state <= C_PASS2;
        C_WAIT2: if (core_busy == '0) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
