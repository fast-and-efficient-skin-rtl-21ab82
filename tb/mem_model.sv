// mem_model: behavioural model of the external frame memory (memory
// controller plus DRAM) for the skin detector testbenches. Not synthesizable.
//
// Frames are double-buffered: frame f is stored in fbuf[f%2] and its results
// go to rbuf[f%2]; the previous frame's words (for motion) and results (for
// the first-diffusion feedback) come from the other half. The result half of
// a frame is cleared when the frame has been stored; a frame stored while the
// cores are still busy is not segmented and leaves the halves in place. Core reads return two
// clocks after a grant; grants and writes are refused at random with
// probability STALL_PCT percent.
module mem_model
  import skin_pkg::*;
#(
  parameter int unsigned IMG_W     = 32,
  parameter int unsigned IMG_H     = 24,
  parameter int unsigned N_CORES   = 2,
  parameter int unsigned STALL_PCT = 20,
  localparam int unsigned N        = IMG_W * IMG_H,
  localparam int unsigned AW       = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          frame_stored,
  input  logic          seg_busy,
  // pre-processor side
  output logic          prev_valid,
  input  logic          prev_ready,
  output pix_word_t     prev_word,
  input  logic          pp_valid,
  output logic          pp_ready,
  input  logic [AW-1:0] pp_addr,
  input  pix_word_t     pp_word,
  // core side
  input  logic          rd_req   [N_CORES],
  input  logic [AW-1:0] rd_addr  [N_CORES],
  output logic          rd_gnt   [N_CORES],
  output logic          rd_valid [N_CORES],
  output pix_word_t     rd_word  [N_CORES],
  output res_word_t     rd_res   [N_CORES],
  input  logic          wr_req   [N_CORES],
  input  logic [AW-1:0] wr_addr  [N_CORES],
  input  res_word_t     wr_data  [N_CORES],
  output logic          wr_gnt   [N_CORES],
  output int            n_rd_stall,
  output int            n_pp_stall
);
  pix_word_t fbuf [2][N];
  res_word_t rbuf [2][N];
  int pf;        // frames stored so far
  int pidx;      // previous-frame stream position
  int pfr;       // frame the previous-frame stream is serving
  int seg;       // half used by the frame being segmented
  logic          p_v [N_CORES][2];
  logic [AW-1:0] p_a [N_CORES][2];

  initial begin
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < N; i++) begin fbuf[h][i] = '0; rbuf[h][i] = '0; end
  end

  always @(negedge clk) begin
    pp_ready = ($urandom_range(0, 99) >= STALL_PCT);
    for (int k = 0; k < N_CORES; k++) begin
      rd_gnt[k] = ($urandom_range(0, 99) >= STALL_PCT);
      wr_gnt[k] = ($urandom_range(0, 99) >= STALL_PCT);
    end
  end

  always_comb begin
    prev_valid = rst_n;
    prev_word  = fbuf[(pfr + 1) % 2][pidx];
    for (int k = 0; k < N_CORES; k++) begin
      rd_valid[k] = p_v[k][1];
      rd_word[k]  = fbuf[seg][p_a[k][1]];
      rd_res[k]   = rbuf[1 - seg][p_a[k][1]];
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      pf <= 0; pidx <= 0; pfr <= 0; seg <= 0; n_rd_stall <= 0; n_pp_stall <= 0;
      for (int k = 0; k < N_CORES; k++) begin p_v[k][0] <= 0; p_v[k][1] <= 0; end
    end else begin
      if (prev_valid && prev_ready) begin
        pidx <= (pidx == int'(N) - 1) ? 0 : pidx + 1;
        if (pidx == int'(N) - 1) pfr <= pfr + 1;
      end
      if (pp_valid && pp_ready) fbuf[pf % 2][pp_addr] <= pp_word;
      if (pp_valid && !pp_ready) n_pp_stall <= n_pp_stall + 1;
      if (frame_stored) begin
        pf <= pf + 1;
        if (!seg_busy) begin
          seg <= pf % 2;
          for (int i = 0; i < N; i++) rbuf[pf % 2][i] <= '0;
        end
      end
      for (int k = 0; k < N_CORES; k++) begin
        p_v[k][0] <= rd_req[k] && rd_gnt[k];
        p_a[k][0] <= rd_addr[k];
        p_v[k][1] <= p_v[k][0];
        p_a[k][1] <= p_a[k][0];
        if (rd_req[k] && !rd_gnt[k]) n_rd_stall <= n_rd_stall + 1;
        if (wr_req[k] && wr_gnt[k]) rbuf[seg][wr_addr[k]] <= wr_data[k];
      end
    end
  end
endmodule
