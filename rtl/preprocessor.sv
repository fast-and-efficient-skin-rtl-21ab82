// preprocessor: streaming pre-processing of the camera frames.
//
// Every incoming RGB pixel is converted to YCbCr, classified into the ternary
// sets, tested for motion against the same pixel of the previous frame, and
// tested for an edge. The results are packed with the colour into the 52-bit
// word of skin_pkg and queued, with the pixel address, in an output FIFO for
// the memory controller. The previous frame's words arrive from the memory
// controller through a second FIFO; only their luma is used.
//
// Interface: pixels come in raster order, IMG_W*IMG_H per frame, on a
// valid/ready handshake (pix_*). A pixel is taken when a previous-frame word is
// also waiting (prev_*; for the very first frame the memory side may return
// any word, typically zeros). out_* carries {address, word} with valid/ready.
// frame_done pulses in the cycle the last word of a frame leaves the FIFO.
// Polygon coefficients for the ternary conversion are written through tc_*.
//
// Timing: one register stage between the tag logic and the output FIFO; the
// throughput is one pixel per clock while the output side keeps up. The tag
// set and widths follow the block diagram of the design; the handshakes,
// FIFO depth and register stage are this design's choices.
module preprocessor
  import skin_pkg::*;
#(
  parameter int unsigned IMG_W      = 640,
  parameter int unsigned IMG_H      = 480,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned AW        = $clog2(IMG_W * IMG_H)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  // polygon coefficients
  input  logic             tc_we,
  input  logic [5:0]       tc_addr,
  input  logic [47:0]      tc_data,
  // camera stream
  input  logic             pix_valid,
  output logic             pix_ready,
  input  logic [23:0]      pix_rgb,
  // previous frame from memory
  input  logic             prev_valid,
  output logic             prev_ready,
  input  pix_word_t        prev_word,
  // tagged words to memory
  output logic             out_valid,
  input  logic             out_ready,
  output logic [AW-1:0]    out_addr,
  output pix_word_t        out_word,
  output logic             frame_done
);
  localparam int unsigned XW = $clog2(IMG_W);
  localparam int unsigned YW = $clog2(IMG_H);

  // previous-frame FIFO
  logic      pf_empty, pf_full, pf_pop;
  pix_word_t pf_word;
  sync_fifo #(.WIDTH(PIX_W), .DEPTH(FIFO_DEPTH)) u_prev_fifo (
    .clk, .rst_n,
    .wr_en(prev_valid), .wr_data(prev_word), .full(pf_full),
    .rd_en(pf_pop), .rd_data(pf_word), .empty(pf_empty)
  );
  assign prev_ready = !pf_full;

  // position
  logic [XW-1:0] x;
  logic [YW-1:0] yrow;

  // output stage and FIFO
  logic            s_valid;
  logic [AW-1:0]   s_addr;
  pix_word_t       s_word;
  logic            of_full, of_empty, of_pop;
  logic [AW+PIX_W-1:0] of_data;
  logic            fire;

  assign fire      = pix_valid && !pf_empty && (!s_valid || !of_full);
  assign pix_ready = !pf_empty && (!s_valid || !of_full);
  assign pf_pop    = fire;

  // tag logic
  logic [23:0] ycc;
  tern_t       tern;
  logic        amb, edg;

  color_space_conv u_csc (.rgb(pix_rgb), .ycc(ycc));

  ternary_conv u_tern (
    .clk, .rst_n, .cfg_we(tc_we), .cfg_addr(tc_addr), .cfg_data(tc_data),
    .ycc(ycc), .tern(tern)
  );

  motion_detector u_motion (
    .y_cur(ycc[23:16]), .y_prev(pf_word.y), .tern(tern),
    .th_motion(cfg.th_motion), .ambulant(amb)
  );

  edge_detector #(.IMG_W(IMG_W)) u_edge (
    .clk, .valid(fire), .y(ycc[23:16]), .x(x), .first_row(yrow == '0),
    .th_edge(cfg.th_edge1), .edge_o(edg)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x       <= '0;
      yrow    <= '0;
      s_valid <= 1'b0;
      s_addr  <= '0;
      s_word  <= '0;
    end else begin
      if (s_valid && !of_full) s_valid <= 1'b0;
      if (fire) begin
        s_valid <= 1'b1;
        s_addr  <= AW'(yrow) * AW'(IMG_W) + AW'(x);
        s_word  <= '{r: pix_rgb[23:16], g: pix_rgb[15:8], b: pix_rgb[7:0],
                     y: ycc[23:16], cb: ycc[15:8], cr: ycc[7:0],
                     tern: tern, amb: amb, edg: edg};
        if (x == XW'(IMG_W - 1)) begin
          x    <= '0;
          yrow <= (yrow == YW'(IMG_H - 1)) ? '0 : yrow + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  sync_fifo #(.WIDTH(AW + PIX_W), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .wr_en(s_valid), .wr_data({s_addr, s_word}), .full(of_full),
    .rd_en(of_pop), .rd_data(of_data), .empty(of_empty)
  );

  assign out_valid  = !of_empty;
  assign of_pop     = out_valid && out_ready;
  assign out_addr   = of_data[AW+PIX_W-1:PIX_W];
  assign out_word   = of_data[PIX_W-1:0];
  assign frame_done = of_pop && (out_addr == AW'(IMG_W * IMG_H - 1));
endmodule
