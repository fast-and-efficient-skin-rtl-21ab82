// tb_skin_detector_top: end-to-end test of the skin detector on 32x24
// frames with two cores. Four frames are sent; the second follows the first
// back-to-back and is dropped (overrun); the fourth segments with the third
// frame's first-diffusion feedback. Memory grants stall at random. See
// top_harness.svh for the checks.
module tb_skin_detector_top;
  localparam int W = 32, H = 24, NC = 2, NFRAMES = 4, OVERRUN_AT = 1, STALL = 20;
  localparam bit REQUIRE_ALL = 1'b1;
  initial begin
    #20000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
`include "top_harness.svh"
  skin_detector_top #(.N_CORES(NC), .IMG_W(W), .IMG_H(H), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n, .cfg, .tc_we, .tc_addr, .tc_data, .hist_we, .hist_waddr, .hist_wdata,
    .pix_valid, .pix_ready, .pix_rgb, .prev_valid, .prev_ready, .prev_word,
    .pp_valid, .pp_ready, .pp_addr, .pp_word,
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_word, .rd_res,
    .wr_req, .wr_addr, .wr_data, .wr_gnt,
    .frame_stored, .frame_done, .seg_busy, .overrun, .n_cand, .n_annex, .n_seg);
endmodule
