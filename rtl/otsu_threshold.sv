// otsu_threshold: three-class Otsu multi-thresholding of one window channel.
//
// The 64 channel values of a window are binned into BINS levels (value >>
// 4). Otsu's criterion picks the two thresholds t1 < t2 that maximise the
// between-class variance; with the total mean fixed this is the same as
// maximising  sum_k S_k^2 / W_k  over the three classes (W_k = pixel count,
// S_k = sum of bin indices in class k). The sum is compared between candidate
// pairs by cross-multiplication over the common denominator W0*W1*W2, so no
// divider is needed (an empty class counts as W = 1, S = 0).
//
// Class 0 = bins 0..t1, class 1 = t1+1..t2, class 2 = t2+1..BINS-1.
// Timing: start (one cycle) begins the search; one threshold pair is scored
// per clock, (BINS-1)(BINS-2)/2 pairs in all (105 for 16 bins), then done
// pulses and cls holds each pixel's class until the next start. pix must
// stay stable from start to done. Otsu thresholding and multi-class
// segmentation follow the algorithm; three classes, 16 bins and the
// sequential search are this design's choices. Ties keep the first pair.
module otsu_threshold #(
  parameter int unsigned N_PIX = 64,
  parameter int unsigned BINS  = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] pix [N_PIX],
  output logic       busy,
  output logic       done,
  output logic [3:0] t1_o,
  output logic [3:0] t2_o,
  output logic [1:0] cls [N_PIX]
);
  localparam int unsigned BW = $clog2(BINS);
  localparam int unsigned CW = $clog2(N_PIX + 1);

  logic [CW-1:0] cw [BINS];   // cumulative counts
  logic [15:0]   cs [BINS];   // cumulative sums of bin index

  always_comb begin
    logic [CW-1:0] h [BINS];
    for (int b = 0; b < BINS; b++) h[b] = '0;
    for (int i = 0; i < N_PIX; i++) begin
      logic [BW-1:0] bi;
      bi = BW'(pix[i] >> (8 - BW));
      h[bi] = h[bi] + 1'b1;
    end
    cw[0] = h[0];
    cs[0] = '0;
    for (int b = 1; b < BINS; b++) begin
      cw[b] = cw[b-1] + h[b];
      cs[b] = cs[b-1] + 16'(h[b]) * 16'(b);
    end
  end

  logic [BW-1:0] t1, t2, bt1, bt2;
  logic [63:0]   best_num, best_den, num, den;

  always_comb begin
    logic [63:0] w0, w1, w2, s0, s1, s2;
    w0 = 64'(cw[t1]);
    w1 = 64'(cw[t2]) - 64'(cw[t1]);
    w2 = 64'(N_PIX) - 64'(cw[t2]);
    s0 = 64'(cs[t1]);
    s1 = 64'(cs[t2]) - 64'(cs[t1]);
    s2 = 64'(cs[BINS-1]) - 64'(cs[t2]);
    if (w0 == 0) w0 = 1;
    if (w1 == 0) w1 = 1;
    if (w2 == 0) w2 = 1;
    num = s0 * s0 * w1 * w2 + s1 * s1 * w0 * w2 + s2 * s2 * w0 * w1;
    den = w0 * w1 * w2;
  end

  logic first;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; first <= 1'b0;
      t1 <= '0; t2 <= '0; bt1 <= '0; bt2 <= '0;
      best_num <= '0; best_den <= 64'd1;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        first <= 1'b1;
        t1    <= '0;
        t2    <= BW'(1);
      end else if (busy) begin
        first <= 1'b0;
        // num/den > best_num/best_den
        if (first || (num * best_den > best_num * den)) begin
          best_num <= num;
          best_den <= den;
          bt1      <= t1;
          bt2      <= t2;
        end
        if (t2 == BW'(BINS - 2)) begin
          if (t1 == BW'(BINS - 3)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            t1 <= t1 + 1'b1;
            t2 <= t1 + BW'(2);
          end
        end else begin
          t2 <= t2 + 1'b1;
        end
      end
    end
  end

  assign t1_o = 4'(bt1);
  assign t2_o = 4'(bt2);

  always_comb begin
    for (int i = 0; i < N_PIX; i++) begin
      logic [BW-1:0] bi;
      bi = BW'(pix[i] >> (8 - BW));
      cls[i] = (bi <= bt1) ? 2'd0 : (bi <= bt2) ? 2'd1 : 2'd2;
    end
  end
endmodule
