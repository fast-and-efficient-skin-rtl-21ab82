// skin_pkg: types and constants shared by the skin detector.
//
// The pre-processor stores every pixel in a 52-bit word: the 24-bit camera
// colour followed by 28 tag bits (YCbCr 24, ternary 2, ambulant 1, edge 1).
// The field widths follow the block diagram of the design; the order of the
// fields inside the word is this design's choice. The skin cores write a
// 25-bit result word per pixel: the first-diffusion flag (fed back to the
// seed generator of the next frame) and the RGB colour masked by the final
// skin mask (black where the pixel is not skin). That layout is also this
// design's choice.
//
// The ternary code is the top two bits of the grey level the algorithm paints
// each class with: black (0) = 2'b00, gray (128) = 2'b10, white (255) = 2'b11.
package skin_pkg;

  localparam int unsigned PIX_W  = 52;  // stored word per pixel
  localparam int unsigned RES_W  = 25;  // result word per pixel
  localparam int unsigned WIN    = 8;   // window side
  localparam int unsigned STRIDE = 4;   // window step, both directions
  localparam int unsigned NPIX   = WIN * WIN;
  localparam int unsigned HIST_W = 12;  // histogram word {P(skin), P(non-skin)}
  localparam int unsigned PROB_W = 6;

  typedef enum logic [1:0] {
    T_BLACK = 2'b00,   // set T3
    T_GRAY  = 2'b10,   // set T2
    T_WHITE = 2'b11    // set T1
  } tern_t;

  typedef struct packed {
    logic [7:0] r, g, b;
    logic [7:0] y, cb, cr;
    tern_t      tern;
    logic       amb;   // ambulant (moved and not ternary black)
    logic       edg;   // edge tag, low threshold
  } pix_word_t;

  typedef struct packed {
    logic       fd1;   // pixel was in the first-diffusion set
    logic [23:0] rgb;  // RGB where final mask is set, else 0
  } res_word_t;

  // Run-time thresholds and weights (all trained offline).
  typedef struct packed {
    logic [7:0]  th_motion;   // frame difference threshold
    logic [7:0]  th_edge1;    // edge tag threshold (weak edges kept)
    logic [7:0]  th_edge2;    // second-diffusion edge threshold (strong edges only)
    logic [3:0]  nb_k;        // K of xi = K*T + Phi
    logic [9:0]  nb_th1;      // xi < th1 -> black
    logic [9:0]  nb_th2;      // xi > th2 -> white
    logic [6:0]  min_white;   // window: minimum white count
    logic [6:0]  min_gray;    // window: minimum gray count
    logic [5:0]  th_pure;     // seed: minimum P(skin)
    logic [7:0]  theta_amb;   // seed ratio threshold, ambulant pixel (x1/16)
    logic [7:0]  theta_fb;    // seed ratio threshold, previous first diffusion
    logic [7:0]  theta_hi;    // seed ratio threshold, other pixels
    logic [2:0]  d1_th_amb;   // first diffusion class distance, ambulant (weak)
    logic [2:0]  d1_th;       // first diffusion class distance, others (strong)
    logic [4:0][3:0] w;       // second diffusion weights w1..w5 (w[0] = w1)
    logic [7:0]  beta;        // f1 offset
    logic [13:0] th_f;        // second diffusion decision threshold
    logic [7:0]  theta_final; // final mask ratio threshold (x1/16)
  } cfg_t;

  // f1 table: round(255 * exp(-d)), d = summed class distance 0..6
  function automatic logic [7:0] exp_tab(input logic [2:0] d);
    case (d)
      3'd0: return 8'd255;
      3'd1: return 8'd94;
      3'd2: return 8'd35;
      3'd3: return 8'd13;
      3'd4: return 8'd5;
      3'd5: return 8'd2;
      3'd6: return 8'd1;
      default: return 8'd0;
    endcase
  endfunction

  // Bayesian ratio test P(skin)/P(non-skin) >= theta/16
  function automatic logic ratio_ok(input logic [5:0] ps, input logic [5:0] pn,
                                    input logic [7:0] theta);
    return ({4'd0, ps, 4'd0} >= 14'(theta) * 14'(pn));
  endfunction

endpackage
