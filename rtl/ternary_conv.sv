// ternary_conv: pixel-based segmentation of a YCbCr pixel into three sets.
//
// Offline training draws, in each of the three 2-D colour histograms
// (Cb,Y), (Cr,Y) and (Cr,Cb), an inner polygon around the frequent skin
// colours and an outer polygon around every colour ever seen on skin.
//   T1 (white): inside all three inner polygons
//   T2 (gray) : not T1, inside all three outer polygons
//   T3 (black): everything else
// Each polygon is held as N_EDGES half-planes a*u + b*v + c >= 0, where u is
// the horizontal and v the vertical axis of its heat map; a polygon contains
// the pixel when every half-plane does. Polygons are therefore convex and an
// all-zero edge is always satisfied (unused edges). This half-plane form, the
// coefficient widths and N_EDGES are this design's choices; the three sets
// and the polygon pairs follow the algorithm.
//
// Coefficient memory: 6*N_EDGES words written through cfg_we/cfg_addr/cfg_data,
// address = polygon*N_EDGES + edge, polygon 0..2 = inner (Cb,Y), (Cr,Y),
// (Cr,Cb); 3..5 = outer in the same order. Word = {a[11:0], b[11:0], c[23:0]},
// all signed. Reset clears the memory. The classification is combinational.
module ternary_conv
  import skin_pkg::*;
#(
  parameter int unsigned N_EDGES = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [5:0]  cfg_addr,
  input  logic [47:0] cfg_data,
  input  logic [23:0] ycc,
  output tern_t       tern
);
  localparam int unsigned NW = 6 * N_EDGES;
  logic [47:0] coef [NW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NW; i++) coef[i] <= '0;
    end else if (cfg_we && cfg_addr < 6'(NW)) begin
      coef[cfg_addr] <= cfg_data;
    end
  end

  logic [7:0] yv, cbv, crv;
  logic [5:0] in_poly;   // per polygon

  always_comb begin
    yv  = ycc[23:16];
    cbv = ycc[15:8];
    crv = ycc[7:0];
    for (int p = 0; p < 6; p++) begin
      logic [7:0] u, v;
      case (p % 3)
        0:       begin u = cbv; v = yv;  end
        1:       begin u = crv; v = yv;  end
        default: begin u = crv; v = cbv; end
      endcase
      in_poly[p] = 1'b1;
      for (int e = 0; e < N_EDGES; e++) begin
        logic signed [11:0] a, b;
        logic signed [23:0] c;
        logic signed [26:0] s;
        {a, b, c} = coef[p * N_EDGES + e];
        s = 27'(a) * $signed({1'b0, u}) + 27'(b) * $signed({1'b0, v}) + 27'(c);
        if (s < 0) in_poly[p] = 1'b0;
      end
    end
    if (&in_poly[2:0])      tern = T_WHITE;
    else if (&in_poly[5:3]) tern = T_GRAY;
    else                   tern = T_BLACK;
  end
endmodule
