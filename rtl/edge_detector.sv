// edge_detector: simple luma gradient edge detector for a raster stream.
//
// Edge strength is |Y(x,y) - Y(x-1,y)| + |Y(x,y) - Y(x,y-1)| (a term is 0
// on the first column or first row); the pixel is an edge point when the
// strength exceeds th_edge. A one-line buffer (IMG_W bytes) holds the row
// above and a register holds the pixel to the left. The operator is this
// design's choice of "simple filtering".
//
// Timing: edge is combinational from the current inputs and the stored
// neighbours; the line buffer and left register update on a clock edge with
// valid high.
module edge_detector #(
  parameter int unsigned IMG_W = 640
) (
  input  logic                     clk,
  input  logic                     valid,
  input  logic [7:0]               y,
  input  logic [$clog2(IMG_W)-1:0] x,
  input  logic                     first_row,
  input  logic [7:0]               th_edge,
  output logic                     edge_o
);
  logic [7:0] line [IMG_W];
  logic [7:0] y_left;
  logic [8:0] gx, gy;

  function automatic logic [8:0] absdiff(input logic [7:0] a, input logic [7:0] b);
    return (a > b) ? 9'(a - b) : 9'(b - a);
  endfunction

  always_comb begin
    gx     = (x == '0) ? 9'd0 : absdiff(y, y_left);
    gy     = first_row ? 9'd0 : absdiff(y, line[x]);
    edge_o = (10'(gx) + 10'(gy)) > 10'(th_edge);
  end

  always_ff @(posedge clk) begin
    if (valid) begin
      line[x] <= y;
      y_left  <= y;
    end
  end
endmodule
