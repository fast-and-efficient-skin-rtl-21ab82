// color_space_conv: RGB to YCbCr colour space conversion of one pixel.
//
// The skin detector works in YCbCr, a linear transform of RGB. The transform
// used here is full-range ITU-R BT.601 (the JPEG form) with coefficients
// scaled by 256 and rounded; the exact coefficients are this design's choice.
//   Y  = ( 77 R + 150 G +  29 B + 128) >> 8
//   Cb = (-43 R -  85 G + 128 B + 32896) >> 8
//   Cr = (128 R - 107 G -  21 B + 32896) >> 8
// Results are clamped to 0..255. Purely combinational: the caller registers.
module color_space_conv (
  input  logic [23:0] rgb,   // {R, G, B}
  output logic [23:0] ycc    // {Y, Cb, Cr}
);
  logic signed [18:0] r, g, b, ys, cbs, crs;

  function automatic logic [7:0] clamp8(input logic signed [18:0] v);
    if (v < 0)        return 8'd0;
    else if (v > 255) return 8'd255;
    else              return v[7:0];
  endfunction

  always_comb begin
    r = 19'(rgb[23:16]);
    g = 19'(rgb[15:8]);
    b = 19'(rgb[7:0]);
    ys  = (19'sd77 * r + 19'sd150 * g + 19'sd29 * b + 19'sd128) >>> 8;
    cbs = (-19'sd43 * r - 19'sd85 * g + 19'sd128 * b + 19'sd32896) >>> 8;
    crs = (19'sd128 * r - 19'sd107 * g - 19'sd21 * b + 19'sd32896) >>> 8;
    ycc = {clamp8(ys), clamp8(cbs), clamp8(crs)};
  end
endmodule
