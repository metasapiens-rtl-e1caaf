// blend_unit: foveated-rendering blend of one pixel. A pixel in the band
// between two quality regions is rendered with both levels; this unit
// interpolates the two colours per channel,
//   out = (a * (256 - w) + b * w) >> 8,
// with w (Q0.8) the weight of the lower-quality level-(t+1) colour b. When
// blend is low the unit passes a (the output mux after the blender).
// The paper gives the function (take two colours of a pixel and interpolate);
// the linear weight and its Q0.8 format are this design's choice.
// Combinational.
module blend_unit (
  input  logic [23:0] rgb_a,
  input  logic [23:0] rgb_b,
  input  logic [7:0]  w,
  input  logic        blend,
  output logic [23:0] rgb_out
);
  logic [16:0] mix [3];
  always_comb begin
    for (int ch = 0; ch < 3; ch++) begin
      mix[ch] = 17'(rgb_a[ch*8 +: 8]) * (17'd256 - 17'(w)) + 17'(rgb_b[ch*8 +: 8]) * 17'(w);
      rgb_out[ch*8 +: 8] = blend ? mix[ch][15:8] : rgb_a[ch*8 +: 8];
    end
  end
endmodule
