// tile_level: maps a tile to its foveation quality level (the eccentricity
// compare of the Fov Filter). Combinational.
// The squared tile distance d2 to the gaze tile stands for eccentricity; the
// level is the number of region boundaries rb2[0..2] that d2 has reached,
// so 0 (L1) under the gaze and 3 (L4) in the far periphery. A tile inside
// the band just before boundary `level` is also rendered at level+1 and
// blended; `weight` (Q0.8, weight of the level+1 colour) rises linearly with
// d2 across the band. The paper gives four regions starting at 0, 18, 27 and
// 33 degrees; the tile-distance approximation and the band are this design's
// choice. Boundaries must be given in increasing order.
module tile_level
  import mts_pkg::*;
(
  input  tile_t    tile,
  input  fov_cfg_t cfg,
  output level_t   level,
  output logic     blend,
  output logic [7:0] weight
);
  logic signed [TC_W:0] dx, dy;
  logic [16:0] d2;
  logic [16:0] band_off;
  logic [40:0] wprod;

  always_comb begin
    dx = $signed({1'b0, tile.tx}) - $signed({1'b0, cfg.gaze_tx});
    dy = $signed({1'b0, tile.ty}) - $signed({1'b0, cfg.gaze_ty});
    d2 = 17'(dx * dx) + 17'(dy * dy);
    level = 2'd0;
    for (int k = 0; k < 3; k++)
      if (d2 >= cfg.rb2[k]) level = level + 2'd1;
    blend    = 1'b0;
    band_off = '0;
    wprod    = '0;
    weight   = '0;
    if (level != 2'd3 && d2 >= cfg.blo2[level]) begin
      blend    = 1'b1;
      band_off = d2 - cfg.blo2[level];
      wprod    = band_off * cfg.binv[level];
      weight   = (wprod[40:16] > 25'd255) ? 8'd255 : wprod[23:16];
    end
  end
endmodule
