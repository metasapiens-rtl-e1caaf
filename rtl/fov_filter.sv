// fov_filter: the foveation filter at the end of the projection stage.
// For each projected point it (1) runs an intersect test, which keeps the
// point only if its tile bounding box is non-empty and overlaps the screen,
// and clips the box to the screen; (2) finds the quality level t of the tile
// holding the point's centre and keeps the point only if t <= m, its quality
// bound. Kept points are passed on, dropped ones produce nothing (the "None"
// input of the output mux in the paper's figure).
// The paper states the rule twice, in opposite directions: the filtering
// unit "pushes the tile to the output buffer only if t > m", while the
// representation section says "If t > m, the point does not participate in
// the rest of rendering". This design follows the second: a point used only
// up to level m is dropped when its tile needs a level beyond m.
// Interface: valid/ready in and out, one point per cycle, one cycle latency
// (registered output). n_in / n_drop count points seen and dropped.
module fov_filter
  import mts_pkg::*;
#(
  parameter int unsigned TILES_X = 100,
  parameter int unsigned TILES_Y = 68
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fov_cfg_t    cfg,
  input  logic        in_valid,
  output logic        in_ready,
  input  proj_point_t in_pt,
  output logic        out_valid,
  input  logic        out_ready,
  output proj_point_t out_pt,
  output logic [31:0] n_in,
  output logic [31:0] n_drop
);
  tile_t       ctile;
  level_t      t;
  logic        t_blend;
  logic [7:0]  t_w;
  logic        hit, keep;
  proj_point_t clipped;

  // Centre tile: Q12.4 pixels -> tile index is bits [15:8].
  assign ctile.tx = in_pt.mean_x[15:8];
  assign ctile.ty = in_pt.mean_y[15:8];

  tile_level u_lvl (.tile(ctile), .cfg(cfg), .level(t), .blend(t_blend), .weight(t_w));

  always_comb begin
    hit = (in_pt.tx0 <= in_pt.tx1) && (in_pt.ty0 <= in_pt.ty1) &&
          (32'(in_pt.tx0) < TILES_X) && (32'(in_pt.ty0) < TILES_Y);
    keep = hit && (t <= in_pt.qbound);
    clipped = in_pt;
    if (32'(in_pt.tx1) >= TILES_X) clipped.tx1 = TC_W'(TILES_X - 1);
    if (32'(in_pt.ty1) >= TILES_Y) clipped.ty1 = TC_W'(TILES_Y - 1);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pt    <= '0;
      n_in      <= '0;
      n_drop    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        n_in <= n_in + 1;
        if (keep) begin
          out_valid <= 1'b1;
          out_pt    <= clipped;
        end else begin
          n_drop <= n_drop + 1;
        end
      end
    end
  end
endmodule
