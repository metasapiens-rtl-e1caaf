// volume_rendering_core: the rasterization stage, a TILE x TILE array of
// pixel engines (vrc_pe) that renders one tile at a time from its
// depth-sorted point list, plus the foveation blend on the way out.
// For each sorted entry the core reads the point's features (mean, conic,
// per-level opacity and colour, quality bound) through the feature port, and
// one cycle later every pixel engine applies that point. The quality level t
// of the tile, and whether it lies in a blend band, come from tile_level.
// After the tile's last entry the 16 pixel rows leave one per cycle; each row
// passes through 16 blend units that mix the level-t and level-(t+1) colours
// of blend tiles and pass the level-t colour otherwise. An entry flagged
// empty produces a background (black) tile.
// The paper gives the 16x16 array, the per-pixel steps (Gaussian sample,
// compare with a threshold and skip, alpha, transmittance, RGB accumulation)
// and the blend unit with its small pixel buffer; here the second
// accumulator set in each pixel engine serves as that buffer. The one-cycle
// feature port and the row-per-cycle output are this design's choice.
// Timing: one point per cycle while entries arrive, two cycles from entry to
// update; a tile ends with TILE output cycles during which no entry is taken.
module volume_rendering_core
  import mts_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  fov_cfg_t           cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  sorted_t            in_entry,
  output logic               feat_rd_en,
  output logic [PID_W-1:0]   feat_rd_pid,
  input  gauss_feat_t        feat_rd_data,
  output logic               pix_valid,
  output tile_t              pix_tile,
  output logic [3:0]         pix_row,
  output logic [TILE-1:0][23:0] pix_rgb,
  output logic               busy,
  output logic [31:0]        n_points,
  output logic [31:0]        n_tiles,
  output logic [31:0]        n_blend_tiles
);
  logic     s1_valid;
  sorted_t  s1;
  logic     outputting;
  logic [3:0] row;
  tile_t    otile;
  level_t   lev, olev;
  logic     blend, oblend;
  logic [7:0] w, ow;
  logic     accept, pe_en, pe_init;

  logic [23:0] rgb_a [TILE][TILE];
  logic [23:0] rgb_b [TILE][TILE];

  assign in_ready    = !outputting && !(s1_valid && s1.last);
  assign accept      = in_valid && in_ready;
  assign feat_rd_en  = accept && !in_entry.empty;
  assign feat_rd_pid = in_entry.pid;
  assign pe_en       = s1_valid && !s1.empty;
  assign pe_init     = s1_valid && s1.first;
  assign busy        = s1_valid || outputting;

  tile_level u_lvl (.tile(s1.tile), .cfg(cfg), .level(lev), .blend(blend), .weight(w));

  for (genvar r = 0; r < TILE; r++) begin : g_row
    for (genvar c = 0; c < TILE; c++) begin : g_col
      vrc_pe u_pe (
        .clk, .rst_n, .en(pe_en), .init(pe_init),
        .pix_x({s1.tile.tx, 4'(c)}), .pix_y({s1.tile.ty, 4'(r)}),
        .feat(feat_rd_data), .lev(lev), .blend(blend),
        .rgb_a(rgb_a[r][c]), .rgb_b(rgb_b[r][c]));
    end
  end

  for (genvar c = 0; c < TILE; c++) begin : g_blend
    blend_unit u_blend (.rgb_a(rgb_a[row][c]), .rgb_b(rgb_b[row][c]), .w(ow),
                        .blend(oblend), .rgb_out(pix_rgb[c]));
  end

  assign pix_valid = outputting;
  assign pix_tile  = otile;
  assign pix_row   = row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1 <= '0; outputting <= 1'b0; row <= '0;
      otile <= '0; olev <= '0; oblend <= 1'b0; ow <= '0;
      n_points <= '0; n_tiles <= '0; n_blend_tiles <= '0;
    end else begin
      s1_valid <= accept;
      if (accept) s1 <= in_entry;
      if (pe_en) n_points <= n_points + 1;
      if (s1_valid && s1.last) begin
        outputting <= 1'b1;
        row    <= '0;
        otile  <= s1.tile;
        olev   <= lev;
        oblend <= blend;
        ow     <= w;
        n_tiles <= n_tiles + 1;
        if (blend) n_blend_tiles <= n_blend_tiles + 1;
      end else if (outputting) begin
        row <= row + 1'b1;
        if (row == 4'(TILE - 1)) outputting <= 1'b0;
      end
    end
  end

  // An empty tile is announced by a single entry that is both first and last.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (accept && in_entry.empty) |-> (in_entry.first && in_entry.last));
endmodule
