// tile_merge_unit: balances the per-tile work of the sorting and rendering
// stages by grouping runs of light tiles into merged tiles.
// Stage 1 (tile-point accumulator): each tile-ellipse intersection leaving
// the duplication unit increments the counter of its tile in a counter
// memory (the "temporal buffer"). Stage 2 (tile ID reassignment): once the
// frame's counts are complete (walk_start), the tiles are walked in raster
// order, one per cycle; a running sum CNT collects the counts of the current
// merged tile. When adding the next tile would make CNT exceed beta, the
// current merged tile is closed and emitted, and the next tile starts a new
// one; a single tile above beta forms a merged tile of its own. Every tile
// leaves stage 2 tagged with its merged-tile ID and with the start offset of
// its entries in the tile-binned list (a prefix sum of the counts), which the
// binning step uses. Counters are cleared as they are read.
// The paper says the TMU "merges incoming tiles into a single tile if the
// cumulative intersections is below a threshold beta" and "If this threshold
// is exceeded, a merged-tile is formed". This design closes a merged tile
// before the tile that would exceed beta, which keeps merged tiles at or
// below beta and reproduces the paper's example (tiles 2 and 3 merged, the
// heavy tiles 1 and 4 alone).
// Timing: an increment per cycle; the walk takes TILES_X*TILES_Y cycles plus
// one; after reset the counters are cleared in TILES_X*TILES_Y cycles
// (clearing high).
module tile_merge_unit
  import mts_pkg::*;
#(
  parameter int unsigned TILES_X = 100,
  parameter int unsigned TILES_Y = 68,
  parameter int unsigned CNT_W   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              clearing,
  // stage 1
  input  logic              cnt_valid,
  input  tile_t             cnt_tile,
  // stage 2
  input  logic              walk_start,
  input  logic [23:0]       beta,
  output logic              walk_busy,
  output logic              walk_done,
  output logic              ti_valid,
  output tile_t             ti_tile,
  output logic [15:0]       ti_lin,
  output logic [CNT_W-1:0]  ti_count,
  output logic [23:0]       ti_offset,
  output logic [15:0]       ti_mid,
  output logic              md_valid,
  output merged_t           md
);
  localparam int unsigned NT = TILES_X * TILES_Y;
  localparam int unsigned LW = $clog2(NT);

  logic [CNT_W-1:0] cnt_mem [NT];
  logic [LW-1:0]    clr_idx;
  logic [LW-1:0]    inc_idx, walk_idx;
  tile_t            wt;            // tile being walked
  logic             final_emit;

  // merged-tile state (stage 2)
  logic [23:0] acc;                // CNT of the open merged tile
  logic [15:0] g_ntiles;
  tile_t       g_first;
  logic [23:0] g_start;
  logic [23:0] base;               // prefix sum of counts so far
  logic [15:0] mid;
  logic [CNT_W-1:0] c;
  logic        close_now;

  assign inc_idx = LW'(32'(cnt_tile.ty) * TILES_X + 32'(cnt_tile.tx));
  assign c = cnt_mem[walk_idx];
  assign close_now = (g_ntiles != '0) && ((acc + 24'(c)) > beta);

  always_ff @(posedge clk) begin
    if (clearing)
      cnt_mem[clr_idx] <= '0;
    else if (walk_busy && !final_emit)
      cnt_mem[walk_idx] <= '0;
    else if (cnt_valid)
      cnt_mem[inc_idx] <= cnt_mem[inc_idx] + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_idx <= '0;
      walk_busy <= 1'b0; walk_done <= 1'b0; final_emit <= 1'b0;
      walk_idx <= '0; wt <= '0;
      acc <= '0; g_ntiles <= '0; g_first <= '0; g_start <= '0; base <= '0; mid <= '0;
      ti_valid <= 1'b0; ti_tile <= '0; ti_lin <= '0; ti_count <= '0; ti_offset <= '0; ti_mid <= '0;
      md_valid <= 1'b0; md <= '0;
    end else begin
      ti_valid  <= 1'b0;
      md_valid  <= 1'b0;
      walk_done <= 1'b0;
      if (clearing) begin
        if (32'(clr_idx) == NT - 1) clearing <= 1'b0;
        else clr_idx <= clr_idx + 1'b1;
      end else if (walk_start && !walk_busy) begin
        walk_busy <= 1'b1;
        walk_idx <= '0; wt <= '0;
        acc <= '0; g_ntiles <= '0; base <= '0; mid <= '0;
      end else if (walk_busy && final_emit) begin
        // close the last open merged tile
        md_valid <= (g_ntiles != '0);
        md <= '{first_tile: g_first, ntiles: g_ntiles, start: g_start, total: acc};
        final_emit <= 1'b0;
        walk_busy  <= 1'b0;
        walk_done  <= 1'b1;
      end else if (walk_busy) begin
        ti_valid  <= 1'b1;
        ti_tile   <= wt;
        ti_lin    <= 16'(walk_idx);
        ti_count  <= c;
        ti_offset <= base;
        base      <= base + 24'(c);
        if (close_now) begin
          md_valid <= 1'b1;
          md <= '{first_tile: g_first, ntiles: g_ntiles, start: g_start, total: acc};
          mid      <= mid + 1'b1;
          ti_mid   <= mid + 1'b1;
          g_first  <= wt;
          g_start  <= base;
          g_ntiles <= 16'd1;
          acc      <= 24'(c);
        end else begin
          ti_mid <= mid;
          if (g_ntiles == '0) begin
            g_first <= wt;
            g_start <= base;
          end
          g_ntiles <= g_ntiles + 1'b1;
          acc      <= acc + 24'(c);
        end
        if (32'(walk_idx) == NT - 1) begin
          final_emit <= 1'b1;
        end else begin
          walk_idx <= walk_idx + 1'b1;
          if (32'(wt.tx) == TILES_X - 1) begin
            wt.tx <= '0;
            wt.ty <= wt.ty + 1'b1;
          end else begin
            wt.tx <= wt.tx + 1'b1;
          end
        end
      end
    end
  end
endmodule
