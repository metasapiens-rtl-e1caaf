// tb_volume_rendering_core: renders tiles at every quality level, inside and
// outside the blend bands, each from a random depth-ordered list of
// Gaussians placed around the tile (plus empty tiles). A feature memory
// answers reads one cycle later. Every output pixel is compared with the
// reference compositing of mts_ref_pkg (level-t versions, and the level t+1
// colour blended in for band tiles). With entries always available a tile
// of n points must finish its last row n + 17 cycles after its first entry
// is offered: one point per cycle, one cycle of feature read, 16 rows out.
module tb_volume_rendering_core;
  import mts_pkg::*;
  import mts_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  fov_cfg_t cfg;
  logic in_valid, in_ready, feat_rd_en, pix_valid, busy;
  sorted_t in_entry;
  logic [PID_W-1:0] feat_rd_pid;
  gauss_feat_t feat_rd_data;
  tile_t pix_tile;
  logic [3:0] pix_row;
  logic [TILE-1:0][23:0] pix_rgb;
  logic [31:0] n_points, n_tiles, n_blend_tiles;
  int checks = 0, failures = 0;
  gauss_feat_t feats [256];
  int exp_rgb [$][TILE][TILE];
  tile_t exp_tile [$];
  int rows_seen = 0;
  int blend_seen = 0;
  int lvl_seen [4] = '{0, 0, 0, 0};
  bit gaps = 0;
  int lit = 0;

  volume_rendering_core dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (feat_rd_en) feat_rd_data <= feats[feat_rd_pid[7:0]];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pix_valid) begin
    checks++;
    if (exp_tile.size() == 0 || pix_tile !== exp_tile[0] || int'(pix_row) != rows_seen) begin
      failures++; $display("unexpected row %0d of tile %p", pix_row, pix_tile);
    end else begin
      for (int c = 0; c < TILE; c++)
        if (int'(pix_rgb[c]) != exp_rgb[0][pix_row][c]) begin
          failures++;
          if (failures < 6) $display("tile %p pixel (%0d,%0d): %h expected %h", pix_tile, c, pix_row,
                                     pix_rgb[c], exp_rgb[0][pix_row][c]);
        end
    end
    rows_seen++;
    if (rows_seen == TILE) begin
      rows_seen = 0;
      void'(exp_tile.pop_front());
      exp_rgb.pop_front();
    end
  end

  task automatic render_tile(input tile_t tl, input int n);
    ref_lvl_t l;
    int img [TILE][TILE];
    int t0, t1;
    l = ref_level(int'(tl.tx), int'(tl.ty), cfg);
    lvl_seen[l.level]++;
    if (l.blend) blend_seen++;
    for (int k = 0; k < n; k++)
      feats[k] = rand_feat(int'(tl.tx) * 16 + $urandom_range(0, 24) - 4,
                           int'(tl.ty) * 16 + $urandom_range(0, 24) - 4, $urandom_range(2, 20));
    for (int r = 0; r < TILE; r++)
      for (int c = 0; c < TILE; c++) begin
        ref_px_t a, b;
        int pix_x, pix_y;
        pix_x = int'(tl.tx) * 16 + c; pix_y = int'(tl.ty) * 16 + r;
        ref_px_init(a); ref_px_init(b);
        for (int k = 0; k < n; k++) begin
          ref_px_step(a, feats[k], l.level, pix_x, pix_y);
          if (l.blend) ref_px_step(b, feats[k], l.level + 1, pix_x, pix_y);
        end
        img[r][c] = ref_blend(ref_px_rgb(a), ref_px_rgb(b), l.w, l.blend);
        if (img[r][c] != 0) lit++;
      end
    exp_rgb.push_back(img);
    exp_tile.push_back(tl);
    t0 = 0;
    for (int k = 0; k < (n == 0 ? 1 : n); k++) begin
      @(negedge clk);
      while (gaps && $urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); t0++; end
      in_valid = 1;
      in_entry.tile = tl; in_entry.pid = 24'(k);
      in_entry.first = (k == 0); in_entry.last = (k == n - 1 || n == 0); in_entry.empty = (n == 0);
      @(posedge clk);
      while (!in_ready) begin @(posedge clk); t0++; end
      t0++;
    end
    @(negedge clk);
    in_valid = 0;
    // wait for this tile's rows
    t1 = 0;
    while (exp_tile.size() != 0) begin @(negedge clk); t1++; end
    if (!gaps) begin
      checks++;
      if (t0 + t1 != (n == 0 ? 1 : n) + 17) begin
        failures++; $display("tile of %0d points took %0d cycles", n, t0 + t1);
      end
    end
  endtask

  initial begin
    tile_t tl;
    cfg.gaze_tx = 10; cfg.gaze_ty = 10;
    cfg.rb2[0] = 4;  cfg.rb2[1] = 16; cfg.rb2[2] = 36;
    cfg.blo2[0] = 2; cfg.blo2[1] = 10; cfg.blo2[2] = 25;
    cfg.binv[0] = 24'((1 << 24) / 2); cfg.binv[1] = 24'((1 << 24) / 6); cfg.binv[2] = 24'((1 << 24) / 11);
    in_valid = 0; in_entry = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 40; m++) begin
      tl.tx = 8'(10 + $urandom_range(0, 7)); tl.ty = 8'(10 + $urandom_range(0, 3));
      gaps = (m >= 20);
      render_tile(tl, (m % 7 == 3) ? 0 : int'($urandom_range(1, 30)));
    end
    checks++;
    if (blend_seen == 0 || lvl_seen[0] == 0 || lvl_seen[3] == 0) begin
      failures++; $display("levels or blending not exercised: blend=%0d", blend_seen);
    end
    checks++;
    if (lit < 2000) begin failures++; $display("only %0d lit pixels", lit); end
    checks++;
    if (int'(n_blend_tiles) != blend_seen || int'(n_tiles) != 40) begin
      failures++; $display("counters: tiles %0d blend %0d", n_tiles, n_blend_tiles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
