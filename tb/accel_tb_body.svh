// accel_tb_body.svh: body shared by the end-to-end testbenches of
// metasapiens_accel. The including module declares TX, TY (tiles), NPTS
// (points per frame), NFRAMES and instantiates the accelerator as `dut`.
// It provides a DRAM model (entry memory and feature memory, one-cycle
// reads), generates random Gaussians over the screen, streams them in as the
// projection units would, collects the rendered pixels and compares every
// pixel of every frame with a reference that filters, duplicates, sorts and
// composites the same points independently of the RTL. It also checks the
// per-frame statistics against the reference and that each mechanism of the
// design (foveation filtering, tile merging, blending, four quality levels,
// incremental pipelining) happened at least once.

  always #5 clk = ~clk;

  // DRAM model
  logic [63:0] dram [int];
  gauss_feat_t feats [int];
  always @(posedge clk) begin
    if (mem_rd_en) mem_rd_data <= dram.exists(int'(mem_rd_addr)) ? dram[int'(mem_rd_addr)] : 64'd0;
    if (mem_wr_en) dram[int'(mem_wr_addr)] = mem_wr_data;
    if (feat_rd_en) feat_rd_data <= feats[int'(feat_rd_pid)];
  end

  int checks = 0, failures = 0;
  int got_rgb [int][TILE][TILE];     // by linear tile
  int got_rows [int];

  always @(posedge clk) if (rst_n && pix_valid) begin
    int lin;
    lin = int'(pix_tile.ty) * TX + int'(pix_tile.tx);
    for (int c = 0; c < TILE; c++) got_rgb[lin][pix_row][c] = int'(pix_rgb[c]);
    got_rows[lin] = got_rows.exists(lin) ? got_rows[lin] + 1 : 1;
  end

  int mech_drop = 0, mech_merge = 0, mech_blend = 0, mech_ip = 0;
  int mech_lvl [4] = '{0, 0, 0, 0};

  task automatic run_frame(input int f);
    proj_point_t pts [NPTS];
    int keep [NPTS];
    int lists [int][$];
    int n_kept, n_ent, n_merged, n_multi, n_blend, acc, nt;
    int bad_px, lit;
    ref_lvl_t l;

    // configuration: gaze somewhere on screen
    cfg.gaze_tx = 8'($urandom_range(TX / 4, 3 * TX / 4));
    cfg.gaze_ty = 8'($urandom_range(TY / 4, 3 * TY / 4));
    cfg.rb2[0] = 17'(TX * TX / 64 + 1);
    cfg.rb2[1] = 17'(TX * TX / 16 + 2);
    cfg.rb2[2] = 17'(TX * TX / 6 + 3);
    for (int k = 0; k < 3; k++) begin
      cfg.blo2[k] = cfg.rb2[k] - 17'(cfg.rb2[k] / 4 + 1);
      cfg.binv[k] = 24'((1 << 24) / int'(cfg.rb2[k] - cfg.blo2[k]));
    end
    beta = 24'(3 * NPTS * 6 / (TX * TY) + 4);

    // points
    dram.delete(); feats.delete(); got_rgb.delete(); got_rows.delete();
    n_kept = 0; n_ent = 0;
    for (int i = 0; i < NPTS; i++) begin
      gauss_feat_t g;
      int cx, cy, r, x0, x1, y0, y1;
      if (i % 2 == 0) begin
        // half of the points crowd around the gaze, as real scenes do under FR
        cx = int'(cfg.gaze_tx) * TILE + $urandom_range(0, 4 * TILE) - 2 * TILE;
        cy = int'(cfg.gaze_ty) * TILE + $urandom_range(0, 4 * TILE) - 2 * TILE;
        if (cx < 0) cx = 0;
        if (cy < 0) cy = 0;
      end else begin
        cx = $urandom_range(0, TX * TILE - 1); cy = $urandom_range(0, TY * TILE - 1);
      end
      r = $urandom_range(2, 20);
      g = rand_feat(cx, cy, r);
      feats[i] = g;
      pts[i].pid = 24'(i);
      pts[i].mean_x = g.mean_x; pts[i].mean_y = g.mean_y;
      pts[i].depth = 16'($urandom);
      pts[i].qbound = g.qbound;
      x0 = (cx - r) < 0 ? 0 : (cx - r) / TILE; x1 = (cx + r) / TILE;
      y0 = (cy - r) < 0 ? 0 : (cy - r) / TILE; y1 = (cy + r) / TILE;
      if ($urandom_range(0, 19) == 0) begin x0 = TX + 1; x1 = TX + 2; end  // culled
      pts[i].tx0 = 8'(x0); pts[i].tx1 = 8'(x1); pts[i].ty0 = 8'(y0); pts[i].ty1 = 8'(y1);
      // reference filter
      l = ref_level(int'(g.mean_x) / 256, int'(g.mean_y) / 256, cfg);
      keep[i] = (x0 <= x1 && y0 <= y1 && x0 < TX && y0 < TY && l.level <= int'(g.qbound));
      if (keep[i]) begin
        n_kept++;
        if (x1 > TX - 1) x1 = TX - 1;
        if (y1 > TY - 1) y1 = TY - 1;
        for (int y = y0; y <= y1; y++)
          for (int x = x0; x <= x1; x++) begin
            lists[y * TX + x].push_back(i);
            n_ent++;
          end
      end
    end
    // reference merging
    n_merged = 0; n_multi = 0; acc = 0; nt = 0;
    for (int t = 0; t < TX * TY; t++) begin
      int c;
      c = lists.exists(t) ? lists[t].size() : 0;
      if (nt != 0 && acc + c > int'(beta)) begin
        n_merged++; if (nt > 1) n_multi++;
        nt = 0; acc = 0;
      end
      nt++; acc += c;
    end
    n_merged++; if (nt > 1) n_multi++;

    // stream the points
    while (!ready) @(negedge clk);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NPTS; i++) begin
      while ($urandom_range(0, 7) == 0) begin pt_valid = 0; @(negedge clk); end
      pt_valid = 1; pt = pts[i]; pt_last = (i == NPTS - 1);
      @(posedge clk);
      while (!pt_ready) @(posedge clk);
      @(negedge clk);
    end
    pt_valid = 0; pt_last = 0;
    while (!done) @(negedge clk);
    @(negedge clk);

    // compare every tile
    bad_px = 0; lit = 0; n_blend = 0;
    for (int t = 0; t < TX * TY; t++) begin
      int tx, ty, order[$];
      tx = t % TX; ty = t / TX;
      l = ref_level(tx, ty, cfg);
      mech_lvl[l.level]++;
      if (l.blend) n_blend++;
      if (lists.exists(t)) order = lists[t];
      for (int x = 1; x < order.size(); x++)
        for (int y = x; y > 0 && pts[order[y]].depth < pts[order[y-1]].depth; y--) begin
          int tmp; tmp = order[y]; order[y] = order[y-1]; order[y-1] = tmp;
        end
      checks++;
      if (!got_rows.exists(t) || got_rows[t] != TILE) begin
        failures++; $display("frame %0d tile %0d: %0d rows", f, t, got_rows.exists(t) ? got_rows[t] : 0);
        continue;
      end
      for (int r = 0; r < TILE; r++)
        for (int c = 0; c < TILE; c++) begin
          ref_px_t a, b;
          int e;
          ref_px_init(a); ref_px_init(b);
          foreach (order[k]) begin
            ref_px_step(a, feats[order[k]], l.level, tx * TILE + c, ty * TILE + r);
            if (l.blend) ref_px_step(b, feats[order[k]], l.level + 1, tx * TILE + c, ty * TILE + r);
          end
          e = ref_blend(ref_px_rgb(a), ref_px_rgb(b), l.w, l.blend);
          if (e != 0) lit++;
          if (got_rgb[t][r][c] != e) begin
            bad_px++;
            if (bad_px < 4) $display("frame %0d tile (%0d,%0d) pixel (%0d,%0d): %h expected %h",
                                     f, tx, ty, c, r, got_rgb[t][r][c], e);
          end
        end
      checks++;
      if (bad_px != 0) begin failures++; bad_px = 0; end
    end
    checks++;
    if (int'(st_points_in) != NPTS || int'(st_points_dropped) != NPTS - n_kept ||
        int'(st_entries) != n_ent || int'(st_merged_tiles) != n_merged ||
        int'(st_multi_merges) != n_multi || int'(st_blend_tiles) != n_blend) begin
      failures++;
      $display("frame %0d stats: in %0d dropped %0d/%0d entries %0d/%0d merged %0d/%0d multi %0d/%0d blend %0d/%0d",
               f, st_points_in, st_points_dropped, NPTS - n_kept, st_entries, n_ent,
               st_merged_tiles, n_merged, st_multi_merges, n_multi, st_blend_tiles, n_blend);
    end
    checks++;
    if (lit < TX * TY * 16) begin failures++; $display("frame %0d: only %0d lit pixels", f, lit); end
    checks++;
    if (st_bank_overflows != 0) begin failures++; $display("frame %0d: bank overflow", f); end
    mech_drop  += int'(st_points_dropped);
    mech_merge += int'(st_multi_merges);
    mech_blend += int'(st_blend_tiles);
    mech_ip    += int'(st_incremental_starts);
    $display("frame %0d: %0d points, %0d kept, %0d entries, %0d merged tiles (%0d multi), %0d blend tiles, %0d incremental starts, %0d cycles",
             f, NPTS, n_kept, n_ent, st_merged_tiles, st_multi_merges, st_blend_tiles,
             st_incremental_starts, st_frame_cycles);
  endtask

  initial begin
    pt_valid = 0; pt = '0; pt_last = 0; start = 0; cfg = '0; beta = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) run_frame(f);
    $display("mechanisms: filter drops %0d, multi-tile merges %0d, blend tiles %0d, incremental starts %0d, tiles per level %0d/%0d/%0d/%0d",
             mech_drop, mech_merge, mech_blend, mech_ip, mech_lvl[0], mech_lvl[1], mech_lvl[2], mech_lvl[3]);
    checks++; if (mech_drop  == 0) begin failures++; $display("no point was filtered"); end
    checks++; if (mech_merge == 0) begin failures++; $display("no tiles were merged"); end
    checks++; if (mech_blend == 0) begin failures++; $display("no tile was blended"); end
    checks++; if (mech_ip    == 0) begin failures++; $display("no incremental start"); end
    for (int k = 0; k < 4; k++) begin
      checks++; if (mech_lvl[k] == 0) begin failures++; $display("level %0d never used", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
