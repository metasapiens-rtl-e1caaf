// tb_tile_merge_unit: two frames on a 6x4-tile screen. Random intersection
// counts (including heavy tiles above beta and empty tiles) are fed as
// single increments in random tile order; the walk must then report every
// tile's count, binned offset and merged-tile ID, and emit the merged tiles
// that the reference grouping (close a group before the tile that would
// exceed beta) gives. The walk must take one cycle per tile, and the second
// frame checks that the counters were cleared by the first walk.
module tb_tile_merge_unit;
  import mts_pkg::*;
  localparam int TX = 6, TY = 4, NT = TX * TY;
  logic clk = 0, rst_n = 0;
  logic clearing, cnt_valid, walk_start, walk_busy, walk_done, ti_valid, md_valid;
  tile_t cnt_tile, ti_tile;
  logic [23:0] beta, ti_offset;
  logic [15:0] ti_lin, ti_count, ti_mid;
  merged_t md;
  int checks = 0, failures = 0;
  int cnt [NT];
  int exp_mid [NT], exp_off [NT];
  merged_t exp_md[$];
  int ti_seen, md_seen;

  tile_merge_unit #(.TILES_X(TX), .TILES_Y(TY), .CNT_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build_ref();
    int acc, base, mid, nt;
    merged_t g;
    exp_md.delete();
    acc = 0; base = 0; mid = 0; nt = 0; g = '0;
    for (int i = 0; i < NT; i++) begin
      if (nt != 0 && acc + cnt[i] > int'(beta)) begin
        g.ntiles = 16'(nt); g.total = 24'(acc);
        exp_md.push_back(g);
        mid++; nt = 0; acc = 0;
      end
      if (nt == 0) begin
        g.first_tile.tx = 8'(i % TX); g.first_tile.ty = 8'(i / TX); g.start = 24'(base);
      end
      nt++; acc += cnt[i];
      exp_mid[i] = mid; exp_off[i] = base;
      base += cnt[i];
    end
    g.ntiles = 16'(nt); g.total = 24'(acc);
    exp_md.push_back(g);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ti_valid) begin
      int i;
      i = int'(ti_lin);
      checks++;
      if (i != ti_seen || int'(ti_tile.tx) != i % TX || int'(ti_tile.ty) != i / TX ||
          int'(ti_count) != cnt[i] || int'(ti_offset) != exp_off[i] || int'(ti_mid) != exp_mid[i]) begin
        failures++;
        if (failures < 6) $display("tile %0d: count %0d/%0d offset %0d/%0d mid %0d/%0d", i,
                                   ti_count, cnt[i], ti_offset, exp_off[i], ti_mid, exp_mid[i]);
      end
      ti_seen++;
    end
    if (md_valid) begin
      checks++;
      if (md_seen >= exp_md.size() || md !== exp_md[md_seen]) begin
        failures++;
        if (failures < 6) $display("merged tile %0d: got %p", md_seen, md);
      end
      md_seen++;
    end
  end

  task automatic frame(input int heavy);
    int todo [$];
    int cycles;
    for (int i = 0; i < NT; i++) begin
      cnt[i] = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(1, 25));
      if (i == heavy) cnt[i] = 70;
      for (int k = 0; k < cnt[i]; k++) todo.push_back(i);
    end
    todo.shuffle();
    build_ref();
    foreach (todo[k]) begin
      @(negedge clk);
      cnt_valid = 1;
      cnt_tile.tx = 8'(todo[k] % TX); cnt_tile.ty = 8'(todo[k] / TX);
    end
    @(negedge clk);
    cnt_valid = 0;
    ti_seen = 0; md_seen = 0;
    walk_start = 1;
    @(negedge clk);
    walk_start = 0;
    cycles = 0;
    while (!walk_done) begin @(negedge clk); cycles++; end
    @(negedge clk);   // the last merged tile is sampled with walk_done
    checks++;
    if (cycles != NT + 1) begin failures++; $display("walk took %0d cycles", cycles); end
    checks++;
    if (ti_seen != NT || md_seen != exp_md.size()) begin
      failures++; $display("saw %0d tiles, %0d of %0d merged tiles", ti_seen, md_seen, exp_md.size());
    end
  endtask

  initial begin
    int multi;
    cnt_valid = 0; cnt_tile = '0; walk_start = 0; beta = 24'd40;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (clearing) @(negedge clk);
    frame(5);
    multi = 0;
    foreach (exp_md[k]) if (exp_md[k].ntiles > 1) multi++;
    checks++;
    if (multi == 0) begin failures++; $display("no tiles were merged"); end
    frame(17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
