// tb_hierarchical_sorting_unit: the testbench plays the double buffer. It
// commits merged tiles of random size (empty tiles, tiles shorter and longer
// than a chunk, repeated depths) alternately into two banks, refilling a
// bank as soon as it is released. For every tile the sorted output must be
// the tile's entries in (depth, bank position) order with correct first,
// last and empty flags, and sub-tile ends after every CHUNK entries and at
// the tile end. Output readiness is random. The first sub-tile of a merged
// tile whose first tile has n entries must appear n + 3 cycles after the
// commit when the output is ready (one scan pass, then emission).
module tb_hierarchical_sorting_unit;
  import mts_pkg::*;
  localparam int CH = 4, E = 64, TX = 5;
  logic clk = 0, rst_n = 0;
  logic [1:0] bank_full;
  merged_t bank_desc [2];
  logic rd_bank, release_en, release_bank, out_valid, out_ready, out_eor, busy, tile_open;
  logic [5:0] rd_addr;
  logic [63:0] rd_data;
  sorted_t out;
  tile_t cur_tile;
  logic [31:0] n_chunks;
  int checks = 0, failures = 0;
  entry_t bank [2][E];
  sorted_t expq[$];
  bit      eorq[$];
  bit rand_stall = 1;

  hierarchical_sorting_unit #(.CHUNK(CH), .ENTRIES(E), .TILES_X(TX)) dut (.*);

  assign rd_data = 64'(bank[rd_bank][rd_addr]);

  always #5 clk = ~clk;
  always @(negedge clk) out_ready <= rand_stall ? 1'($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    sorted_t e;
    bit eo;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected output %p", out);
    end else begin
      e = expq.pop_front();
      eo = eorq.pop_front();
      if (out !== e || out_eor !== eo) begin
        failures++;
        if (failures < 6) $display("got %p eor=%0d, expected %p eor=%0d", out, out_eor, e, eo);
      end
    end
  end

  int next_tile = 0;

  // Build a merged tile in bank b and the expected sorted stream.
  task automatic build(input bit b, output merged_t d, output int n_first);
    int nt, pos;
    d = '0;
    nt = $urandom_range(1, 4);
    d.first_tile.tx = 8'(next_tile % TX); d.first_tile.ty = 8'(next_tile / TX);
    d.ntiles = 16'(nt);
    pos = 0;
    n_first = 0;
    for (int t = 0; t < nt; t++) begin
      int n, idx[$];
      tile_t tl;
      tl.tx = 8'((next_tile + t) % TX); tl.ty = 8'((next_tile + t) / TX);
      case ($urandom_range(0, 3))
        0: n = 0;
        1: n = $urandom_range(1, CH);
        default: n = $urandom_range(CH + 1, 3 * CH + 2);
      endcase
      if (pos + n > E) n = E - pos;
      if (t == 0) n_first = n;
      for (int k = 0; k < n; k++) begin
        bank[b][pos + k].tile  = tl;
        bank[b][pos + k].depth = 16'($urandom_range(0, 12));
        bank[b][pos + k].pid   = 24'($urandom);
        idx.push_back(pos + k);
      end
      // stable sort of positions by depth
      for (int x = 1; x < idx.size(); x++)
        for (int y = x; y > 0 && bank[b][idx[y]].depth < bank[b][idx[y-1]].depth; y--) begin
          int tmp; tmp = idx[y]; idx[y] = idx[y-1]; idx[y-1] = tmp;
        end
      if (n == 0) begin
        sorted_t s;
        s.tile = tl; s.pid = '0; s.first = 1; s.last = 1; s.empty = 1;
        expq.push_back(s); eorq.push_back(1);
      end
      for (int k = 0; k < n; k++) begin
        sorted_t s;
        s.tile = tl; s.pid = bank[b][idx[k]].pid;
        s.first = (k == 0); s.last = (k == n - 1); s.empty = 0;
        expq.push_back(s);
        eorq.push_back((k % CH == CH - 1) || (k == n - 1));
      end
      pos += n;
    end
    d.total = 24'(pos);
    next_tile += nt;
  endtask

  initial begin
    merged_t d;
    int nf, t0, lat;
    bit b;
    bank_full = 0; bank_desc[0] = '0; bank_desc[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency check with a ready output
    rand_stall = 0;
    do begin
      expq.delete(); eorq.delete(); next_tile = 0;
      build(0, d, nf);
    end while (nf == 0);
    @(negedge clk);
    bank_desc[0] = d; bank_full[0] = 1;
    t0 = 0;
    while (!out_valid) begin @(negedge clk); t0++; end
    checks++;
    if (t0 != nf + 3) begin failures++; $display("first sub-tile after %0d cycles, expected %0d", t0, nf + 3); end
    while (!release_en) @(negedge clk);
    bank_full[0] = 0;
    @(negedge clk);
    // streaming with random stalls
    rand_stall = 1;
    b = 1;
    for (int m = 0; m < 60; m++) begin
      build(b, d, nf);
      bank_desc[b] = d; bank_full[b] = 1;
      if (m > 0) begin
        while (!(release_en && release_bank == !b)) @(negedge clk);
        bank_full[!b] = 0;
      end
      @(negedge clk);
      if (next_tile > 200) next_tile = 0;
      b = !b;
    end
    while (!(release_en && release_bank == !b)) @(negedge clk);
    bank_full[!b] = 0;
    rand_stall = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d sorted entries missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
