// tb_duplication_unit: random tile boxes; the entries of each point must be
// the tiles of its box in row-major order with its depth and id, one per
// cycle when the output is always ready (checked by counting cycles), and
// in order under random output stalls.
module tb_duplication_unit;
  import mts_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  proj_point_t in_pt;
  entry_t out_entry;
  int checks = 0, failures = 0;
  entry_t expq[$];
  bit rand_stall = 0;

  always @(negedge clk) out_ready <= rand_stall ? 1'($urandom_range(0, 3) != 0) : 1'b1;

  duplication_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    entry_t e;
    checks++;
    e = expq.pop_front();
    if (out_entry !== e) begin
      failures++;
      if (failures < 5) $display("got %h expected %h", out_entry, e);
    end
  end

  task automatic send(input proj_point_t p);
    for (int y = p.ty0; y <= p.ty1; y++)
      for (int x = p.tx0; x <= p.tx1; x++) begin
        entry_t e;
        e.tile.tx = 8'(x); e.tile.ty = 8'(y); e.depth = p.depth; e.pid = p.pid;
        expq.push_back(e);
      end
    @(negedge clk);
    in_pt = p; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic proj_point_t rand_pt();
    proj_point_t p;
    p = '0;
    p.pid = 24'($urandom); p.depth = 16'($urandom);
    p.tx0 = 8'($urandom_range(0, 20)); p.tx1 = p.tx0 + 8'($urandom_range(0, 4));
    p.ty0 = 8'($urandom_range(0, 20)); p.ty1 = p.ty0 + 8'($urandom_range(0, 4));
    return p;
  endfunction

  initial begin
    int t0, ntiles;
    proj_point_t p;
    in_valid = 0; in_pt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rate: a 3x2 box produces 6 entries in 6 consecutive cycles
    p = rand_pt(); p.tx1 = p.tx0 + 2; p.ty1 = p.ty0 + 1;
    send(p);
    ntiles = 0;
    t0 = $time;
    while (busy) begin @(negedge clk); ntiles++; end
    checks++;
    if (ntiles != 6) begin failures++; $display("6-tile box took %0d cycles", ntiles); end
    rand_stall = 1;
    for (int n = 0; n < 400; n++) begin
      send(rand_pt());
    end
    rand_stall = 0;
    repeat (60) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d entries missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
