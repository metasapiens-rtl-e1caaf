// tb_fov_filter: random points (centres over a small screen, boxes partly
// off screen or empty, random quality bounds) under a fixed gaze. Every
// point the reference keeps must come out, in order, with its box clipped;
// dropped points must not. Output readiness is randomised to exercise the
// handshake, and the one-cycle latency is checked when the output is free.
module tb_fov_filter;
  import mts_pkg::*;
  import mts_ref_pkg::*;
  localparam int TX = 10, TY = 8;
  logic clk = 0, rst_n = 0;
  fov_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  proj_point_t in_pt, out_pt;
  logic [31:0] n_in, n_drop;
  int checks = 0, failures = 0;
  proj_point_t expq[$];
  int sent = 0, kept = 0, got = 0;

  fov_filter #(.TILES_X(TX), .TILES_Y(TY)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic proj_point_t rand_pt();
    proj_point_t p;
    p.pid = 24'($urandom);
    p.mean_x = 16'($urandom_range(0, TX * 256 - 1));
    p.mean_y = 16'($urandom_range(0, TY * 256 - 1));
    p.depth = 16'($urandom);
    p.tx0 = 8'($urandom_range(0, TX + 1)); p.tx1 = 8'($urandom_range(0, TX + 3));
    p.ty0 = 8'($urandom_range(0, TY + 1)); p.ty1 = 8'($urandom_range(0, TY + 3));
    p.qbound = 2'($urandom_range(0, 3));
    return p;
  endfunction

  function automatic bit ref_keep(proj_point_t p, output proj_point_t c);
    ref_lvl_t l;
    c = p;
    if (c.tx1 > TX - 1) c.tx1 = TX - 1;
    if (c.ty1 > TY - 1) c.ty1 = TY - 1;
    if (p.tx0 > p.tx1 || p.ty0 > p.ty1 || p.tx0 >= TX || p.ty0 >= TY) return 0;
    l = ref_level(p.mean_x / 256, p.mean_y / 256, cfg);
    return l.level <= int'(p.qbound);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      proj_point_t e;
      checks++;
      got++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        e = expq.pop_front();
        if (out_pt !== e) begin
          failures++;
          if (failures < 5) $display("mismatch got %h exp %h", out_pt, e);
        end
      end
    end
  end

  initial begin
    cfg.gaze_tx = 4; cfg.gaze_ty = 3;
    cfg.rb2[0] = 4; cfg.rb2[1] = 9; cfg.rb2[2] = 20;
    cfg.blo2[0] = 2; cfg.blo2[1] = 7; cfg.blo2[2] = 16;
    cfg.binv = '0;
    in_valid = 0; in_pt = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one point to a free output appears one cycle later
    @(negedge clk);
    in_pt = rand_pt(); in_pt.tx0 = 0; in_pt.tx1 = 1; in_pt.ty0 = 0; in_pt.ty1 = 1;
    in_pt.mean_x = 16'(4 * 256); in_pt.mean_y = 16'(3 * 256); in_pt.qbound = 0;
    in_valid = 1;
    begin proj_point_t c; void'(ref_keep(in_pt, c)); expq.push_back(c); end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("latency: output not valid after one cycle"); end
    out_ready = 1;
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      proj_point_t c;
      in_pt = rand_pt();
      in_valid = 1;
      out_ready = 1'($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (in_ready) begin
        sent++;
        if (ref_keep(in_pt, c)) begin expq.push_back(c); kept++; end
      end
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d points never came out", expq.size()); end
    checks++;
    if (int'(n_in) != sent + 1 || int'(n_drop) != sent - kept) begin
      failures++; $display("counters n_in=%0d n_drop=%0d sent=%0d kept=%0d", n_in, n_drop, sent, kept);
    end
    checks++;
    if (kept == 0 || kept == sent) begin failures++; $display("stimulus did not exercise both outcomes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
