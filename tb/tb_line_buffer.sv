// tb_line_buffer: a producer writes numbered words, closing rows at random
// (partial rows) or when full; a consumer with random readiness reads them.
// Checks: words come out in order, the end-of-row marks fall where the
// producer closed rows, no word of a row is read before its row was closed
// (incremental hand-over at row granularity), and the producer is held off
// when every row is in use.
module tb_line_buffer;
  localparam int W = 16, RL = 4, NR = 3;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, wr_eor, rd_valid, rd_ready, rd_eor, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [31:0] rows_full;
  int checks = 0, failures = 0;
  int nxt_rd = 0;
  int closed_upto = 0;      // words [0, closed_upto) belong to closed rows
  bit eor_at [int];
  int col = 0;

  line_buffer #(.WIDTH(W), .ROW_LEN(RL), .ROWS(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      checks++;
      if (int'(rd_data) != nxt_rd || nxt_rd >= closed_upto ||
          rd_eor != eor_at.exists(nxt_rd)) begin
        failures++;
        if (failures < 5) $display("read %0d eor=%0d, expected %0d eor=%0d (closed up to %0d)",
                                   rd_data, rd_eor, nxt_rd, eor_at.exists(nxt_rd), closed_upto);
      end
      nxt_rd++;
    end
    if (wr_valid && wr_ready) begin
      if (wr_eor || col == RL - 1) begin
        eor_at[int'(wr_data)] = 1;
        closed_upto = int'(wr_data) + 1;
        col = 0;
      end else col++;
    end
  end

  initial begin
    int n;
    wr_valid = 0; wr_data = 0; wr_eor = 0; rd_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill every row without reading: the producer must be held off
    n = 0;
    for (int k = 0; k < NR * RL + 2; k++) begin
      @(negedge clk);
      wr_valid = 1; wr_data = W'(n); wr_eor = 0;
      @(posedge clk);
      if (wr_ready) n++;
    end
    @(negedge clk);
    wr_valid = 0;
    checks++;
    if (n != NR * RL || rows_full == 0) begin
      failures++; $display("expected %0d words accepted with the buffer full, got %0d", NR * RL, n);
    end
    // random traffic
    rd_ready = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      wr_valid = 1'($urandom_range(0, 3) != 0);
      wr_data  = W'(n);
      wr_eor   = 1'($urandom_range(0, 4) == 0);
      rd_ready = 1'($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (wr_valid && wr_ready) n++;
    end
    @(negedge clk);
    wr_valid = 1; wr_data = W'(n); wr_eor = 1;   // close the last row
    @(posedge clk); if (wr_ready) n++;
    @(negedge clk);
    wr_valid = 0; rd_ready = 1;
    repeat (40) @(posedge clk);
    checks++;
    if (nxt_rd != n || !empty) begin
      failures++; $display("read %0d of %0d words, empty=%0d", nxt_rd, n, empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
