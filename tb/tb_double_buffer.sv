// tb_double_buffer: fills both banks with different random data, commits
// them with descriptors, reads everything back from both banks, releases
// one bank, refills it while the other keeps its contents, and checks the
// full flags and descriptors at each step.
module tb_double_buffer;
  import mts_pkg::*;
  localparam int E = 64;
  logic clk = 0, rst_n = 0;
  logic wr_en, wr_bank, commit, commit_bank, rd_bank, release_en, release_bank;
  logic [5:0] wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  merged_t commit_desc, desc [2];
  logic [1:0] full;
  int checks = 0, failures = 0;
  logic [63:0] ref_mem [2][E];

  double_buffer #(.ENTRIES(E), .WIDTH(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input bit b, input int tag);
    for (int a = 0; a < E; a++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = b; wr_addr = 6'(a); wr_data = {$urandom, $urandom};
      ref_mem[b][a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0; commit = 1; commit_bank = b;
    commit_desc = '0; commit_desc.total = 24'(tag); commit_desc.ntiles = 16'(tag + 1);
    @(negedge clk);
    commit = 0;
    checks++;
    if (!full[b] || desc[b].total != 24'(tag) || desc[b].ntiles != 16'(tag + 1)) begin
      failures++; $display("bank %0d not committed", b);
    end
  endtask

  task automatic readback(input bit b);
    for (int a = 0; a < E; a++) begin
      rd_bank = b; rd_addr = 6'(a);
      #1;
      checks++;
      if (rd_data !== ref_mem[b][a]) begin
        failures++;
        if (failures < 5) $display("bank %0d addr %0d: %h vs %h", b, a, rd_data, ref_mem[b][a]);
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0; commit = 0; commit_bank = 0;
    commit_desc = '0; rd_bank = 0; rd_addr = 0; release_en = 0; release_bank = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (full != 2'b00) begin failures++; $display("banks full after reset"); end
    fill(0, 11);
    fill(1, 22);
    @(negedge clk);
    readback(0);
    readback(1);
    @(negedge clk);
    release_en = 1; release_bank = 0;
    @(negedge clk);
    release_en = 0;
    checks++;
    if (full != 2'b10) begin failures++; $display("release of bank 0 gave full=%b", full); end
    fill(0, 33);
    @(negedge clk);
    readback(0);
    readback(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
