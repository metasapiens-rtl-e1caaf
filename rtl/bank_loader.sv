// bank_loader: queues the merged tiles formed by the tile merge unit and,
// whenever a double-buffer bank is free, copies the next merged tile's
// contiguous run of binned entries from memory into it, then commits the
// bank with the merged-tile descriptor. Banks are filled alternately, so the
// next merged tile is loaded while the sorting unit works on the current one.
// A merged tile larger than a bank (a single tile above the bank size) is
// cut to the bank size and counted in n_overflow; its extra entries are not
// rendered. Queueing, the overflow rule and the memory handshake are this
// design's choice.
// Timing: one entry per cycle, read data one cycle after the request.
module bank_loader
  import mts_pkg::*;
#(
  parameter int unsigned QDEPTH   = 3600,
  parameter int unsigned ENTRIES  = 4096,
  parameter logic [31:0] REGION_B = 32'h0100_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        md_valid,
  input  merged_t     md,
  input  logic        enable,
  output logic        mem_rd_en,
  output logic [31:0] mem_rd_addr,
  input  logic [63:0] mem_rd_data,
  input  logic [1:0]  bank_full,
  output logic        wr_en,
  output logic        wr_bank,
  output logic [$clog2(ENTRIES)-1:0] wr_addr,
  output logic [63:0] wr_data,
  output logic        commit,
  output logic        commit_bank,
  output merged_t     commit_desc,
  output logic        idle,
  output logic [31:0] n_overflow
);
  localparam int unsigned QW = $clog2(QDEPTH);
  localparam int unsigned AW = $clog2(ENTRIES);

  merged_t     q [QDEPTH];
  logic [QW-1:0] qh, qt;
  logic [QW:0]   qn;
  logic        loading, pending;
  merged_t     cur;
  logic [23:0] k, len;
  logic        fill_bank;
  logic [AW-1:0] pend_addr;
  logic        pop;

  assign pop = enable && !loading && !pending && !commit && qn != '0 && !bank_full[fill_bank];

  assign mem_rd_en   = loading;
  assign mem_rd_addr = REGION_B + 32'(cur.start) + 32'(k);
  assign wr_en       = pending;
  assign wr_bank     = fill_bank;
  assign wr_addr     = pend_addr;
  assign wr_data     = mem_rd_data;
  assign idle        = (qn == '0) && !loading && !pending && !commit;

  always_ff @(posedge clk) begin
    if (md_valid) q[qt] <= md;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qh <= '0; qt <= '0; qn <= '0; loading <= 1'b0; pending <= 1'b0; cur <= '0;
      k <= '0; len <= '0; fill_bank <= 1'b0; pend_addr <= '0; commit <= 1'b0;
      commit_bank <= 1'b0; commit_desc <= '0; n_overflow <= '0;
    end else begin
      commit <= 1'b0;
      qt <= md_valid ? ((32'(qt) == QDEPTH - 1) ? '0 : qt + 1'b1) : qt;
      qh <= pop ? ((32'(qh) == QDEPTH - 1) ? '0 : qh + 1'b1) : qh;
      qn <= qn + (md_valid ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
      pending   <= loading;
      pend_addr <= AW'(k);
      if (pop) begin
        cur <= q[qh];
        k   <= '0;
        if (q[qh].total > 24'(ENTRIES)) begin
          len <= 24'(ENTRIES);
          n_overflow <= n_overflow + 1;
        end else begin
          len <= q[qh].total;
        end
        loading <= (q[qh].total != '0);
        if (q[qh].total == '0) begin
          commit <= 1'b1; commit_bank <= fill_bank; commit_desc <= q[qh];
          fill_bank <= ~fill_bank;
        end
      end else if (loading) begin
        k <= k + 1'b1;
        if (k + 1'b1 == len) loading <= 1'b0;
      end else if (pending) begin
        // last word lands this cycle; commit the bank
        commit      <= 1'b1;
        commit_bank <= fill_bank;
        commit_desc <= cur;
        commit_desc.total <= len;
        fill_bank   <= ~fill_bank;
      end
    end
  end
endmodule
