// double_buffer: the two-bank buffer in front of the sorting unit. The
// loader fills one bank with the tile-binned entries of a merged tile while
// the sorting unit reads the other; a bank changes hands by commit (filled,
// with its merged-tile descriptor) and release (sorted, free again).
// The paper gives the size, 64 KB in all; with 64-bit words that is two
// banks of 4096 entries. Ping-pong order, the commit/release handshake and
// the combinational read port are this design's choice.
// Timing: writes take effect at the clock edge; reads are combinational from
// the addressed word; a committed bank is visible (full) the next cycle.
module double_buffer
  import mts_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096,
  parameter int unsigned WIDTH   = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // fill side
  input  logic                       wr_en,
  input  logic                       wr_bank,
  input  logic [$clog2(ENTRIES)-1:0] wr_addr,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       commit,
  input  logic                       commit_bank,
  input  merged_t                    commit_desc,
  // sort side
  input  logic                       rd_bank,
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output logic [WIDTH-1:0]           rd_data,
  input  logic                       release_en,
  input  logic                       release_bank,
  // status
  output logic [1:0]                 full,
  output merged_t                    desc [2]
);
  logic [WIDTH-1:0] bank0 [ENTRIES];
  logic [WIDTH-1:0] bank1 [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) bank0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) bank1[wr_addr] <= wr_data;
  end

  assign rd_data = rd_bank ? bank1[rd_addr] : bank0[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      desc[0] <= '0;
      desc[1] <= '0;
    end else begin
      if (release_en) full[release_bank] <= 1'b0;
      if (commit) begin
        full[commit_bank] <= 1'b1;
        desc[commit_bank] <= commit_desc;
      end
    end
  end

  // A bank is written only while it is free, and released only when full.
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full[wr_bank]);
  assert property (@(posedge clk) disable iff (!rst_n) release_en |-> full[release_bank]);
endmodule
