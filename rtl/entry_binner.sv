// entry_binner: the tile level of the hierarchical sort. During the tile
// merge walk it records, for every tile, the offset at which the tile's
// entries start in the binned list (the prefix sum the merge unit computes).
// Then it streams the frame's duplicated entries, stored in arrival order
// from address 0 of memory, and writes each one to REGION_B + offset of its
// tile, bumping that offset: a counting sort by tile, so that every tile,
// and so every merged tile, occupies one contiguous address range.
// This step is this design's choice of how entries reach the double buffer
// grouped by tile; the paper does not describe it.
// Timing: one entry per cycle; the memory returns read data one cycle after
// the request; done pulses one cycle after the last write.
module entry_binner
  import mts_pkg::*;
#(
  parameter int unsigned TILES_X  = 100,
  parameter int unsigned TILES_Y  = 68,
  parameter logic [31:0] REGION_B = 32'h0100_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ti_valid,
  input  logic [15:0] ti_lin,
  input  logic [23:0] ti_offset,
  input  logic        start,
  input  logic [23:0] n_entries,
  output logic        mem_rd_en,
  output logic [31:0] mem_rd_addr,
  input  logic [63:0] mem_rd_data,
  output logic        mem_wr_en,
  output logic [31:0] mem_wr_addr,
  output logic [63:0] mem_wr_data,
  output logic        busy,
  output logic        done
);
  localparam int unsigned NT = TILES_X * TILES_Y;
  localparam int unsigned LW = $clog2(NT);

  logic [23:0] off_tab [NT];
  logic [23:0] i;
  logic        issuing, rd_pending;
  entry_t      ent;
  logic [LW-1:0] lin;

  assign ent = entry_t'(mem_rd_data[$bits(entry_t)-1:0]);
  assign lin = LW'(32'(ent.tile.ty) * TILES_X + 32'(ent.tile.tx));

  assign mem_rd_en   = issuing;
  assign mem_rd_addr = 32'(i);
  assign mem_wr_en   = rd_pending;
  assign mem_wr_addr = REGION_B + 32'(off_tab[lin]);
  assign mem_wr_data = mem_rd_data;
  assign busy        = issuing || rd_pending;

  always_ff @(posedge clk) begin
    if (ti_valid) off_tab[ti_lin[LW-1:0]] <= ti_offset;
    else if (rd_pending) off_tab[lin] <= off_tab[lin] + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i <= '0; issuing <= 1'b0; rd_pending <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_pending <= issuing;
      if (start && !busy) begin
        i <= '0;
        issuing <= (n_entries != '0);
        if (n_entries == '0) done <= 1'b1;
      end else if (issuing) begin
        if (i + 1'b1 == n_entries) issuing <= 1'b0;
        i <= i + 1'b1;
      end
      if (rd_pending && !issuing) done <= 1'b1;
    end
  end
endmodule
