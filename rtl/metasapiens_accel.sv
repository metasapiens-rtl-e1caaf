// metasapiens_accel: foveated Gaussian-splatting rendering accelerator.
// One frame is rendered in four phases:
//   1. Projection: projected points stream in from the projection/culling/
//      conversion units; the Fov filter drops points whose quality bound is
//      below the level of their tile; a line buffer passes the rest to the
//      duplication unit, which emits one entry per covered tile. Entries are
//      appended to memory from address 0 while stage 1 of the tile merge unit
//      counts them per tile.
//   2. Merge walk: stage 2 of the tile merge unit walks the tiles, forms
//      merged tiles of at most beta entries, and hands every tile's binned
//      offset to the binner and every merged tile to the bank loader.
//   3. Binning: the entries are copied from arrival order into tile order at
//      REGION_B (the tile level of the hierarchical sort).
//   4. Sorting and rasterization, pipelined over merged tiles: the loader
//      fills one double-buffer bank while the hierarchical sorting unit sorts
//      the other tile by tile in depth chunks; sorted sub-tiles pass through
//      a second line buffer to the volume rendering core as soon as they are
//      complete (incremental pipelining); the core blends the two quality
//      levels of band tiles and writes one pixel row per cycle.
// The block structure follows the paper's accelerator figure; the phase
// order, the memory layout and all interfaces are this design's choice.
// Ports: the projection units and the DRAM are outside; the point stream,
// a 64-bit entry memory port pair (read data one cycle after the request)
// and a feature read port (one-cycle) connect to them. `start` begins a
// frame (only when `ready`); `done` pulses when its last pixel row is out.
// The statistics count each mechanism per frame-start-to-done run.
module metasapiens_accel
  import mts_pkg::*;
#(
  parameter int unsigned TILES_X      = 100,       // 1600 pixels
  parameter int unsigned TILES_Y      = 68,       // 1088 pixels
  parameter int unsigned BANK_ENTRIES = 4096,     // 2 x 32 KB = 64 KB double buffer
  parameter int unsigned CHUNK        = 16,       // sub-tile length in the sorter
  parameter int unsigned LB_BITS      = 8192,     // 1 KB per line buffer
  parameter logic [31:0] REGION_B     = 32'h0100_0000
) (
  input  logic          clk,
  input  logic          rst_n,
  // control and configuration
  input  logic          start,
  output logic          ready,
  output logic          done,
  input  fov_cfg_t      cfg,
  input  logic [23:0]   beta,
  // projected points from the projection units
  input  logic          pt_valid,
  output logic          pt_ready,
  input  proj_point_t   pt,
  input  logic          pt_last,
  // entry memory (DRAM)
  output logic          mem_wr_en,
  output logic [31:0]   mem_wr_addr,
  output logic [63:0]   mem_wr_data,
  output logic          mem_rd_en,
  output logic [31:0]   mem_rd_addr,
  input  logic [63:0]   mem_rd_data,
  // point features (DRAM)
  output logic          feat_rd_en,
  output logic [PID_W-1:0] feat_rd_pid,
  input  gauss_feat_t   feat_rd_data,
  // rendered pixels
  output logic          pix_valid,
  output tile_t         pix_tile,
  output logic [3:0]    pix_row,
  output logic [TILE-1:0][23:0] pix_rgb,
  // statistics
  output logic [31:0]   st_points_in,
  output logic [31:0]   st_points_dropped,
  output logic [31:0]   st_entries,
  output logic [31:0]   st_merged_tiles,
  output logic [31:0]   st_multi_merges,
  output logic [31:0]   st_blend_tiles,
  output logic [31:0]   st_incremental_starts,
  output logic [31:0]   st_bank_overflows,
  output logic [31:0]   st_lb_stalls,
  output logic [31:0]   st_frame_cycles
);
  localparam int unsigned NT     = TILES_X * TILES_Y;
  localparam int unsigned PW     = $bits(proj_point_t);
  localparam int unsigned SW     = $bits(sorted_t);
  localparam int unsigned LB1_ROWS = LB_BITS / PW;
  localparam int unsigned LB2_ROWS = LB_BITS / (SW * CHUNK);
  localparam int unsigned AW     = $clog2(BANK_ENTRIES);

  typedef enum logic [2:0] {P_IDLE, P_PROJ, P_WALK, P_BIN, P_RENDER} phase_t;
  phase_t phase;

  // ---------------- projection stage ----------------
  logic        f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  proj_point_t f_out;
  logic [31:0] f_nin, f_ndrop;
  logic        seen_last;

  assign f_in_valid = pt_valid && (phase == P_PROJ) && !seen_last;
  assign pt_ready   = f_in_ready && (phase == P_PROJ) && !seen_last;

  fov_filter #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_filter (
    .clk, .rst_n, .cfg,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_pt(pt),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_pt(f_out),
    .n_in(f_nin), .n_drop(f_ndrop));

  logic        lb1_rd_valid, lb1_rd_ready, lb1_empty, lb1_eor;
  logic [PW-1:0] lb1_rd_data;
  logic [31:0] lb1_stalls;

  line_buffer #(.WIDTH(PW), .ROW_LEN(1), .ROWS(LB1_ROWS)) u_lb1 (
    .clk, .rst_n,
    .wr_valid(f_out_valid), .wr_ready(f_out_ready), .wr_data(f_out), .wr_eor(1'b1),
    .rd_valid(lb1_rd_valid), .rd_ready(lb1_rd_ready), .rd_data(lb1_rd_data), .rd_eor(lb1_eor),
    .empty(lb1_empty), .rows_full(lb1_stalls));

  logic   dup_valid, dup_busy;
  entry_t dup_entry;

  duplication_unit u_dup (
    .clk, .rst_n,
    .in_valid(lb1_rd_valid), .in_ready(lb1_rd_ready), .in_pt(proj_point_t'(lb1_rd_data)),
    .out_valid(dup_valid), .out_ready(1'b1), .out_entry(dup_entry), .busy(dup_busy));

  logic [23:0] n_entries;

  // ---------------- tile merge unit ----------------
  logic        tmu_clearing, walk_start, walk_busy, walk_done;
  logic        ti_valid, md_valid;
  tile_t       ti_tile;
  logic [15:0] ti_lin, ti_mid;
  logic [15:0] ti_count;
  logic [23:0] ti_offset;
  merged_t     md;

  tile_merge_unit #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .CNT_W(16)) u_tmu (
    .clk, .rst_n, .clearing(tmu_clearing),
    .cnt_valid(dup_valid && phase == P_PROJ), .cnt_tile(dup_entry.tile),
    .walk_start, .beta, .walk_busy, .walk_done,
    .ti_valid, .ti_tile, .ti_lin, .ti_count, .ti_offset, .ti_mid,
    .md_valid, .md);

  // ---------------- binning ----------------
  logic        bin_start, bin_busy, bin_done;
  logic        bin_rd_en, bin_wr_en;
  logic [31:0] bin_rd_addr, bin_wr_addr;
  logic [63:0] bin_wr_data;

  entry_binner #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .REGION_B(REGION_B)) u_bin (
    .clk, .rst_n, .ti_valid, .ti_lin, .ti_offset,
    .start(bin_start), .n_entries,
    .mem_rd_en(bin_rd_en), .mem_rd_addr(bin_rd_addr), .mem_rd_data,
    .mem_wr_en(bin_wr_en), .mem_wr_addr(bin_wr_addr), .mem_wr_data(bin_wr_data),
    .busy(bin_busy), .done(bin_done));

  // ---------------- double buffer and loader ----------------
  logic        ld_rd_en, ld_idle;
  logic [31:0] ld_rd_addr;
  logic        db_wr_en, db_wr_bank, db_commit, db_commit_bank;
  logic [AW-1:0] db_wr_addr, db_rd_addr;
  logic [63:0] db_wr_data, db_rd_data;
  merged_t     db_commit_desc;
  logic        db_rd_bank, db_rel, db_rel_bank;
  logic [1:0]  db_full;
  merged_t     db_desc [2];
  logic [31:0] ld_overflow;

  bank_loader #(.QDEPTH(NT), .ENTRIES(BANK_ENTRIES), .REGION_B(REGION_B)) u_loader (
    .clk, .rst_n, .md_valid, .md, .enable(phase == P_RENDER),
    .mem_rd_en(ld_rd_en), .mem_rd_addr(ld_rd_addr), .mem_rd_data,
    .bank_full(db_full),
    .wr_en(db_wr_en), .wr_bank(db_wr_bank), .wr_addr(db_wr_addr), .wr_data(db_wr_data),
    .commit(db_commit), .commit_bank(db_commit_bank), .commit_desc(db_commit_desc),
    .idle(ld_idle), .n_overflow(ld_overflow));

  double_buffer #(.ENTRIES(BANK_ENTRIES), .WIDTH(64)) u_db (
    .clk, .rst_n,
    .wr_en(db_wr_en), .wr_bank(db_wr_bank), .wr_addr(db_wr_addr), .wr_data(db_wr_data),
    .commit(db_commit), .commit_bank(db_commit_bank), .commit_desc(db_commit_desc),
    .rd_bank(db_rd_bank), .rd_addr(db_rd_addr), .rd_data(db_rd_data),
    .release_en(db_rel), .release_bank(db_rel_bank),
    .full(db_full), .desc(db_desc));

  // ---------------- sorting ----------------
  logic    hsu_valid, hsu_ready, hsu_eor, hsu_busy, hsu_open;
  sorted_t hsu_out;
  tile_t   hsu_tile;
  logic [31:0] hsu_chunks;

  hierarchical_sorting_unit #(.CHUNK(CHUNK), .ENTRIES(BANK_ENTRIES), .TILES_X(TILES_X)) u_hsu (
    .clk, .rst_n,
    .bank_full(db_full), .bank_desc(db_desc),
    .rd_bank(db_rd_bank), .rd_addr(db_rd_addr), .rd_data(db_rd_data),
    .release_en(db_rel), .release_bank(db_rel_bank),
    .out_valid(hsu_valid), .out_ready(hsu_ready), .out(hsu_out), .out_eor(hsu_eor),
    .busy(hsu_busy), .tile_open(hsu_open), .cur_tile(hsu_tile), .n_chunks(hsu_chunks));

  logic        lb2_rd_valid, lb2_rd_ready, lb2_empty, lb2_eor;
  logic [SW-1:0] lb2_rd_data;
  logic [31:0] lb2_stalls;
  sorted_t     lb2_entry;

  line_buffer #(.WIDTH(SW), .ROW_LEN(CHUNK), .ROWS(LB2_ROWS)) u_lb2 (
    .clk, .rst_n,
    .wr_valid(hsu_valid), .wr_ready(hsu_ready), .wr_data(hsu_out), .wr_eor(hsu_eor),
    .rd_valid(lb2_rd_valid), .rd_ready(lb2_rd_ready), .rd_data(lb2_rd_data), .rd_eor(lb2_eor),
    .empty(lb2_empty), .rows_full(lb2_stalls));

  assign lb2_entry = sorted_t'(lb2_rd_data);

  // ---------------- rasterization ----------------
  logic        vrc_busy;
  logic [31:0] vrc_points, vrc_tiles, vrc_blend;

  volume_rendering_core u_vrc (
    .clk, .rst_n, .cfg,
    .in_valid(lb2_rd_valid), .in_ready(lb2_rd_ready), .in_entry(lb2_entry),
    .feat_rd_en, .feat_rd_pid, .feat_rd_data,
    .pix_valid, .pix_tile, .pix_row, .pix_rgb,
    .busy(vrc_busy), .n_points(vrc_points), .n_tiles(vrc_tiles), .n_blend_tiles(vrc_blend));

  // ---------------- memory port sharing ----------------
  always_comb begin
    mem_wr_en   = 1'b0;
    mem_wr_addr = '0;
    mem_wr_data = '0;
    if (phase == P_PROJ) begin
      mem_wr_en   = dup_valid;
      mem_wr_addr = 32'(n_entries);
      mem_wr_data = 64'(dup_entry);
    end else if (phase == P_BIN) begin
      mem_wr_en   = bin_wr_en;
      mem_wr_addr = bin_wr_addr;
      mem_wr_data = bin_wr_data;
    end
    mem_rd_en   = (phase == P_BIN) ? bin_rd_en   : ld_rd_en;
    mem_rd_addr = (phase == P_BIN) ? bin_rd_addr : ld_rd_addr;
  end

  // ---------------- frame control ----------------
  logic [31:0] tiles_done;
  logic [31:0] b_in, b_drop, b_blend, b_ovf, b_lbs;   // counter values at frame start
  assign ready = (phase == P_IDLE) && !tmu_clearing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; seen_last <= 1'b0; n_entries <= '0; walk_start <= 1'b0;
      bin_start <= 1'b0; done <= 1'b0; tiles_done <= '0;
      b_in <= '0; b_drop <= '0; b_blend <= '0; b_ovf <= '0; b_lbs <= '0;
      st_points_in <= '0; st_points_dropped <= '0; st_entries <= '0;
      st_merged_tiles <= '0; st_multi_merges <= '0; st_blend_tiles <= '0;
      st_incremental_starts <= '0; st_bank_overflows <= '0; st_lb_stalls <= '0;
      st_frame_cycles <= '0;
    end else begin
      walk_start <= 1'b0;
      bin_start  <= 1'b0;
      done       <= 1'b0;
      if (phase != P_IDLE) st_frame_cycles <= st_frame_cycles + 1;
      if (dup_valid && phase == P_PROJ) begin
        n_entries  <= n_entries + 1'b1;
        st_entries <= st_entries + 1;
      end
      if (md_valid) begin
        st_merged_tiles <= st_merged_tiles + 1;
        if (md.ntiles > 16'd1) st_multi_merges <= st_multi_merges + 1;
      end
      // a tile whose first sub-tile reaches the core while the sorter is
      // still working on that tile: incremental pipelining at work
      if (lb2_rd_valid && lb2_rd_ready && lb2_entry.first && !lb2_entry.last &&
          hsu_open && hsu_tile == lb2_entry.tile)
        st_incremental_starts <= st_incremental_starts + 1;
      if (pix_valid && pix_row == 4'(TILE - 1)) tiles_done <= tiles_done + 1;
      case (phase)
        P_IDLE: if (start && !tmu_clearing) begin
          phase <= P_PROJ; seen_last <= 1'b0; n_entries <= '0; tiles_done <= '0;
          st_points_in <= '0; st_points_dropped <= '0; st_entries <= '0;
          st_merged_tiles <= '0; st_multi_merges <= '0; st_blend_tiles <= '0;
          st_incremental_starts <= '0; st_frame_cycles <= '0;
          b_in <= f_nin; b_drop <= f_ndrop; b_blend <= vrc_blend;
          b_ovf <= ld_overflow; b_lbs <= lb1_stalls + lb2_stalls;
        end
        P_PROJ: begin
          if (pt_valid && pt_ready && pt_last) seen_last <= 1'b1;
          if (seen_last && !f_out_valid && lb1_empty && !lb1_rd_valid && !dup_busy) begin
            phase <= P_WALK;
            walk_start <= 1'b1;
          end
        end
        P_WALK: if (walk_done) begin
          phase <= P_BIN;
          bin_start <= 1'b1;
        end
        P_BIN: if (bin_done) phase <= P_RENDER;
        P_RENDER: if (tiles_done == 32'(NT)) begin
          phase <= P_IDLE;
          done  <= 1'b1;
          st_points_in      <= f_nin - b_in;
          st_points_dropped <= f_ndrop - b_drop;
          st_blend_tiles    <= vrc_blend - b_blend;
          st_bank_overflows <= ld_overflow - b_ovf;
          st_lb_stalls      <= lb1_stalls + lb2_stalls - b_lbs;
        end
        default: phase <= P_IDLE;
      endcase
    end
  end
endmodule
