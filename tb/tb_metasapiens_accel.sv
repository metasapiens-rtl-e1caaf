// tb_metasapiens_accel: end-to-end test of the accelerator on a reduced
// 8x6-tile screen with a small double buffer and 4-entry sub-tiles, so that
// tiles are split into several sub-tiles and incremental pipelining shows.
// Three frames with different gaze positions; see accel_tb_body.svh.
module tb_metasapiens_accel;
  import mts_pkg::*;
  import mts_ref_pkg::*;
  localparam int TX = 8, TY = 6, NPTS = 150, NFRAMES = 3;

  logic clk = 0, rst_n = 0;
  logic start, ready, done;
  fov_cfg_t cfg;
  logic [23:0] beta;
  logic pt_valid, pt_ready, pt_last;
  proj_point_t pt;
  logic mem_wr_en, mem_rd_en;
  logic [31:0] mem_wr_addr, mem_rd_addr;
  logic [63:0] mem_wr_data, mem_rd_data;
  logic feat_rd_en;
  logic [PID_W-1:0] feat_rd_pid;
  gauss_feat_t feat_rd_data;
  logic pix_valid;
  tile_t pix_tile;
  logic [3:0] pix_row;
  logic [TILE-1:0][23:0] pix_rgb;
  logic [31:0] st_points_in, st_points_dropped, st_entries, st_merged_tiles, st_multi_merges,
               st_blend_tiles, st_incremental_starts, st_bank_overflows, st_lb_stalls, st_frame_cycles;

  metasapiens_accel #(.TILES_X(TX), .TILES_Y(TY), .BANK_ENTRIES(512), .CHUNK(4)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

`include "accel_tb_body.svh"
endmodule
