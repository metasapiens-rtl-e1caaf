// tb_metasapiens_accel_full: one frame through the accelerator at its
// default size (1600x1088 pixels, 100x68 tiles, 64 KB double buffer, 16-entry
// sub-tiles, 1 KB line buffers) with 8000 random Gaussians; every pixel is
// checked against the reference. See accel_tb_body.svh.
module tb_metasapiens_accel_full;
  import mts_pkg::*;
  import mts_ref_pkg::*;
  localparam int TX = 100, TY = 68, NPTS = 8000, NFRAMES = 1;

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

  metasapiens_accel dut (.*);

  initial begin
    repeat (20000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

`include "accel_tb_body.svh"
endmodule
