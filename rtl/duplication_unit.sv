// duplication_unit: turns each kept point into one entry per tile its ellipse
// bounding box covers, so that every tile later sees every point that may
// touch it. The box is walked row by row in tile coordinates, one entry per
// cycle; a new point is accepted when the previous box is finished.
// The paper only names this unit (after GSCore); walking the bounding box is
// this design's choice of the simplest unit that does the job.
// Interface: valid/ready in (points) and out (entries). A point covering
// (tx1-tx0+1)*(ty1-ty0+1) tiles leaves after that many output cycles.
module duplication_unit
  import mts_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  proj_point_t in_pt,
  output logic        out_valid,
  input  logic        out_ready,
  output entry_t      out_entry,
  output logic        busy
);
  proj_point_t     cur;
  logic [TC_W-1:0] cx, cy;
  logic            active;
  logic            at_end;

  assign in_ready  = !active;
  assign out_valid = active;
  assign busy      = active;
  assign at_end    = (cx == cur.tx1) && (cy == cur.ty1);

  always_comb begin
    out_entry.tile.tx = cx;
    out_entry.tile.ty = cy;
    out_entry.depth   = cur.depth;
    out_entry.pid     = cur.pid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cur    <= '0;
      cx     <= '0;
      cy     <= '0;
    end else if (!active) begin
      if (in_valid) begin
        active <= 1'b1;
        cur    <= in_pt;
        cx     <= in_pt.tx0;
        cy     <= in_pt.ty0;
      end
    end else if (out_ready) begin
      if (at_end) begin
        active <= 1'b0;
      end else if (cx == cur.tx1) begin
        cx <= cur.tx0;
        cy <= cy + 1'b1;
      end else begin
        cx <= cx + 1'b1;
      end
    end
  end
endmodule
