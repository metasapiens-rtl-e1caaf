// vrc_pe: one pixel of the volume rendering core. Each cycle with en high it
// takes the next Gaussian of its tile, in front-to-back order, and updates
//   C += T * alpha * c,   T *= (1 - alpha)            (paper Eqn. 1)
// Gaussian sample: q = a*dx^2 + 2*b*dx*dy + c*dy^2 from the conic and the
// pixel-centre offset, G = exp(-q/2), computed as 2^(-q/2 * log2 e) with a
// 16-entry table of 2^(-i/16) (entry i = round(65536 * 2^(-i/16))) and linear
// interpolation between entries. alpha = min(opacity * G, 252/256); samples
// with alpha below ALPHA_TH are skipped; a pixel stops (done) at the first
// point that would push T below T_MIN, which then does not contribute.
// These alpha rules follow the reference 3D Gaussian splatting rasterizer,
// which the paper builds on; the fixed-point formats are this design's.
// Foveation: the pixel keeps two accumulators. Set A renders the tile's
// level t with the level-t versions of opacity and colour; set B, used only
// in blend tiles, renders level t+1. A point joins a level only if that
// level is within its quality bound m. init restarts both sets (T=1, C=0)
// before the current point is applied. Colour outputs are C rounded down to
// 8 bits per channel over a black background.
module vrc_pe
  import mts_pkg::*;
#(
  parameter int unsigned ALPHA_TH = 1,   // alpha below 1/256 is skipped
  parameter int unsigned T_MIN    = 7    // ~1e-4 in Q0.16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        init,
  input  logic [11:0] pix_x,
  input  logic [11:0] pix_y,
  input  gauss_feat_t feat,
  input  level_t      lev,
  input  logic        blend,
  output logic [23:0] rgb_a,
  output logic [23:0] rgb_b
);
  localparam logic [16:0] EXP2_TBL [17] = '{
    17'd65536, 17'd62757, 17'd60097, 17'd57549, 17'd55109, 17'd52773,
    17'd50535, 17'd48393, 17'd46341, 17'd44376, 17'd42495, 17'd40693,
    17'd38968, 17'd37316, 17'd35734, 17'd34219, 17'd32768};

  logic [16:0] ta, tb;
  logic [2:0][23:0] ca, cb;
  logic da, db;

  logic signed [16:0] dx, dy;
  logic signed [63:0] q;
  logic [63:0] u;
  logic [24:0] v;
  logic [4:0]  k;
  logic [16:0] e0, e1, e;
  logic [16:0] g;

  always_comb begin
    dx = $signed({1'b0, pix_x, 4'b1000}) - $signed({1'b0, feat.mean_x});
    dy = $signed({1'b0, pix_y, 4'b1000}) - $signed({1'b0, feat.mean_y});
    q  = 64'(feat.conic_a) * 64'(dx * dx) +
         64'(feat.conic_b) * 64'(dx * dy) * 64'sd2 +
         64'(feat.conic_c) * 64'(dy * dy);
    if (q < 0) q = '0;
    u  = 64'(q) >> 21;                    // q/2 in Q.8
    v  = (25'(u[11:0]) * 25'd5909) >> 12;  // times log2(e), Q.8
    k  = v[12:8];
    e0 = EXP2_TBL[{1'b0, v[7:4]}];
    e1 = EXP2_TBL[5'(v[7:4]) + 5'd1];
    e  = e0 - 17'((21'(e0 - e1) * 21'(v[3:0])) >> 4);
    if (u >= 64'd4096 || k >= 5'd17) g = '0;
    else g = e >> k;
  end

  // One accumulator update; returns the new state.
  function automatic void step(input logic use_pt, input logic [7:0] op, input logic [23:0] col,
                               input logic [16:0] t_in, input logic [2:0][23:0] c_in, input logic d_in,
                               output logic [16:0] t_out, output logic [2:0][23:0] c_out, output logic d_out);
    logic [24:0] prod;
    logic [7:0]  alpha;
    logic [24:0] test_t;
    logic [16:0] w;
    t_out = t_in; c_out = c_in; d_out = d_in;
    prod  = 25'(op) * 25'(g);
    alpha = (prod[24:16] > 9'd252) ? 8'd252 : prod[23:16];
    if (use_pt && !d_in && 32'(alpha) >= ALPHA_TH) begin
      test_t = (25'(t_in) * (25'd256 - 25'(alpha))) >> 8;
      if (test_t < 25'(T_MIN)) begin
        d_out = 1'b1;
      end else begin
        w = t_in - test_t[16:0];
        for (int ch = 0; ch < 3; ch++)
          c_out[ch] = c_in[ch] + 24'(w * 17'(col[ch*8 +: 8]));
        t_out = test_t[16:0];
      end
    end
  endfunction

  logic [16:0] ta_n, tb_n, ta_s, tb_s;
  logic [2:0][23:0] ca_n, cb_n, ca_s, cb_s;
  logic da_n, db_n, da_s, db_s;
  level_t lev_b;

  always_comb begin
    ta_s = init ? 17'd65536 : ta;  ca_s = init ? '0 : ca;  da_s = init ? 1'b0 : da;
    tb_s = init ? 17'd65536 : tb;  cb_s = init ? '0 : cb;  db_s = init ? 1'b0 : db;
    lev_b = (lev == 2'd3) ? lev : lev + 2'd1;
    step(lev <= feat.qbound, feat.opacity[lev], feat.rgb[lev], ta_s, ca_s, da_s, ta_n, ca_n, da_n);
    step(blend && lev != 2'd3 && lev_b <= feat.qbound, feat.opacity[lev_b], feat.rgb[lev_b],
         tb_s, cb_s, db_s, tb_n, cb_n, db_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ta <= 17'd65536; tb <= 17'd65536; ca <= '0; cb <= '0; da <= 1'b0; db <= 1'b0;
    end else if (en) begin
      ta <= ta_n; ca <= ca_n; da <= da_n;
      tb <= tb_n; cb <= cb_n; db <= db_n;
    end else if (init) begin
      ta <= 17'd65536; tb <= 17'd65536; ca <= '0; cb <= '0; da <= 1'b0; db <= 1'b0;
    end
  end

  always_comb begin
    for (int ch = 0; ch < 3; ch++) begin
      rgb_a[ch*8 +: 8] = ca[ch][23:16];
      rgb_b[ch*8 +: 8] = cb[ch][23:16];
    end
  end
endmodule
