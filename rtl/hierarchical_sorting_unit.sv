// hierarchical_sorting_unit: orders the entries of every tile front to back.
// The sort is hierarchical in two levels. Level one, by tile, is done before
// this unit: the entries arrive binned by tile in a double-buffer bank that
// holds one merged tile (consecutive tiles in raster order). Level two, by
// depth, is done here, one tile at a time, in chunks of CHUNK entries: a pass
// scans the tile's entries once and keeps, in a CHUNK-slot insertion array,
// the CHUNK nearest entries not yet emitted; the array is then emitted as one
// sorted sub-tile, and the next pass resumes above the last emitted key. The
// key is {depth, position in the bank}, so equal depths keep bank order.
// Because each pass emits the next nearest sub-tile, the rendering core can
// start on the first sub-tile while later ones are still being sorted; this
// is what incremental pipelining needs from the sorter. A tile without
// entries is emitted as a single entry flagged empty so that its pixels are
// still produced.
// The paper only names this unit (taken from GSCore) and gives one per
// accelerator; the chunked selection scheme is this design's choice.
// Timing: a pass takes one cycle per entry of the tile, plus one cycle to
// end it; emission is one entry per cycle under out_ready. A tile of n
// entries costs about n*ceil(n/CHUNK) + n cycles.
module hierarchical_sorting_unit
  import mts_pkg::*;
#(
  parameter int unsigned CHUNK   = 16,
  parameter int unsigned ENTRIES = 4096,
  parameter int unsigned TILES_X = 100
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // double buffer side
  input  logic [1:0]                 bank_full,
  input  merged_t                    bank_desc [2],
  output logic                       rd_bank,
  output logic [$clog2(ENTRIES)-1:0] rd_addr,
  input  logic [63:0]                rd_data,
  output logic                       release_en,
  output logic                       release_bank,
  // sorted output, towards the line buffer
  output logic                       out_valid,
  input  logic                       out_ready,
  output sorted_t                    out,
  output logic                       out_eor,     // last entry of a sub-tile
  // status
  output logic                       busy,
  output logic                       tile_open,   // current tile partly emitted
  output tile_t                      cur_tile,
  output logic [31:0]                n_chunks
);
  localparam int unsigned AW = $clog2(ENTRIES);
  localparam int unsigned KW = DEPTH_W + AW + 1;
  localparam int unsigned JW = $clog2(CHUNK);

  typedef enum logic [2:0] {S_IDLE, S_TSTART, S_PASS, S_EMIT, S_EMPTY, S_NEXT} state_t;
  state_t state;

  logic [KW-1:0]    key  [CHUNK];
  logic [PID_W-1:0] kpid [CHUNK];
  logic [CHUNK-1:0] kvld;

  merged_t      d;
  logic [AW:0]  p, s, e, i;        // positions within the bank
  logic         known_end;
  logic [15:0]  tiles_left;
  tile_t        tile;
  logic [AW:0]  emitted, n;
  logic [KW-1:0] last_key;
  logic         have_last;
  logic [JW:0]  j, kcnt;

  entry_t       ent;
  logic [KW-1:0] k_in;
  logic         in_range, take;
  logic [CHUNK-1:0] lt;

  assign ent     = entry_t'(rd_data[$bits(entry_t)-1:0]);
  assign rd_addr = i[AW-1:0];
  assign k_in    = {ent.depth, i};
  assign in_range = (i < d.total[AW:0]) && (known_end ? (i < e) : (ent.tile == tile));
  assign take    = in_range && (!have_last || k_in > last_key);

  always_comb begin
    for (int q = 0; q < CHUNK; q++) lt[q] = !kvld[q] || (k_in < key[q]);
    kcnt = '0;
    for (int q = 0; q < CHUNK; q++) kcnt = kcnt + (JW+1)'(kvld[q]);
  end

  assign busy      = (state != S_IDLE);
  assign cur_tile  = tile;
  assign tile_open = (state != S_IDLE) && (emitted != '0);
  assign out_valid = (state == S_EMIT) || (state == S_EMPTY);

  always_comb begin
    out.tile  = tile;
    out.pid   = kpid[j[JW-1:0]];
    out.first = (emitted == '0);
    out.last  = (emitted + 1'b1 == n);
    out.empty = 1'b0;
    out_eor   = (j + 1'b1 == kcnt);
    if (state == S_EMPTY) begin
      out.pid = '0; out.first = 1'b1; out.last = 1'b1; out.empty = 1'b1; out_eor = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rd_bank <= 1'b0; d <= '0;
      p <= '0; s <= '0; e <= '0; i <= '0; known_end <= 1'b0; tiles_left <= '0; tile <= '0;
      emitted <= '0; n <= '0; last_key <= '0; have_last <= 1'b0; j <= '0;
      kvld <= '0; release_en <= 1'b0; release_bank <= 1'b0; n_chunks <= '0;
      for (int q = 0; q < CHUNK; q++) begin key[q] <= '0; kpid[q] <= '0; end
    end else begin
      release_en <= 1'b0;
      case (state)
        S_IDLE: if (bank_full[rd_bank] && !release_en) begin
          d          <= bank_desc[rd_bank];
          p          <= '0;
          tile       <= bank_desc[rd_bank].first_tile;
          tiles_left <= bank_desc[rd_bank].ntiles;
          state      <= S_TSTART;
        end
        S_TSTART: begin
          s <= p; i <= p; known_end <= 1'b0; emitted <= '0; have_last <= 1'b0;
          kvld <= '0; j <= '0;
          state <= S_PASS;
        end
        S_PASS: begin
          if (in_range) begin
            if (take) begin
              for (int q = 0; q < CHUNK; q++) begin
                if (lt[q]) begin
                  if (q == 0 || !lt[q-1]) begin
                    key[q] <= k_in; kpid[q] <= ent.pid; kvld[q] <= 1'b1;
                  end else begin
                    key[q] <= key[q-1]; kpid[q] <= kpid[q-1]; kvld[q] <= kvld[q-1];
                  end
                end
              end
            end
            i <= i + 1'b1;
          end else begin
            if (!known_end) begin
              e <= i; known_end <= 1'b1;
              n <= i - s;
            end
            j <= '0;
            state <= (kvld[0]) ? S_EMIT : (emitted == '0 ? S_EMPTY : S_NEXT);
          end
        end
        S_EMIT: if (out_ready) begin
          j <= j + 1'b1;
          emitted <= emitted + 1'b1;
          last_key <= key[j[JW-1:0]];
          have_last <= 1'b1;
          if (j + 1'b1 == kcnt) begin
            n_chunks <= n_chunks + 1;
            kvld <= '0;
            i <= s;
            state <= (emitted + 1'b1 == n) ? S_NEXT : S_PASS;
          end
        end
        S_EMPTY: if (out_ready) begin
          n_chunks <= n_chunks + 1;
          state <= S_NEXT;
        end
        S_NEXT: begin
          p <= e;
          emitted <= '0;
          if (tiles_left == 16'd1) begin
            release_en <= 1'b1; release_bank <= rd_bank;
            rd_bank <= ~rd_bank;
            state <= S_IDLE;
          end else begin
            tiles_left <= tiles_left - 1'b1;
            if (32'(tile.tx) == TILES_X - 1) begin
              tile.tx <= '0; tile.ty <= tile.ty + 1'b1;
            end else begin
              tile.tx <= tile.tx + 1'b1;
            end
            state <= S_TSTART;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
