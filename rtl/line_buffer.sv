// line_buffer: row-granular buffer between two pipeline stages, used in place
// of a tile-sized double buffer so that the consumer can start on part of a
// tile (incremental pipelining). Storage is ROWS small row memories of
// ROW_LEN words. The producer fills one row at a time; a row is handed to the
// consumer when it is full or when the producer marks the word it writes as
// the end of a row (wr_eor, used to close a partial sub-tile). The consumer
// reads a handed-over row word by word and the row is freed after its last
// word (rd_eor marks that word). Rows are used in ring order.
// The paper sizes each line buffer at 1 KB and describes it as "a set of
// small SRAMs, each of which buffers one row"; the row length, the handshake
// and the partial-row close are this design's choice.
// Timing: a word written in cycle c can be read from cycle c+1 if it closed
// its row. valid/ready on both sides; rows_full counts cycles the producer
// was held off because every row was in use.
module line_buffer #(
  parameter int unsigned WIDTH   = 64,
  parameter int unsigned ROW_LEN = 16,
  parameter int unsigned ROWS    = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_eor,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_eor,
  output logic             empty,
  output logic [31:0]      rows_full
);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW = $clog2(ROW_LEN + 1);

  logic [WIDTH-1:0] mem [ROWS][ROW_LEN];
  logic [CW-1:0]    row_len [ROWS];
  logic [RW-1:0]    wrow, rrow;
  logic [CW-1:0]    wcol, rcol;
  logic [RW:0]      done_rows;     // rows handed over and not yet freed
  logic             wr_fire, rd_fire, wr_close, rd_free;

  assign wr_ready = (32'(done_rows) < ROWS);
  assign wr_fire  = wr_valid && wr_ready;
  assign wr_close = wr_fire && (wr_eor || (32'(wcol) == ROW_LEN - 1));
  assign rd_valid = (done_rows != '0);
  assign rd_fire  = rd_valid && rd_ready;
  assign rd_data  = mem[rrow][rcol[$clog2(ROW_LEN > 1 ? ROW_LEN : 2)-1:0]];
  assign rd_eor   = (rcol + 1'b1 == row_len[rrow]);
  assign rd_free  = rd_fire && rd_eor;
  assign empty    = (done_rows == '0) && (wcol == '0);

  function automatic logic [RW-1:0] next_row(input logic [RW-1:0] r);
    return (32'(r) == ROWS - 1) ? '0 : r + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_fire) mem[wrow][wcol[$clog2(ROW_LEN > 1 ? ROW_LEN : 2)-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wrow <= '0; rrow <= '0; wcol <= '0; rcol <= '0;
      done_rows <= '0; rows_full <= '0;
      for (int r = 0; r < ROWS; r++) row_len[r] <= '0;
    end else begin
      if (wr_valid && !wr_ready) rows_full <= rows_full + 1;
      if (wr_fire) begin
        if (wr_close) begin
          row_len[wrow] <= wcol + 1'b1;
          wrow <= next_row(wrow);
          wcol <= '0;
        end else begin
          wcol <= wcol + 1'b1;
        end
      end
      if (rd_fire) begin
        if (rd_eor) begin
          rrow <= next_row(rrow);
          rcol <= '0;
        end else begin
          rcol <= rcol + 1'b1;
        end
      end
      done_rows <= done_rows + (wr_close ? 1'b1 : 1'b0) - (rd_free ? 1'b1 : 1'b0);
    end
  end

  // A row is never read before it has been handed over.
  assert property (@(posedge clk) disable iff (!rst_n) rd_fire |-> done_rows != '0);
endmodule
