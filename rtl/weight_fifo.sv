// weight_fifo: asymmetric weight FIFO of one MAC lane (batch-processing design).
//
// The write side takes 64-bit DMA words, each holding four Q7.8 weights (weight k of
// the word in bits 16*k+15 .. 16*k); the read side delivers one 16-bit weight per
// read, as the asymmetric block RAMs of the paper do. Each FIFO holds a whole weight
// row, because in batch mode the same row is used once for every sample of the
// batch. Reading therefore uses two pointers: `head`, the start of the current row,
// and `peek`, the next weight to read. A read flagged `rewind` is the last of a row
// for a sample that is not the batch's last: afterwards `peek` returns to `head` so
// the row is read again. A read flagged `commit` is the last read of the row for the
// last sample: the row is released and `head` moves to the next 64-bit boundary
// (rows are padded to a multiple of four weights). Read data is registered and valid
// the cycle after `rd_en`. `full` means there is no room for one more 64-bit word.
// The single clock domain is a simplification of the paper's separate 133 MHz
// memory-interface clock.
module weight_fifo
  import dnn_pkg::*;
#(
  parameter int unsigned DEPTH = 2048   // capacity in 16-bit weights, multiple of 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side (from the decoder of the asymmetric BRAM)
  input  logic              wr_en,
  input  logic [DMA_W-1:0]  wr_data,
  output logic              full,
  // read side (from the lane controller)
  input  logic              rd_en,
  input  logic              rewind,
  input  logic              commit,
  output q7_8_t             rd_data,
  output logic              avail      // at least one unread weight at `peek`
);

  localparam int unsigned WORDS = DEPTH / 4;
  localparam int unsigned PW    = $clog2(DEPTH) + 1;

  logic [DMA_W-1:0] mem [WORDS];
  logic [PW-1:0]    wr_ptr, head, peek, peek_nxt, next_row;

  assign peek_nxt = peek + PW'(1);
  assign next_row = (peek_nxt + PW'(3)) & ~PW'(3);
  assign avail    = (wr_ptr != peek);
  assign full     = ((wr_ptr - head) == PW'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wr_ptr[PW-2:2]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      head    <= '0;
      peek    <= '0;
      rd_data <= '0;
    end else begin
      if (wr_en && !full) wr_ptr <= wr_ptr + PW'(4);
      if (rd_en) begin
        rd_data <= mem[peek[PW-2:2]][16*peek[1:0] +: 16];
        if (commit) begin
          head <= next_row;
          peek <= next_row;
        end else if (rewind) begin
          peek <= head;
        end else begin
          peek <= peek_nxt;
        end
      end
    end
  end

  // A read must find data, and a row must be released before it is overwritten.
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> avail)
    else $error("weight_fifo: read while empty");

endmodule
