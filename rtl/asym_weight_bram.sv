// asym_weight_bram: one of the four asymmetric block RAMs of the batch coprocessor.
//
// It is connected to one DMA engine and holds NFIFO weight FIFOs (the paper's figure
// shows ceil(m/4) FIFOs per asymmetric BRAM, selected by a decoder and a demultiplexer
// with a ceil(log2(m/4))-bit select). The decoder here is a round-robin counter:
// 64-bit word t of the DMA stream goes to FIFO (t mod NFIFO). Software therefore
// interleaves the rows of one section word by word. The stream uses a valid/ready
// handshake; `s_ready` is low while the FIFO the next word is meant for is full.
// The read side of every FIFO is brought out unchanged to its lane controller.
module asym_weight_bram
  import dnn_pkg::*;
#(
  parameter int unsigned NFIFO = 23,
  parameter int unsigned DEPTH = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DMA_W-1:0]  s_data,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [NFIFO-1:0]  rd_en,
  input  logic              rewind,
  input  logic              commit,
  output q7_8_t             rd_data [NFIFO],
  output logic [NFIFO-1:0]  avail
);

  localparam int unsigned SW = (NFIFO > 1) ? $clog2(NFIFO) : 1;

  logic [SW-1:0]    sel;     // decoder output, the demux select
  logic [NFIFO-1:0] full;

  assign s_ready = !full[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel <= '0;
    else if (s_valid && s_ready) sel <= (sel == SW'(NFIFO - 1)) ? '0 : sel + SW'(1);
  end

  for (genvar f = 0; f < NFIFO; f++) begin : g_fifo
    weight_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en  (s_valid && s_ready && (sel == SW'(f))),
      .wr_data(s_data),
      .full   (full[f]),
      .rd_en  (rd_en[f]),
      .rewind, .commit,
      .rd_data(rd_data[f]),
      .avail  (avail[f])
    );
  end

endmodule
