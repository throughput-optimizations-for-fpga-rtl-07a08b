// sparse_row_coproc: one sparse row coprocessor of the pruning design.
//
// Computes the transfer function of pruned weight rows given in the paper's
// streaming format: each 64-bit data word holds R = 3 tuples (w, z), where w is a
// remaining Q7.8 weight and z the number of pruned (zero) weights before it in the
// row. The word layout is set in dnn_pkg. The data path follows the paper's figure:
//   input FIFO -> controller -> pipeline word -> offset calculation (addresses) ->
//   R BRAM controllers reading R redundant copies of the input activations ->
//   R multipliers -> adder with the accumulator -> controller -> output FIFO.
// A row ends, as in the paper, when a calculated address reaches s_in: the tuples
// from that one on are ignored, the sum goes to the output FIFO and the next word
// starts the next row (each row begins in a new word, this design's choice; zero runs
// longer than 31 need filler tuples of weight 0). The coprocessor handles `n_rows`
// rows per layer; it is rows p, p+m, p+2m, ... of the layer, for coprocessor p.
//
// Timing: one word per cycle, so R multiply-accumulates per cycle. A word is taken in
// cycle t, its addresses go to the memories in t+1, products are registered in t+2
// and added in t+3. A word is only taken while the output FIFO has room for every
// result that could still be in flight.
module sparse_row_coproc
  import dnn_pkg::*;
#(
  parameter int unsigned R          = 3,
  parameter int unsigned DEPTH      = 2048,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned OUT_DEPTH  = 16,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0]      s_in,
  input  logic [15:0]      n_rows,
  output logic             busy,
  // DMA weight stream
  input  logic [DMA_W-1:0] s_data,
  input  logic             s_valid,
  output logic             s_ready,
  // I/O memory read ports
  output logic [AW-1:0]    mem_addr [R],
  input  q7_8_t            mem_data [R],
  // results (transfer function) towards the activation function
  output q15_16_t          res_data,
  output logic             res_valid,
  input  logic             res_ready
);

  // ------------------------------------------------------------ input FIFO
  logic [DMA_W-1:0] f_data;
  logic             f_valid, pop;
  logic [$clog2(FIFO_DEPTH):0] unused_in_count;

  sync_fifo #(.WIDTH(DMA_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .in_data(s_data), .in_valid(s_valid), .in_ready(s_ready),
    .out_data(f_data), .out_valid(f_valid), .out_ready(pop),
    .count(unused_in_count)
  );

  // ------------------------------------------------------------ pipeline word
  sparse_tuple_t     pw [R];
  logic              pw_valid, pw_end, first_word;
  logic [ZERO_W-1:0] zeros [R];
  logic [15:0]       addr [R];
  logic [15:0]       unused_o_reg, rows_issued, rows_done;
  logic [R-1:0]      tuple_ok;
  logic [$clog2(OUT_DEPTH):0] out_count;
  logic              out_in_ready;
  logic              credit_ok, last_row_now;

  for (genvar i = 0; i < R; i++) begin : g_unpack
    assign zeros[i]    = pw[i].z;
    assign tuple_ok[i] = (addr[i] < s_in);
    assign mem_addr[i] = AW'(addr[i]);
  end
  assign pw_end = pw_valid && !tuple_ok[R-1];

  offset_calc #(.R(R), .OW(16)) u_offset (
    .clk, .rst_n, .zeros,
    .step (pw_valid && !pw_end),
    .clear(pw_end || start),
    .addr, .o_reg(unused_o_reg)
  );

  assign credit_ok    = (32'(out_count) + 32'd4) <= 32'(OUT_DEPTH);
  assign last_row_now = pw_end && (rows_issued + 16'd1 == n_rows);
  assign pop          = busy && f_valid && credit_ok && !last_row_now
                        && (rows_issued != n_rows);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pw_valid    <= 1'b0;
      pw          <= '{default: '0};
      busy        <= 1'b0;
      rows_issued <= '0;
      first_word  <= 1'b1;
    end else begin
      if (start) begin
        busy        <= (n_rows != 16'd0);
        rows_issued <= '0;
        first_word  <= 1'b1;
      end else begin
        if (pw_valid) first_word <= pw_end;
        if (pw_end)   rows_issued <= rows_issued + 16'd1;
        if (rows_done == n_rows && busy && !pw_valid) busy <= 1'b0;
      end
      pw_valid <= pop;
      if (pop)
        for (int i = 0; i < R; i++) pw[i] <= sparse_tuple_t'(f_data[TUPLE_W*i +: TUPLE_W]);
    end
  end

  // ------------------------------------------------------------ multipliers
  logic    m_valid, m_end, m_first, a_valid, a_end, a_first;
  q7_8_t   m_w [R];
  q15_16_t prod [R];
  q15_16_t acc, sum_all;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_end <= 1'b0; m_first <= 1'b0;
      a_valid <= 1'b0; a_end <= 1'b0; a_first <= 1'b0;
      m_w     <= '{default: '0};
      prod    <= '{default: '0};
    end else begin
      m_valid <= pw_valid;
      m_end   <= pw_end;
      m_first <= first_word;
      for (int i = 0; i < R; i++) m_w[i] <= tuple_ok[i] ? pw[i].w : '0;
      a_valid <= m_valid;
      a_end   <= m_end;
      a_first <= m_first;
      for (int i = 0; i < R; i++) prod[i] <= q15_16_t'(m_w[i]) * q15_16_t'(mem_data[i]);
    end
  end

  // ------------------------------------------------------------ adder, controller
  always_comb begin
    sum_all = a_first ? '0 : acc;
    for (int i = 0; i < R; i++) sum_all += prod[i];
  end

  logic push;
  assign push = a_valid && a_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      rows_done <= '0;
    end else begin
      if (start) rows_done <= '0;
      else if (push) rows_done <= rows_done + 16'd1;
      if (a_valid) acc <= sum_all;
    end
  end

  sync_fifo #(.WIDTH(32), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .in_data(sum_all), .in_valid(push), .in_ready(out_in_ready),
    .out_data(res_data), .out_valid(res_valid), .out_ready(res_ready),
    .count(out_count)
  );

  assert property (@(posedge clk) disable iff (!rst_n) push |-> 32'(out_count) < 32'(OUT_DEPTH))
    else $error("sparse_row_coproc: output FIFO overrun");
  assert property (@(posedge clk) disable iff (!rst_n) push |-> out_in_ready)
    else $error("sparse_row_coproc: output FIFO not ready");

endmodule
