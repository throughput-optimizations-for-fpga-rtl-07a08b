// prune_act_stage: activation function of one sparse row coprocessor.
//
// The pruning design has one activation unit per coprocessor, because the time a row
// takes depends on how many of its weights survived pruning. A controller takes a
// sum from the coprocessor's output FIFO whenever the following FIFO has room for it
// and any result still in the one-cycle activation unit, applies the selected
// function and pushes the Q7.8 activation into that FIFO, from which the merger
// collects it. FIFO depth is this design's choice.
module prune_act_stage
  import dnn_pkg::*;
#(
  parameter int unsigned OUT_DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  act_sel_t sel,
  input  q15_16_t  in_data,
  input  logic     in_valid,
  output logic     in_ready,
  output q7_8_t    out_data,
  output logic     out_valid,
  input  logic     out_ready
);

  logic  act_valid, fifo_ready;
  q7_8_t act_out;
  logic [$clog2(OUT_DEPTH):0] level;

  assign in_ready = (32'(level) + 32'(act_valid) + 32'd1) <= 32'(OUT_DEPTH);

  activation_unit u_act (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .z(in_data), .sel,
    .out_valid(act_valid), .a(act_out)
  );

  sync_fifo #(.WIDTH(16), .DEPTH(OUT_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_data(act_out), .in_valid(act_valid), .in_ready(fifo_ready),
    .out_data(out_data), .out_valid, .out_ready,
    .count(level)
  );

  assert property (@(posedge clk) disable iff (!rst_n) act_valid |-> fifo_ready)
    else $error("prune_act_stage: FIFO overrun");

endmodule
