// multi_piso: parallel-in serial-out register chain of the batch-processing design.
//
// Takes the M sums of one section and one sample from the transfer/activation
// register in a single cycle and hands them one per cycle to the single activation
// function, so one activation unit serves all M lanes. Besides the value it gives
// the neuron index (section base + position) and the sample number, which the output
// BRAM controller needs. A new set is accepted in the cycle the last value of the
// previous set leaves, so a chain of sets flows without a gap. The paper names the
// PISO chain; the handshake is this design's own.
module multi_piso
  import dnn_pkg::*;
#(
  parameter int unsigned M  = 90,
  parameter int unsigned NW = 16,
  parameter int unsigned SW = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  q15_16_t       par_in    [M],
  input  logic          par_valid,
  input  logic [NW-1:0] par_base,
  input  logic [SW-1:0] par_sample,
  output logic          par_ready,
  output q15_16_t       ser_data,
  output logic          ser_valid,
  output logic [NW-1:0] ser_index,
  output logic [SW-1:0] ser_sample
);

  localparam int unsigned CW = $clog2(M + 1);

  q15_16_t       sh [M];
  logic [CW-1:0] cnt;       // values still to send
  logic [NW-1:0] idx;
  logic [SW-1:0] samp;

  assign ser_valid  = (cnt != '0);
  assign ser_data   = sh[0];
  assign ser_index  = idx;
  assign ser_sample = samp;
  assign par_ready  = (cnt <= CW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      idx  <= '0;
      samp <= '0;
      sh   <= '{default: '0};
    end else if (par_valid && par_ready) begin
      sh   <= par_in;
      cnt  <= CW'(M);
      idx  <= par_base;
      samp <= par_sample;
    end else if (cnt != '0) begin
      for (int i = 0; i < M - 1; i++) sh[i] <= sh[i+1];
      cnt <= cnt - CW'(1);
      idx <= idx + NW'(1);
    end
  end

endmodule
