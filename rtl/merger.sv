// merger: collects the activations of the m coprocessors of the pruning design.
//
// Coprocessor p computes rows p, p+m, p+2m, ... of the layer, so taking one result
// from each post-activation FIFO in strict round-robin order (0, 1, .., m-1, 0, ..)
// yields the rows in order and the write address is a running counter. Each result
// is written to address `row` of the output bank of all m I/O memories (one shared
// write bus), so every coprocessor has the whole output vector as the next layer's
// input. `done` pulses when s_out results have been written. The round-robin scheme
// and the broadcast to all I/O memories are the paper's; the strict order is this
// design's choice.
module merger
  import dnn_pkg::*;
#(
  parameter int unsigned M  = 4,
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   s_out,
  input  q7_8_t         in_data  [M],
  input  logic [M-1:0]  in_valid,
  output logic [M-1:0]  in_ready,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output q7_8_t         wr_data,
  output logic          done
);

  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;

  logic [PW-1:0] p;
  logic [15:0]   row;
  logic          active, take;

  assign take = active && in_valid[p];
  always_comb begin
    in_ready    = '0;
    in_ready[p] = take;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= '0; row <= '0; active <= 1'b0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0; done <= 1'b0;
    end else begin
      wr_en <= take;
      done  <= 1'b0;
      if (start) begin
        p <= '0; row <= '0; active <= (s_out != 16'd0);
        done <= (s_out == 16'd0);
      end else if (take) begin
        wr_addr <= AW'(row);
        wr_data <= in_data[p];
        p       <= (p == PW'(M - 1)) ? '0 : p + PW'(1);
        row     <= row + 16'd1;
        if (row + 16'd1 == s_out) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

endmodule
