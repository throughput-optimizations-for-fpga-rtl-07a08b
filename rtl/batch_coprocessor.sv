// batch_coprocessor: matrix coprocessor of the batch-processing design.
//
// M MAC lanes compute M neurons of one section in parallel (r = 1 multiplier per
// lane). Their weights come from M weight FIFOs held in four asymmetric block RAMs,
// one per DMA stream; the input activation a_k of the current sample is read from the
// batch memory and broadcast to all lanes. The order of work is the paper's: for each
// section (M neurons), for each sample b of the batch, for k = 0 .. s_j-1 one MAC per
// lane and cycle. Each sample thus takes s_j cycles and reuses the section's weight
// rows, which are re-read from the FIFOs (rewind) and released after the last sample
// (commit). When the last term of a sum has been added, the M sums are copied into
// the transfer/activation register, from which the PISO takes them while the lanes
// already work on the next sample.
//
// Timing: a term is issued in cycle t (FIFO and memory reads), multiplied in t+1,
// accumulated in t+2; the sums are in the register from t+4. Issuing stops while any
// lane's FIFO has no weight (weights still on their way: `stall_weights`) or while a
// finished sum could not be taken because the register is still occupied
// (`stall_result`). Apart from stalls a layer takes ceil(s_out/M) * s_in * n cycles.
// Software sends M rows per section, zero rows past s_out, each row padded to a
// multiple of four weights and interleaved word by word over the FIFOs of its
// asymmetric BRAM. The shared sequencer stands for the paper's per-lane controllers;
// the stall rules are this design's choice.
module batch_coprocessor
  import dnn_pkg::*;
#(
  parameter int unsigned M          = 90,
  parameter int unsigned NB         = 16,
  parameter int unsigned FIFO_DEPTH = 2048,
  parameter int unsigned DEPTH      = 2048,
  localparam int unsigned SW        = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned AW        = $clog2(DEPTH),
  localparam int unsigned NW        = 16   // width of the size registers
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // layer control
  input  logic                 start,
  input  logic [NW-1:0]        s_in,
  input  logic [NW-1:0]        s_out,
  input  logic [NW-1:0]        n_batch,
  output logic                 busy,
  output logic                 idle,          // nothing issued, in flight or held
  // four DMA weight streams
  input  logic [DMA_W-1:0]     dma_data  [4],
  input  logic [3:0]           dma_valid,
  output logic [3:0]           dma_ready,
  // batch memory read port
  output logic                 mem_rd_en,
  output logic [SW-1:0]        mem_rd_sample,
  output logic [AW-1:0]        mem_rd_addr,
  input  q7_8_t                mem_rd_data,
  // transfer/activation register towards the PISO
  output q15_16_t              res       [M],
  output logic                 res_valid,
  output logic [NW-1:0]        res_base,      // index of the section's first neuron
  output logic [SW-1:0]        res_sample,
  input  logic                 res_ready,
  // event indications
  output logic                 stall_weights,
  output logic                 stall_result
);

  localparam int unsigned NF = (M + 3) / 4;   // FIFOs per asymmetric BRAM

  // ---------------------------------------------------------------- weight FIFOs
  logic [M-1:0] avail;
  q7_8_t        wdata [M];
  logic         issue, rewind, commit;

  for (genvar j = 0; j < 4; j++) begin : g_abram
    localparam int unsigned LO = j * NF;
    localparam int unsigned N  = (M > LO) ? (((M - LO) < NF) ? (M - LO) : NF) : 0;
    if (N > 0) begin : g_used
      q7_8_t        rd [N];
      logic [N-1:0] av;
      asym_weight_bram #(.NFIFO(N), .DEPTH(FIFO_DEPTH)) u_abram (
        .clk, .rst_n,
        .s_data (dma_data[j]),
        .s_valid(dma_valid[j]),
        .s_ready(dma_ready[j]),
        .rd_en  ({N{issue}}),
        .rewind, .commit,
        .rd_data(rd),
        .avail  (av)
      );
      for (genvar f = 0; f < N; f++) begin : g_lane
        assign wdata[LO+f] = rd[f];
        assign avail[LO+f] = av[f];
      end
    end else begin : g_unused
      assign dma_ready[j] = 1'b0;
    end
  end

  // ---------------------------------------------------------------- sequencer
  logic [NW-1:0] sec_base, k;
  logic [SW-1:0] b;
  logic          last_k, last_b, last_sec, pending_last;
  logic          preg_full;

  assign last_k   = (k == s_in - NW'(1));
  assign last_b   = (NW'(b) == n_batch - NW'(1));
  assign last_sec = (sec_base + NW'(M) >= s_out);

  assign stall_weights = busy && !(&avail);
  assign stall_result  = busy && (&avail) && last_k && (preg_full || pending_last);
  assign issue         = busy && !stall_weights && !stall_result;
  assign rewind        = last_k && !last_b;
  assign commit        = last_k && last_b;

  assign mem_rd_en     = issue;
  assign mem_rd_sample = b;
  assign mem_rd_addr   = AW'(k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      sec_base <= '0;
      k        <= '0;
      b        <= '0;
    end else if (start && !busy) begin
      busy     <= 1'b1;
      sec_base <= '0;
      k        <= '0;
      b        <= '0;
    end else if (issue) begin
      if (!last_k) k <= k + NW'(1);
      else begin
        k <= '0;
        if (!last_b) b <= b + SW'(1);
        else begin
          b <= '0;
          if (last_sec) busy <= 1'b0;
          else          sec_base <= sec_base + NW'(M);
        end
      end
    end
  end

  // ---------------------------------------------------------------- MAC lanes
  logic          en_d, first_d, last_d;
  logic [NW-1:0] base_d [3];
  logic [SW-1:0] samp_d [3];
  logic [M-1:0]  acc_valid;
  // all lanes run in lock step, so lane 0's valid flag stands for every lane
  logic          unused_acc_valid;
  assign unused_acc_valid = ^acc_valid;
  q15_16_t       acc [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_d <= 1'b0; first_d <= 1'b0; last_d <= 1'b0;
      base_d <= '{default: '0};
      samp_d <= '{default: '0};
    end else begin
      en_d    <= issue;
      first_d <= issue && (k == '0);
      last_d  <= issue && last_k;
      base_d  <= '{sec_base, base_d[0], base_d[1]};
      samp_d  <= '{b, samp_d[0], samp_d[1]};
    end
  end

  for (genvar i = 0; i < M; i++) begin : g_mac
    mac_unit u_mac (
      .clk, .rst_n,
      .en(en_d), .first(first_d), .last(last_d),
      .a(mem_rd_data), .w(wdata[i]),
      .acc(acc[i]), .acc_valid(acc_valid[i])
    );
  end

  // ------------------------------------------- transfer / activation register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      preg_full    <= 1'b0;
      pending_last <= 1'b0;
      res          <= '{default: '0};
      res_base     <= '0;
      res_sample   <= '0;
    end else begin
      if (issue && last_k) pending_last <= 1'b1;
      if (acc_valid[0]) begin
        pending_last <= 1'b0;
        preg_full    <= 1'b1;
        res          <= acc;
        res_base     <= base_d[2];
        res_sample   <= samp_d[2];
      end else if (res_ready && preg_full) begin
        preg_full <= 1'b0;
      end
    end
  end

  assign res_valid = preg_full;
  assign idle      = !busy && !pending_last && !preg_full;

  assert property (@(posedge clk) disable iff (!rst_n) acc_valid[0] |-> !preg_full || res_ready)
    else $error("batch_coprocessor: result register overrun");

endmodule
