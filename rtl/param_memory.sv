// param_memory: on-chip store of the trained weights and biases.
//
// Weights are kept in N_GRP banks, one per pass of the ten shared neurons:
// banks 0..2 hold the hidden layer (hidden neurons 10g..10g+9), bank 3 the
// output layer. Each bank has one row per input feature, and a row holds
// the weights of all ten neurons for that feature, so a single read feeds
// every neuron at once. The read port returns the row at `rd_feat` of every
// bank together with all bias rows; the input multiplexer picks the bank.
// Reads are combinational (a register-file style memory).
//
// Loading is byte-wide through a synchronous write port: wr_bias selects
// the bias rows (wr_feat is then ignored), wr_grp the bank, wr_feat the
// feature and wr_neuron the neuron within the row. The memory has no reset.
//
// The paper keeps all weights and biases "in memory" and lets them "enter
// the network through controller's given signals"; the bank/row layout and
// the load port are this design's own choices.
module param_memory
  import mlp_pkg::*;
#(
  parameter int unsigned NI   = N_IN,
  parameter int unsigned NN   = N_NEURONS,
  parameter int unsigned NGRP = N_HID / N_NEURONS + 1
) (
  input  logic                         clk,
  // load port
  input  logic                         wr_en,
  input  logic                         wr_bias,
  input  logic [$clog2(NGRP)-1:0]      wr_grp,
  input  logic [$clog2(NI)-1:0]        wr_feat,
  input  logic [$clog2(NN)-1:0]        wr_neuron,
  input  logic [DATA_W-1:0]            wr_data,
  // read port
  input  logic [$clog2(NI)-1:0]        rd_feat,
  output logic [NGRP-1:0][NN-1:0][DATA_W-1:0] rd_weights,
  output logic [NGRP-1:0][NN-1:0][DATA_W-1:0] rd_biases
);

  logic [NN-1:0][DATA_W-1:0] w_mem [NGRP][NI];
  logic [NN-1:0][DATA_W-1:0] b_mem [NGRP];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_bias) b_mem[wr_grp][wr_neuron] <= wr_data;
      else         w_mem[wr_grp][wr_feat][wr_neuron] <= wr_data;
    end
  end

  always_comb begin
    for (int g = 0; g < NGRP; g++) begin
      rd_weights[g] = w_mem[g][rd_feat];
      rd_biases[g]  = b_mem[g];
    end
  end

endmodule
