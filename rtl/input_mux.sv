// input_mux: the "inputs determination" multiplexers in front of the ten
// shared neurons.
//
// Three independent selections, all combinational:
//   sel_input  - SRC_MEMORY: the pixel read from the image memory;
//                SRC_HIDDEN: hidden-layer result register number `feat`
//                (the hidden layer feeding the output layer).
//   sel_weight - which weight bank (0..2 hidden groups, 3 output layer)
//                drives the ten neuron weight inputs.
//   sel_bias   - which bias row drives the ten neuron bias inputs.
// The same input operand is broadcast to all ten neurons.
//
// The three select signals and their roles follow the paper's datapath
// figure and controller description; the bus shapes are this design's.
module input_mux
  import mlp_pkg::*;
#(
  parameter int unsigned NI   = N_IN,
  parameter int unsigned NH   = N_HID,
  parameter int unsigned NN   = N_NEURONS,
  parameter int unsigned NGRP = N_HID / N_NEURONS + 1
) (
  input  in_src_e                             sel_input,
  input  logic [$clog2(NGRP)-1:0]             sel_weight,
  input  logic [$clog2(NGRP)-1:0]             sel_bias,
  input  logic [$clog2(NI)-1:0]               feat,
  input  logic [DATA_W-1:0]                   pixel,
  input  logic [NH-1:0][DATA_W-1:0]           hidden,
  input  logic [NGRP-1:0][NN-1:0][DATA_W-1:0] weights_in,
  input  logic [NGRP-1:0][NN-1:0][DATA_W-1:0] biases_in,
  output logic [DATA_W-1:0]                   in_data,
  output logic [NN-1:0][DATA_W-1:0]           weights,
  output logic [NN-1:0][DATA_W-1:0]           biases
);

  always_comb begin
    if (sel_input == SRC_HIDDEN)
      in_data = (32'(feat) < NH) ? hidden[feat] : '0;
    else
      in_data = pixel;
    weights = weights_in[sel_weight];
    biases  = biases_in[sel_bias];
  end

endmodule
