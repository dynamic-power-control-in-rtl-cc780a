// neuron: one hardware neuron - an error-controllable MAC unit, a bias
// adder, a ReLU and a saturation stage.
//
// While `en` is high the neuron accumulates one input x weight product per
// clock (see ecmac). Its output is combinational from the accumulated sum:
//   y   = mac_result + bias        sign-magnitude addition, 21 bits
//   O   = y[20] ? 0 : y            ReLU: the sign bit selects ground
//   out = (O > 127) ? 8'b0111_1111 : {1'b0, O[6:0]}   saturation to 8 bits
// `clr` empties the accumulator for the next pass.
//
// The sequence of stages, the 8-bit bias, the 21-bit sum, the ReLU mux on
// y[20] and the saturation constants are those of the paper's neuron figure.
// Doing the bias addition in sign-magnitude form (the paper represents all
// values that way but does not draw this adder's insides) is this design's
// reading.
module neuron
  import mlp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  logic [ERR_W-1:0]  error,
  input  logic [DATA_W-1:0] in_data,
  input  logic [DATA_W-1:0] weight,
  input  logic [DATA_W-1:0] bias,
  output logic [DATA_W-1:0] out
);

  logic [ACC_W-1:0] mac_result;
  logic [ACC_W-1:0] bias_ext;
  logic [ACC_W-1:0] y;
  logic [ACC_W-1:0] o_relu;

  ecmac u_mac (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr     (clr),
    .en      (en),
    .error   (error),
    .in_data (in_data),
    .weight  (weight),
    .result  (mac_result)
  );

  // Bias: sign moves to bit 20, magnitude is zero-extended.
  assign bias_ext = {bias[DATA_W-1], (ACC_W-1-MAG_W)'(0), bias[MAG_W-1:0]};
  assign y        = sm_add21(mac_result, bias_ext);

  // ReLU.
  assign o_relu = y[ACC_W-1] ? '0 : y;

  // Saturation.
  assign out = (o_relu > ACC_W'(127)) ? SAT_MAX : {1'b0, o_relu[MAG_W-1:0]};

endmodule
