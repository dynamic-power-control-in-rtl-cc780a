// hidden_regs: the 30 eight-bit registers that hold the hidden-layer
// results between the three hidden passes and the output pass.
//
// They are organised as NBANK banks of NN registers. When reg_write is high
// at a clock edge, the NN neuron outputs are stored into bank reg_select
// (bank g holds hidden neurons NN*g .. NN*g+NN-1); the other banks keep
// their values. All registers are readable at once through `q`, ordered by
// hidden-neuron number. Asynchronous active-low reset clears them.
//
// Paper: "For each of the 10 neurons in the hidden layer, 10 registers with
// 8-bit width are incorporated to store the results", drawn as three banks
// written under Reg.write / Reg.select. The reset is this design's choice.
module hidden_regs
  import mlp_pkg::*;
#(
  parameter int unsigned NN    = N_NEURONS,
  parameter int unsigned NBANK = N_HID / N_NEURONS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             reg_write,
  input  logic [$clog2(NBANK+1)-1:0]       reg_select,
  input  logic [NN-1:0][DATA_W-1:0]        d,
  output logic [NBANK*NN-1:0][DATA_W-1:0]  q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (reg_write) begin
      for (int b = 0; b < NBANK; b++)
        if (32'(reg_select) == b)
          for (int n = 0; n < NN; n++)
            q[b*NN + n] <= d[n];
    end
  end

endmodule
