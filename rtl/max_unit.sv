// max_unit: "max result determination" - turns the ten output-layer
// results into the predicted digit.
//
// When `en` is high at a clock edge, the index of the largest of the NN
// values is registered into `pred` and `pred_valid` is high for the
// following cycle. Values are compared as unsigned numbers; they come out of
// the ReLU and saturation stages, so their sign bit is always 0. On a tie
// the lowest index wins. Asynchronous active-low reset.
//
// Paper: the controller enables this block in state 3 "to obtain the
// predicted label". The tie rule and the one-cycle valid pulse are this
// design's choices.
module max_unit
  import mlp_pkg::*;
#(
  parameter int unsigned NN = N_OUT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic [NN-1:0][DATA_W-1:0] values,
  output logic [$clog2(NN)-1:0]     pred,
  output logic                      pred_valid
);

  logic [$clog2(NN)-1:0] idx;

  always_comb begin
    logic [DATA_W-1:0] best;
    best = values[0];
    idx  = '0;
    for (int n = 1; n < NN; n++) begin
      if (values[n] > best) begin
        best = values[n];
        idx  = ($clog2(NN))'(n);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred       <= '0;
      pred_valid <= 1'b0;
    end else begin
      pred_valid <= en;
      if (en) pred <= idx;
    end
  end

endmodule
