// ecmac: error-controllable sign-magnitude multiply-accumulate unit.
//
// One input/weight pair is taken per clock while `en` is high. The 7-bit
// magnitudes go through approx_mult; the XOR of the two sign bits decides
// which of two unsigned accumulators receives the 14-bit product: y_pos
// (sign 0) or y_neg (sign 1). The other accumulator keeps its value. The
// result is formed combinationally from the two accumulators: a comparator
// picks y_pos - y_neg with sign 0 when y_pos > y_neg, and y_neg - y_pos with
// sign 1 otherwise.
//
// This structure (two adders, two 2:1 muxes steered by the sign XOR, two
// subtractors over bits 19:0, a comparator and an output mux, result 21 bits
// wide) follows the paper's MAC figure. The registers holding the two
// accumulators, the synchronous `clr` and the asynchronous active-low reset
// are this design's choices. When y_pos == y_neg the figure's mux gives sign
// 1 with magnitude 0 (a "negative zero"); this is kept as drawn.
//
// Timing: `result` reflects all pairs accepted up to the previous clock
// edge. `clr` has priority over `en` and empties both accumulators.
// 62 products of at most 127*127 sum to 999,998 < 2^20, so the 21-bit
// accumulators cannot overflow for the paper's 62 inputs.
module ecmac
  import mlp_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                en,
  input  logic [ERR_W-1:0]    error,
  input  logic [DATA_W-1:0]   in_data,
  input  logic [DATA_W-1:0]   weight,
  output logic [ACC_W-1:0] result
);

  logic [PROD_W-1:0]   prod;
  logic                prod_neg;
  logic [ACC_W-1:0] y_pos, y_neg;
  logic [ACC_W-1:0] y_pos_nxt, y_neg_nxt;

  approx_mult #(.MAG_W(MAG_W), .ERR_W(ERR_W)) u_mult (
    .a     (in_data[MAG_W-1:0]),
    .b     (weight[MAG_W-1:0]),
    .error (error),
    .p     (prod)
  );

  assign prod_neg = in_data[DATA_W-1] ^ weight[DATA_W-1];

  // Sign-steered accumulation: the upper mux passes y_pos unchanged when the
  // product is negative, the lower mux passes y_neg unchanged when positive.
  always_comb begin
    y_pos_nxt = prod_neg ? y_pos : y_pos + ACC_W'(prod);
    y_neg_nxt = prod_neg ? y_neg + ACC_W'(prod) : y_neg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_pos <= '0;
      y_neg <= '0;
    end else if (clr) begin
      y_pos <= '0;
      y_neg <= '0;
    end else if (en) begin
      y_pos <= y_pos_nxt;
      y_neg <= y_neg_nxt;
    end
  end

  // Final sign resolution on the magnitude bits.
  always_comb begin
    if (y_pos > y_neg)
      result = {1'b0, y_pos[ACC_W-2:0] - y_neg[ACC_W-2:0]};
    else
      result = {1'b1, y_neg[ACC_W-2:0] - y_pos[ACC_W-2:0]};
  end

endmodule
