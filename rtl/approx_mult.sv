// approx_mult: 7x7 unsigned multiplier whose error (and switching activity)
// is chosen at run time by a 5-bit error-control word.
//
// The product is the sum of the AND partial products a[i]&b[j], weighted by
// 2^(i+j). Bit k of `error` (k = 0..4) gates off every partial product of
// column k (i+j == k), so those AND gates stop toggling and the adder tree
// below them sees constant zeros. error == 0 gives the exact product; with
// all bits set the five low columns are dropped and the result is at most
// 1+4+12+32+80 = 129 below the exact product, and never above it.
//
// Paper: the multiplier has a 5-bit error-control input, 32 configurations,
// and configuration zero is exact. The paper does not say how the
// approximation works; column gating is this design's own, simplest choice,
// so its error figures differ from the paper's Table I.
//
// Purely combinational.
module approx_mult #(
  parameter int unsigned MAG_W = 7,
  parameter int unsigned ERR_W = 5
) (
  input  logic [MAG_W-1:0]   a,
  input  logic [MAG_W-1:0]   b,
  input  logic [ERR_W-1:0]   error,
  output logic [2*MAG_W-1:0] p
);

  always_comb begin
    logic [2*MAG_W-1:0] acc;
    logic               pp;
    acc = '0;
    for (int i = 0; i < MAG_W; i++) begin
      for (int j = 0; j < MAG_W; j++) begin
        pp = a[i] & b[j];
        if ((i + j) < ERR_W && error[i+j]) pp = 1'b0;
        acc = acc + ((2*MAG_W)'(pp) << (i + j));
      end
    end
    p = acc;
  end

endmodule
