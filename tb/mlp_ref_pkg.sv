// mlp_ref_pkg: golden reference arithmetic for the MLP testbenches.
//
// Written independently of the RTL: the approximate product is formed row
// by row (row i = b shifted by i, with the gated column positions masked
// out), and neuron arithmetic is done with plain signed integers instead of
// sign-magnitude hardware.
package mlp_ref_pkg;

  // Approximate 7x7 product: bit k of err removes every partial product
  // that lands in column k (k < 5).
  function automatic int unsigned ref_mult(input int unsigned a, input int unsigned b,
                                           input int unsigned err);
    int unsigned sum, row;
    sum = 0;
    for (int i = 0; i < 7; i++) begin
      if ((a >> i) & 1) begin
        row = (b & 32'h7f) << i;
        row = row & ~(err & 32'h1f);
        sum += row;
      end
    end
    return sum;
  endfunction

  // Signed value of an 8-bit sign-magnitude number.
  function automatic int sm8(input logic [7:0] v);
    return v[7] ? -int'(v[6:0]) : int'(v[6:0]);
  endfunction

  // Signed contribution of one input x weight pair.
  function automatic int ref_term(input logic [7:0] x, input logic [7:0] w, input int unsigned err);
    int p;
    p = int'(ref_mult(x[6:0], w[6:0], err));
    return (x[7] ^ w[7]) ? -p : p;
  endfunction

  // Neuron output from its pre-activation value: ReLU then saturation.
  function automatic logic [7:0] ref_act(input int pre);
    if (pre <= 0)  return 8'd0;
    if (pre > 127) return 8'h7f;
    return 8'(pre);
  endfunction

endpackage
