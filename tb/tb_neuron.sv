// tb_neuron: random 62-input streams, weights and biases through one
// neuron under random error configurations. The 8-bit output is compared
// with an integer reference of sum(x*w) + b followed by ReLU and
// saturation at 127. Counts how often the ReLU zeroes the output, the
// saturation limits it and the output lies in between, and fails if one of
// the three never happens.
module tb_neuron;
  import mlp_ref_pkg::*;

  logic       clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [4:0] err = 0;
  logic [7:0] x = 0, w = 0, b = 0, out;
  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0, n_lin = 0;

  neuron dut (.clk, .rst_n, .clr, .en, .error(err), .in_data(x), .weight(w), .bias(b), .out);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pre;
    logic [7:0] expv;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      err = 5'($urandom_range(0, 31));
      b = 8'($urandom);
      clr = 1; @(negedge clk); clr = 0;
      pre = 0;
      en = 1;
      for (int k = 0; k < 62; k++) begin
        // Small operands keep the sum near the interesting range.
        x = {1'b0, 7'($urandom_range(0, 31))};
        w = {1'($urandom), 7'($urandom_range(0, (t % 2) ? 3 : 1))};
        pre += ref_term(x, w, err);
        @(negedge clk);
      end
      en = 0;
      pre += sm8(b);
      expv = ref_act(pre);
      checks++;
      if (out !== expv) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d pre=%0d out=%0d exp=%0d", t, pre, out, expv);
      end
      if (pre <= 0) n_relu++; else if (pre > 127) n_sat++; else n_lin++;
    end
    $display("relu=%0d sat=%0d linear=%0d", n_relu, n_sat, n_lin);
    checks++;
    if (n_relu == 0 || n_sat == 0 || n_lin == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
