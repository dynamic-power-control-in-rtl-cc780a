// tb_input_mux: random operands and selections; checks that the broadcast
// input comes from the pixel or the addressed hidden register, and that the
// weight and bias rows come from the selected bank.
module tb_input_mux;
  import mlp_pkg::*;

  in_src_e    sel_input;
  logic [1:0] sel_weight, sel_bias;
  logic [5:0] feat;
  logic [7:0] pixel, in_data;
  logic [29:0][7:0] hidden;
  logic [3:0][9:0][7:0] weights_in, biases_in;
  logic [9:0][7:0] weights, biases;
  int checks = 0, failures = 0;

  input_mux dut (.sel_input, .sel_weight, .sel_bias, .feat, .pixel, .hidden,
                 .weights_in, .biases_in, .in_data, .weights, .biases);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp_in;
    for (int t = 0; t < 2000; t++) begin
      sel_input  = in_src_e'($urandom_range(0, 1));
      sel_weight = 2'($urandom); sel_bias = 2'($urandom);
      pixel = 8'($urandom);
      for (int i = 0; i < 30; i++) hidden[i] = 8'($urandom);
      for (int g = 0; g < 4; g++)
        for (int n = 0; n < 10; n++) begin
          weights_in[g][n] = 8'($urandom); biases_in[g][n] = 8'($urandom);
        end
      feat = (sel_input == SRC_HIDDEN) ? 6'($urandom_range(0, 29)) : 6'($urandom_range(0, 61));
      #1;
      exp_in = (sel_input == SRC_HIDDEN) ? hidden[feat] : pixel;
      checks++;
      if (in_data !== exp_in) failures++;
      for (int n = 0; n < 10; n++) begin
        checks++;
        if (weights[n] !== weights_in[sel_weight][n]) failures++;
        checks++;
        if (biases[n] !== biases_in[sel_bias][n]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
