// tb_param_memory: fills every weight and bias byte with a value derived
// from its address, reads every row back through the combinational read
// port and checks all four banks and all bias rows.
module tb_param_memory;
  logic clk = 0;
  logic wr_en = 0, wr_bias = 0;
  logic [1:0] wr_grp = 0;
  logic [5:0] wr_feat = 0, rd_feat = 0;
  logic [3:0] wr_neuron = 0;
  logic [7:0] wr_data = 0;
  logic [3:0][9:0][7:0] rd_weights, rd_biases;
  int checks = 0, failures = 0;

  param_memory dut (.clk, .wr_en, .wr_bias, .wr_grp, .wr_feat, .wr_neuron, .wr_data,
                    .rd_feat, .rd_weights, .rd_biases);

  always #5 clk = ~clk;

  function automatic logic [7:0] wval(int g, int f, int n);
    return 8'((g * 97 + f * 13 + n * 7 + 5) ^ (f << 3));
  endfunction
  function automatic logic [7:0] bval(int g, int n);
    return 8'(g * 41 + n * 19 + 200);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int g = 0; g < 4; g++)
      for (int f = 0; f < 62; f++)
        for (int n = 0; n < 10; n++) begin
          wr_en = 1; wr_bias = 0; wr_grp = 2'(g); wr_feat = 6'(f); wr_neuron = 4'(n);
          wr_data = wval(g, f, n);
          @(negedge clk);
        end
    for (int g = 0; g < 4; g++)
      for (int n = 0; n < 10; n++) begin
        wr_en = 1; wr_bias = 1; wr_grp = 2'(g); wr_feat = 6'($urandom); wr_neuron = 4'(n);
        wr_data = bval(g, n);
        @(negedge clk);
      end
    wr_en = 0;
    for (int f = 0; f < 62; f++) begin
      rd_feat = 6'(f);
      #1;
      for (int g = 0; g < 4; g++)
        for (int n = 0; n < 10; n++) begin
          checks++;
          if (rd_weights[g][n] !== wval(g, f, n)) failures++;
          checks++;
          if (rd_biases[g][n] !== bval(g, n)) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
