// tb_image_counter: counts random increments against a model, checks the
// `last` flag against count + 1 >= num_images and the clear.
module tb_image_counter;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [15:0] num_images = 16'd5, count;
  logic last;
  int checks = 0, failures = 0;

  image_counter dut (.clk, .rst_n, .clr, .inc, .num_images, .count, .last);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model;
    model = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      clr = ($urandom_range(0, 99) == 0);
      inc = ($urandom_range(0, 2) == 0);
      num_images = 16'($urandom_range(1, 40));
      #1;
      checks++;
      if (last !== (model + 1 >= int'(num_images))) failures++;
      @(negedge clk);
      if (clr) model = 0; else if (inc) model++;
      checks++;
      if (int'(count) != model) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
