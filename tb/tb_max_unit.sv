// tb_max_unit: random output-layer vectors (including many ties) with a
// randomly pulsed enable. Checks the registered arg-max (lowest index on a
// tie), that pred only changes when enabled, and the one-cycle pred_valid.
module tb_max_unit;
  logic clk = 0, rst_n = 0, en = 0;
  logic [9:0][7:0] values = '0;
  logic [3:0] pred;
  logic pred_valid;
  int checks = 0, failures = 0;

  max_unit dut (.clk, .rst_n, .en, .values, .pred, .pred_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best, exp_pred;
    exp_pred = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int n = 0; n < 10; n++)
        values[n] = (t % 2) ? 8'($urandom_range(0, 127)) : 8'($urandom_range(120, 127));
      en = ($urandom_range(0, 1) == 1);
      if (en) begin
        best = -1;
        for (int n = 0; n < 10; n++) if (int'(values[n]) > best) begin best = values[n]; exp_pred = n; end
      end
      @(negedge clk);
      checks++;
      if (pred_valid !== en) failures++;
      checks++;
      if (int'(pred) != exp_pred) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
