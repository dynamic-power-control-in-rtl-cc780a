// tb_hidden_regs: writes random results into random banks, keeps a model
// of all 30 registers and checks every register after each clock, including
// that reg_write low changes nothing and that reset clears them.
module tb_hidden_regs;
  logic clk = 0, rst_n = 0, reg_write = 0;
  logic [1:0] reg_select = 0;
  logic [9:0][7:0] d = '0;
  logic [29:0][7:0] q, model;
  int checks = 0, failures = 0;

  hidden_regs dut (.clk, .rst_n, .reg_write, .reg_select, .d, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (q !== '0) failures++;
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      reg_write  = ($urandom_range(0, 3) != 0);
      reg_select = 2'($urandom_range(0, 2));
      for (int n = 0; n < 10; n++) d[n] = 8'($urandom);
      @(negedge clk);
      if (reg_write)
        for (int n = 0; n < 10; n++) model[reg_select * 10 + n] = d[n];
      for (int i = 0; i < 30; i++) begin
        checks++;
        if (q[i] !== model[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
