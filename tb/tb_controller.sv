// tb_controller: runs the controller through runs of several images, with
// the image counter modelled in the testbench, and checks every output on
// every cycle against the expected schedule: per image 62 accumulation
// cycles plus one register-write cycle in each of the three hidden states,
// then 30 accumulation cycles plus one arg-max cycle in the output state,
// 220 cycles per image; the loop back from state 3 to state 0, the end in
// state 4 with `done`, and a second run after a new `start`.
module tb_controller;
  import mlp_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, last_image = 0;
  state_e state;
  in_src_e sel_input;
  logic [1:0] sel_weight, sel_bias, reg_select;
  logic [5:0] feat;
  logic mem_rd_en, mac_en, mac_clr, reg_write, max_en, cnt_inc, cnt_clr, done;
  int checks = 0, failures = 0;
  int n_loop = 0, n_end = 0;

  controller dut (.clk, .rst_n, .start, .last_image, .state, .sel_input, .sel_weight,
                  .sel_bias, .feat, .mem_rd_en, .mac_en, .mac_clr, .reg_write, .reg_select,
                  .max_en, .cnt_inc, .cnt_clr, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input logic got, input logic exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %b expected %b at %0t", what, got, exp_v, $time);
    end
  endtask

  task automatic run(input int n_images);
    int cycles, img;
    @(negedge clk);
    start = 1;
    #1;
    expect_bit(cnt_clr, 1'b1, "cnt_clr on start");
    @(negedge clk);
    start = 0;
    for (img = 0; img < n_images; img++) begin
      cycles = 0;
      last_image = (img == n_images - 1);
      for (int p = 0; p < 4; p++) begin
        int len;
        len = (p < 3) ? 62 : 30;
        for (int k = 0; k <= len; k++) begin
          checks++;
          if (state != state_e'(p)) begin failures++; $display("FAIL state %0d exp %0d", state, p); end
          checks++;
          if (int'(sel_weight) != p || int'(sel_bias) != p) failures++;
          expect_bit(sel_input == SRC_HIDDEN, p == 3, "sel_input");
          expect_bit(mac_en, k < len, "mac_en");
          expect_bit(mem_rd_en, k < len && p < 3, "mem_rd_en");
          expect_bit(mac_clr, k == len, "mac_clr");
          expect_bit(reg_write, k == len && p < 3, "reg_write");
          expect_bit(max_en, k == len && p == 3, "max_en");
          expect_bit(cnt_inc, k == len && p == 3, "cnt_inc");
          expect_bit(done, 1'b0, "done low while busy");
          if (k < len) begin
            checks++;
            if (int'(feat) != k) failures++;
          end
          if (k == len && p < 3) begin
            checks++;
            if (int'(reg_select) != p) failures++;
          end
          @(negedge clk);
          cycles++;
        end
      end
      checks++;
      if (cycles != 220) failures++;
      if (img < n_images - 1) begin
        n_loop++;
        checks++;
        if (state != ST_HID0) failures++;
      end
    end
    last_image = 0;
    checks++;
    if (state != ST_DONE) failures++; else n_end++;
    expect_bit(done, 1'b1, "done");
    repeat (3) @(negedge clk);
    checks++;
    if (state != ST_DONE || !done) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (state != ST_DONE || done) failures++;
    run(3);
    run(1);
    $display("loop-backs=%0d ends=%0d", n_loop, n_end);
    checks++;
    if (n_loop == 0 || n_end != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
