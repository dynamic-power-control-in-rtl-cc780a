// tb_ecmac: drives random sign-magnitude input/weight streams of the
// paper's length (62 pairs) through the MAC unit under random error
// configurations and compares the 21-bit sign-magnitude result with an
// integer reference. Also checks that `en` low holds the sum, that `clr`
// empties it, the figure's "negative zero" on equal accumulators, and the
// largest possible sum (62 x 127 x 127) without overflow.
module tb_ecmac;
  import mlp_ref_pkg::*;

  logic        clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [4:0]  err = 0;
  logic [7:0]  x = 0, w = 0;
  logic [20:0] result;
  int checks = 0, failures = 0;

  ecmac dut (.clk, .rst_n, .clr, .en, .error(err), .in_data(x), .weight(w), .result);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_sum(input int expected, input bit allow_negzero, input string tag);
    int got;
    got = result[20] ? -int'(result[19:0]) : int'(result[19:0]);
    checks++;
    if (got != expected) begin
      failures++;
      $display("FAIL %s: got %0d (raw %h) expected %0d", tag, got, result, expected);
    end
    if (expected == 0 && allow_negzero) begin
      checks++;
      if (result != {1'b1, 20'd0}) begin failures++; $display("FAIL negzero %h", result); end
    end
  endtask

  initial begin
    int sum;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_sum(0, 1, "after reset");
    for (int t = 0; t < 300; t++) begin
      err = (t % 3 == 0) ? 5'd0 : 5'($urandom_range(0, 31));
      clr = 1; @(negedge clk); clr = 0;
      sum = 0;
      for (int k = 0; k < 62; k++) begin
        x = 8'($urandom); w = 8'($urandom);
        en = ($urandom_range(0, 7) != 0);
        if (en) sum += ref_term(x, w, err);
        @(negedge clk);
      end
      en = 0;
      check_sum(sum, 0, "stream");
      // Hold with en low.
      x = 8'($urandom); w = 8'($urandom);
      @(negedge clk);
      check_sum(sum, 0, "hold");
    end
    // Equal positive and negative sums: sign 1, magnitude 0.
    clr = 1; @(negedge clk); clr = 0;
    err = 0; en = 1;
    x = 8'h05; w = 8'h03; @(negedge clk);
    x = 8'h85; w = 8'h03; @(negedge clk);
    en = 0;
    check_sum(0, 1, "equal");
    // Largest sum.
    clr = 1; @(negedge clk); clr = 0;
    en = 1; x = 8'h7f; w = 8'h7f;
    repeat (62) @(negedge clk);
    en = 0;
    check_sum(62 * 127 * 127, 0, "max");
    x = 8'hff; w = 8'h7f; en = 1;
    repeat (62) @(negedge clk);
    en = 0;
    check_sum(0, 1, "max cancel");
    clr = 1; @(negedge clk); clr = 0;
    check_sum(0, 1, "clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
