// tb_approx_mult: exhaustive check of the approximate multiplier for all
// 32 error configurations against a row-wise reference model. Also checks
// that configuration 0 is the exact product, that no configuration
// overestimates, and that the largest configuration's error bound holds.
// Prints the error rate (ER), mean relative error distance (MRED) and
// normalised mean error distance (NMED) over the 31 approximate
// configurations, the metrics the source design reports for its multiplier.
module tb_approx_mult;
  import mlp_ref_pkg::*;

  logic [6:0]  a, b;
  logic [4:0]  err;
  logic [13:0] p;
  int checks = 0, failures = 0;

  approx_mult dut (.a(a), .b(b), .error(err), .p(p));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n_err [32];
    real red [32], ed [32];
    real er_min, er_max, er_sum, mred_min, mred_max, mred_sum, nmed_min, nmed_max, nmed_sum;
    for (int e = 0; e < 32; e++) begin
      n_err[e] = 0; red[e] = 0.0; ed[e] = 0.0;
      for (int i = 0; i < 128; i++) begin
        for (int j = 0; j < 128; j++) begin
          a = 7'(i); b = 7'(j); err = 5'(e);
          #1;
          checks++;
          if (int'(p) != int'(ref_mult(i, j, e))) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d e=%0d p=%0d ref=%0d", i, j, e, p, ref_mult(i, j, e));
          end
          if (e == 0) begin
            checks++;
            if (int'(p) != i * j) failures++;
          end
          checks++;
          if (int'(p) > i * j || i * j - int'(p) > 129) failures++;
          if (int'(p) != i * j) begin
            n_err[e]++;
            ed[e]  += real'(i * j - int'(p));
            red[e] += real'(i * j - int'(p)) / real'(i * j);
          end
        end
      end
    end
    // Error rate must grow from zero (exact) to the largest config.
    checks++;
    if (n_err[0] != 0 || n_err[31] == 0 || n_err[31] < n_err[1]) failures++;
    // Error metrics over the 31 approximate configurations: error rate,
    // mean relative error distance (over non-zero exact products) and
    // normalised mean error distance (mean error / 127*127).
    er_min = 1e9; er_max = 0; er_sum = 0; mred_min = 1e9; mred_max = 0; mred_sum = 0;
    nmed_min = 1e9; nmed_max = 0; nmed_sum = 0;
    for (int e = 1; e < 32; e++) begin
      real er, mred, nmed;
      er   = 100.0 * n_err[e] / 16384.0;
      mred = 100.0 * red[e] / (127.0 * 127.0);
      nmed = 100.0 * ed[e] / 16384.0 / (127.0 * 127.0);
      if (er < er_min) er_min = er;       if (er > er_max) er_max = er;       er_sum += er;
      if (mred < mred_min) mred_min = mred; if (mred > mred_max) mred_max = mred; mred_sum += mred;
      if (nmed < nmed_min) nmed_min = nmed; if (nmed > nmed_max) nmed_max = nmed; nmed_sum += nmed;
    end
    $display("ER   %% min %0.4f max %0.4f avg %0.3f", er_min, er_max, er_sum / 31.0);
    $display("MRED %% min %0.4f max %0.4f avg %0.3f", mred_min, mred_max, mred_sum / 31.0);
    $display("NMED %% min %0.4f max %0.4f avg %0.3f", nmed_min, nmed_max, nmed_sum / 31.0);
    $display("error rate: cfg1 %0.2f%%  cfg31 %0.2f%%", 100.0 * n_err[1] / 16384.0, 100.0 * n_err[31] / 16384.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
