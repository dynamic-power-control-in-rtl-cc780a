// tb_mlp_top: end-to-end test of the whole classifier at its default size
// (62 inputs, 30 hidden, 10 outputs, ten shared neurons).
//
// The testbench generates a random network (small weights with random
// signs, random biases) and a set of random images, loads the parameters
// through the load port, models the external image memory (data returned
// in the same cycle as the address), and then classifies the image set
// once in every one of the 32 error configurations, changing error_ctrl
// between runs. Every prediction and every hidden-layer register is
// compared with an integer reference model of the network; the spacing of
// the predictions (220 cycles per image) and `done` are checked too. It
// counts how often each mechanism occurred - ReLU clamping, saturation,
// the loop from the output pass back to the first hidden pass, the end of
// a run, an approximate configuration that changes a hidden value - and
// fails if one never did. It prints how often each configuration agrees
// with the exact configuration's labels.
module tb_mlp_top;
  import mlp_ref_pkg::*;

  localparam int NI = 62, NH = 30, NO = 10, NIMG = 12;

  logic        clk = 0, rst_n = 0, start = 0;
  logic [15:0] num_images = NIMG;
  logic [4:0]  error_ctrl = 0;
  logic        done, img_rd_en, pred_valid;
  logic [15:0] img_addr, images_done;
  logic [5:0]  img_feat;
  logic [7:0]  img_data;
  logic        ld_en = 0, ld_bias = 0;
  logic [1:0]  ld_grp = 0;
  logic [5:0]  ld_feat = 0;
  logic [3:0]  ld_neuron = 0, pred;
  logic [7:0]  ld_data = 0;
  logic [2:0]  fsm_state, prev_state = 3'd4;

  mlp_top dut (.clk, .rst_n, .start, .num_images, .error_ctrl, .done,
               .img_rd_en, .img_addr, .img_feat, .img_data,
               .ld_en, .ld_bias, .ld_grp, .ld_feat, .ld_neuron, .ld_data,
               .pred, .pred_valid, .images_done, .fsm_state);

  always #5 clk = ~clk;

  // Controller transitions out of the output pass, seen on the state port.
  int n_s3_s0 = 0, n_s3_s4 = 0;
  always @(posedge clk) begin
    if (prev_state == 3'd3 && fsm_state == 3'd0) n_s3_s0++;
    if (prev_state == 3'd3 && fsm_state == 3'd4) n_s3_s4++;
    prev_state <= fsm_state;
  end

  // Network and data set.
  logic [7:0] w_h [NH][NI];   // hidden neuron j, pixel i
  logic [7:0] b_h [NH];
  logic [7:0] w_o [NO][NH];   // output neuron j, hidden i
  logic [7:0] b_o [NO];
  logic [7:0] img [NIMG][NI];

  // External image memory model.
  assign img_data = (int'(img_addr) < NIMG && int'(img_feat) < NI) ? img[img_addr][img_feat] : 8'h00;

  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0, n_loop = 0, n_end = 0, n_approx_diff = 0, n_lin = 0;
  int exact_pred [NIMG];
  int agree [32];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference forward pass; also returns the hidden layer.
  task automatic ref_forward(input int m, input int unsigned err, output logic [7:0] h [NH],
                             output int label, input bit count);
    int pre, best;
    logic [7:0] o [NO];
    for (int j = 0; j < NH; j++) begin
      pre = sm8(b_h[j]);
      for (int i = 0; i < NI; i++) pre += ref_term(img[m][i], w_h[j][i], err);
      h[j] = ref_act(pre);
      if (count) begin
        if (pre <= 0) n_relu++; else if (pre > 127) n_sat++; else n_lin++;
      end
    end
    best = -1; label = 0;
    for (int j = 0; j < NO; j++) begin
      pre = sm8(b_o[j]);
      for (int i = 0; i < NH; i++) pre += ref_term(h[i], w_o[j][i], err);
      o[j] = ref_act(pre);
      if (count) begin
        if (pre <= 0) n_relu++; else if (pre > 127) n_sat++; else n_lin++;
      end
      if (int'(o[j]) > best) begin best = o[j]; label = j; end
    end
  endtask

  task automatic load(input bit bias, input int g, input int f, input int n, input logic [7:0] v);
    ld_en = 1; ld_bias = bias; ld_grp = 2'(g); ld_feat = 6'(f); ld_neuron = 4'(n); ld_data = v;
    @(negedge clk);
    ld_en = 0;
  endtask

  initial begin
    logic [7:0] h_ref [NH], h_exact [NH];
    int label, last_pv, cyc, got;
    // Generate the network and the images.
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NI; i++) w_h[j][i] = {1'($urandom), 7'($urandom_range(0, 3))};
      b_h[j] = 8'($urandom);
    end
    for (int j = 0; j < NO; j++) begin
      for (int i = 0; i < NH; i++) w_o[j][i] = {1'($urandom), 7'($urandom_range(0, 1))};
      b_o[j] = 8'($urandom);
    end
    for (int m = 0; m < NIMG; m++)
      for (int i = 0; i < NI; i++)
        img[m][i] = ($urandom_range(0, 3) == 0) ? 8'd0 : {1'b0, 7'($urandom_range(0, 31))};

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Load weights and biases.
    for (int g = 0; g < 3; g++)
      for (int n = 0; n < 10; n++) begin
        for (int i = 0; i < NI; i++) load(0, g, i, n, w_h[g*10 + n][i]);
        load(1, g, 0, n, b_h[g*10 + n]);
      end
    for (int n = 0; n < NO; n++) begin
      for (int i = 0; i < NH; i++) load(0, 3, i, n, w_o[n][i]);
      load(1, 3, 0, n, b_o[n]);
    end

    for (int cfg = 0; cfg < 32; cfg++) begin
      error_ctrl = 5'(cfg);
      agree[cfg] = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0; last_pv = -1;
      for (int m = 0; m < NIMG; m++) begin
        while (!pred_valid) begin @(negedge clk); cyc++; end
        ref_forward(m, cfg, h_ref, label, 1'b1);
        if (cfg == 0) exact_pred[m] = label;
        if (label == exact_pred[m]) agree[cfg]++;
        checks++;
        if (int'(pred) != label) begin
          failures++;
          $display("FAIL cfg=%0d img=%0d pred=%0d ref=%0d", cfg, m, pred, label);
        end
        for (int j = 0; j < NH; j++) begin
          checks++;
          if (dut.hidden[j] !== h_ref[j]) begin
            failures++;
            if (failures < 20) $display("FAIL cfg=%0d img=%0d hidden[%0d]=%0d ref=%0d", cfg, m, j, dut.hidden[j], h_ref[j]);
          end
        end
        if (cfg != 0) begin
          ref_forward(m, 0, h_exact, got, 1'b0);
          for (int j = 0; j < NH; j++) if (h_exact[j] != h_ref[j]) begin n_approx_diff++; break; end
        end
        // Spacing of predictions: first after 220 cycles of work, then every 220.
        checks++;
        if (last_pv >= 0 && cyc - last_pv != 220) begin
          failures++;
          $display("FAIL spacing %0d", cyc - last_pv);
        end
        if (m == 0 && cyc != 220) begin
          failures++;
          $display("FAIL first latency %0d", cyc);
        end
        if (m > 0) n_loop++;
        last_pv = cyc;
        checks++;
        if (int'(images_done) != m + 1) failures++;
        @(negedge clk); cyc++;
      end
      checks++;
      if (!done) failures++; else n_end++;
      checks++;
      if (dut.img_rd_en) failures++;
    end
    $display("relu=%0d sat=%0d linear=%0d loop_backs=%0d run_ends=%0d approx_changes=%0d s3->s0=%0d s3->s4=%0d",
             n_relu, n_sat, n_lin, n_loop, n_end, n_approx_diff, n_s3_s0, n_s3_s4);
    checks++;
    if (n_s3_s0 != n_loop || n_s3_s4 != 32) failures++;
    for (int c = 0; c < 32; c++) $write("%0d:%0d ", c, agree[c]);
    $display("  (labels agreeing with exact mode, of %0d)", NIMG);
    checks++;
    if (n_relu == 0 || n_sat == 0 || n_lin == 0 || n_loop == 0 || n_end != 32 || n_approx_diff == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
