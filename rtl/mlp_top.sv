// mlp_top: 62-30-10 multilayer-perceptron classifier built from ten shared
// neurons with error-controllable MAC units.
//
// Datapath: the controller walks through four passes per image. In the
// three hidden passes the ten neurons read one pixel per cycle from the
// external image memory (img_rd_en / img_addr / img_feat -> img_data, data
// expected in the same cycle) together with that feature's weights from
// param_memory, and the results are stored in hidden register banks 0..2.
// In the output pass the neurons read the 30 hidden results instead, and
// the arg-max of the ten outputs is registered as `pred` with a one-cycle
// `pred_valid`. After `num_images` images the controller raises `done`.
// `error_ctrl` sets the approximation level of all ten multipliers
// (0 = exact, 31 = most approximate) and may be changed between images.
//
// Before `start`, load the parameters through the byte-wide load port:
// weights with ld_bias = 0 at (ld_grp, ld_feat, ld_neuron), where group
// 0..2 are hidden neurons 10g+ld_neuron fed by pixel ld_feat and group 3 is
// output neuron ld_neuron fed by hidden neuron ld_feat; biases with
// ld_bias = 1 at (ld_grp, ld_neuron).
//
// `fsm_state` shows the controller state (0..2 hidden passes, 3 output
// pass, 4 done/idle).
//
// Timing: 3*(62+1) + (30+1) = 220 clock cycles per image.
//
// The block structure follows the paper's datapath figure; the external
// image-memory interface, the load port and the start/done handshake are
// this design's choices.
module mlp_top
  import mlp_pkg::*;
#(
  parameter int unsigned IMG_W = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control
  input  logic                  start,
  input  logic [IMG_W-1:0]      num_images,
  input  logic [ERR_W-1:0]      error_ctrl,
  output logic                  done,
  // external image memory (read)
  output logic                  img_rd_en,
  output logic [IMG_W-1:0]      img_addr,
  output logic [5:0]            img_feat,
  input  logic [DATA_W-1:0]     img_data,
  // parameter load port
  input  logic                  ld_en,
  input  logic                  ld_bias,
  input  logic [1:0]            ld_grp,
  input  logic [5:0]            ld_feat,
  input  logic [3:0]            ld_neuron,
  input  logic [DATA_W-1:0]     ld_data,
  // result
  output logic [3:0]            pred,
  output logic                  pred_valid,
  output logic [IMG_W-1:0]      images_done,
  output logic [2:0]            fsm_state
);

  localparam int unsigned NGRP = N_HID / N_NEURONS + 1;

  state_e     state;

  in_src_e  sel_input;
  logic [1:0] sel_weight, sel_bias, reg_select;
  logic [5:0] feat;
  logic mac_en, mac_clr, reg_write, max_en, cnt_inc, cnt_clr, last_image;

  logic [NGRP-1:0][N_NEURONS-1:0][DATA_W-1:0] mem_weights, mem_biases;
  logic [N_NEURONS-1:0][DATA_W-1:0]           n_weights, n_biases, n_out;
  logic [N_HID-1:0][DATA_W-1:0]               hidden;
  logic [DATA_W-1:0]                          n_in;

  controller #(.NI(N_IN), .NH(N_HID)) u_ctrl (
    .clk, .rst_n, .start, .last_image,
    .state (state), .sel_input, .sel_weight, .sel_bias, .feat,
    .mem_rd_en (img_rd_en),
    .mac_en, .mac_clr, .reg_write, .reg_select, .max_en, .cnt_inc, .cnt_clr,
    .done
  );

  param_memory u_mem (
    .clk,
    .wr_en     (ld_en),
    .wr_bias   (ld_bias),
    .wr_grp    (ld_grp),
    .wr_feat   (ld_feat),
    .wr_neuron (ld_neuron),
    .wr_data   (ld_data),
    .rd_feat   (feat),
    .rd_weights(mem_weights),
    .rd_biases (mem_biases)
  );

  input_mux u_mux (
    .sel_input, .sel_weight, .sel_bias, .feat,
    .pixel      (img_data),
    .hidden     (hidden),
    .weights_in (mem_weights),
    .biases_in  (mem_biases),
    .in_data    (n_in),
    .weights    (n_weights),
    .biases     (n_biases)
  );

  for (genvar n = 0; n < N_NEURONS; n++) begin : g_neuron
    neuron u_neuron (
      .clk, .rst_n,
      .clr     (mac_clr),
      .en      (mac_en),
      .error   (error_ctrl),
      .in_data (n_in),
      .weight  (n_weights[n]),
      .bias    (n_biases[n]),
      .out     (n_out[n])
    );
  end

  hidden_regs u_hregs (
    .clk, .rst_n, .reg_write, .reg_select,
    .d (n_out),
    .q (hidden)
  );

  max_unit #(.NN(N_OUT)) u_max (
    .clk, .rst_n,
    .en     (max_en),
    .values (n_out),
    .pred, .pred_valid
  );

  image_counter #(.IMG_W(IMG_W)) u_cnt (
    .clk, .rst_n,
    .clr        (cnt_clr),
    .inc        (cnt_inc),
    .num_images (num_images),
    .count      (images_done),
    .last       (last_image)
  );

  assign img_addr = images_done;
  assign img_feat = feat;
  assign fsm_state = state;

endmodule
