// controller: five-state machine that time-shares the ten neurons over the
// three hidden-layer groups and the output layer.
//
//   ST_HID0/1/2  input from the image memory, weight and bias select = 0/1/2.
//                For NI cycles the neurons accumulate pixel x weight (one
//                feature per cycle, feature index `feat`); in one further
//                cycle the ten results are written to hidden register bank
//                0/1/2 and the MAC accumulators are cleared.
//   ST_OUT       input from the hidden registers, selects = 3. NH cycles of
//                accumulation, then one cycle in which the arg-max unit is
//                enabled, the classified-image counter is advanced and the
//                accumulators are cleared. If that was the last image the
//                machine goes to ST_DONE, otherwise back to ST_HID0.
//   ST_DONE      completion: `done` is high. This is also the state after
//                reset; `start` begins a new run from ST_HID0 and clears the
//                image counter.
// One image therefore takes 3*(NI+1) + (NH+1) cycles (220 at 62/30).
//
// The five states, their order and the selections made in each follow the
// paper. The per-state feature counter, the extra write cycle per state,
// the start input and waiting in state 4 after reset are this design's
// choices (the paper does not describe start-up or how many cycles a state
// lasts).
module controller
  import mlp_pkg::*;
#(
  parameter int unsigned NI = N_IN,
  parameter int unsigned NH = N_HID
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    last_image,
  output state_e                  state,
  output in_src_e                 sel_input,
  output logic [1:0]              sel_weight,
  output logic [1:0]              sel_bias,
  output logic [$clog2(NI)-1:0]   feat,
  output logic                    mem_rd_en,
  output logic                    mac_en,
  output logic                    mac_clr,
  output logic                    reg_write,
  output logic [1:0]              reg_select,
  output logic                    max_en,
  output logic                    cnt_inc,
  output logic                    cnt_clr,
  output logic                    done
);

  state_e                state_nxt;
  logic [$clog2(NI):0]   k;          // cycle within the state, 0..len
  logic [$clog2(NI):0]   len;        // number of accumulation cycles
  logic                  last_cycle; // the write / arg-max cycle
  logic                  busy;

  assign busy       = (state != ST_DONE);
  assign len        = (state == ST_OUT) ? ($clog2(NI)+1)'(NH) : ($clog2(NI)+1)'(NI);
  assign last_cycle = busy && (k == len);

  always_comb begin
    state_nxt = state;
    unique case (state)
      ST_HID0: if (last_cycle) state_nxt = ST_HID1;
      ST_HID1: if (last_cycle) state_nxt = ST_HID2;
      ST_HID2: if (last_cycle) state_nxt = ST_OUT;
      ST_OUT:  if (last_cycle) state_nxt = last_image ? ST_DONE : ST_HID0;
      ST_DONE: if (start)      state_nxt = ST_HID0;
      default:                 state_nxt = ST_DONE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_DONE;
      k     <= '0;
      done  <= 1'b0;
    end else begin
      state <= state_nxt;
      k     <= (state_nxt != state) ? '0 : (busy ? k + 1'b1 : '0);
      if (start && state == ST_DONE)          done <= 1'b0;
      else if (state == ST_OUT && last_cycle && last_image) done <= 1'b1;
    end
  end

  // Outputs decoded from the state.
  always_comb begin
    sel_input  = (state == ST_OUT) ? SRC_HIDDEN : SRC_MEMORY;
    unique case (state)
      ST_HID0: sel_weight = 2'd0;
      ST_HID1: sel_weight = 2'd1;
      ST_HID2: sel_weight = 2'd2;
      default: sel_weight = 2'd3;
    endcase
    sel_bias   = sel_weight;
    reg_select = sel_weight;
    feat       = last_cycle ? '0 : ($clog2(NI))'(k);
    mac_en     = busy && !last_cycle;
    mem_rd_en  = mac_en && (state != ST_OUT);
    mac_clr    = last_cycle || (state == ST_DONE);
    reg_write  = last_cycle && (state != ST_OUT);
    max_en     = last_cycle && (state == ST_OUT);
    cnt_inc    = max_en;
    cnt_clr    = (state == ST_DONE) && start;
  end

  // Hidden registers are written only by the hidden passes, the arg-max is
  // only enabled by the output pass, and the two never coincide.
  a_write_in_hidden: assert property (@(posedge clk) disable iff (!rst_n)
    reg_write |-> (state inside {ST_HID0, ST_HID1, ST_HID2}));
  a_max_in_out: assert property (@(posedge clk) disable iff (!rst_n)
    max_en |-> (state == ST_OUT));
  a_feat_range: assert property (@(posedge clk) disable iff (!rst_n)
    mac_en |-> (32'(feat) < ((state == ST_OUT) ? NH : NI)));

endmodule
