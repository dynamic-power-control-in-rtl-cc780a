// image_counter: counts the images that have been classified.
//
// `clr` (at the start of a run) sets the count to zero; `inc` adds one.
// `count` is also the index of the image being processed, used as the
// image-memory address. `last` is high while the image being finished is
// the final one, i.e. when count + 1 >= num_images; the controller samples
// it in the same cycle as `inc` to choose between another image and the
// end of the run, so num_images = 0 behaves like 1 (a run always classifies
// at least one image). Asynchronous active-low reset.
//
// Paper: in state 3 the "classified image counter is activated, and if the
// counter value is less than number of input images in dataset, the state
// machine loops back to State 0; otherwise, it progresses to State 4". The
// 16-bit width and the run-time `num_images` input are this design's.
module image_counter #(
  parameter int unsigned IMG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             inc,
  input  logic [IMG_W-1:0] num_images,
  output logic [IMG_W-1:0] count,
  output logic             last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (inc) count <= count + 1'b1;
  end

  assign last = ({1'b0, count} + 1'b1) >= {1'b0, num_images};

endmodule
