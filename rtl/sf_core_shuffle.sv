// sf_core_shuffle: optional cross-core channel shuffle between the two
// trainable cores (Fig. 3, "Core Shuffle"). When enabled, half of the
// feature maps at the output of the two alpha blending layers are swapped:
// channels [C/2, C) of core #1 and core #2 trade places, channels [0, C/2)
// stay. Disabled, both streams pass unchanged so that the cores can serve
// two different tasks. The paper says "swapping half of the feature maps";
// which half is this design's choice.
//
// Purely combinational; the two inputs must be aligned (they are: both
// trainable cores run in lock step with the frozen core).
//
// Default size: the 128 channels of module 3 (Table 1).
module sf_core_shuffle
  import sf_pkg::*;
#(
  parameter int C = 128
) (
  input  logic          en,
  input  act_t [C-1:0]  a_in,
  input  act_t [C-1:0]  b_in,
  output act_t [C-1:0]  a_out,
  output act_t [C-1:0]  b_out
);
  localparam int HC = C / 2;

  always_comb begin
    a_out = a_in;
    b_out = b_in;
    if (en) begin
      a_out[C-1:HC] = b_in[C-1:HC];
      b_out[C-1:HC] = a_in[C-1:HC];
    end
  end
endmodule
