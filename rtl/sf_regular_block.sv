// sf_regular_block: the regular (stride-1) building block of every core,
// a simplified ShuffleNetV2 unit (Fig. 4, left).
//
// The C input channels are split in two halves. Channels [0, C/2) pass
// unchanged; channels [C/2, C) go through a depthwise 3x3 convolution with
// BN and a pointwise 1x1 convolution with BN and ReLU (the first 1x1
// convolution of ShuffleNetV2 is dropped, as in the paper). The halves are
// concatenated and the channels shuffled with two groups:
// out[2k] = identity[k], out[2k+1] = branch[k].
//
// Which half bypasses and the exact shuffle permutation are this design's
// choice (the paper names the operators only). The identity half waits in
// a FIFO of W+16 entries until the convolution branch produces the same
// pixel; the branch result pops it, so the two halves leave together.
// Unit IDs: ID_BASE (depthwise), ID_BASE+1 (pointwise).
//
// Timing: a pixel leaves about one line plus 5 cycles after the pixel
// below-right of it entered; out_valid pulses once per pixel.
//
// Default size: module 3 of the paper's network (Table 1: 80x60x128).
module sf_regular_block
  import sf_pkg::*;
#(
  parameter int          C       = 128,
  parameter int          W       = 80,
  parameter int          H       = 60,
  parameter bit          FROZEN  = 1'b0,
  parameter int unsigned SEED    = 1,
  parameter logic [7:0]  ID_BASE = 8'd0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  input  act_t [C-1:0]  in_data,
  output logic          out_valid,
  output act_t [C-1:0]  out_data,
  output logic          error     // sticky: a FIFO over- or underflowed
);
  localparam int HC = C / 2;
  localparam int ID_DEPTH = W + 16;

  logic            dw_valid, pw_valid, win_ovf, id_ovf, id_udf;
  act_t [HC-1:0]   dw_data, pw_data, id_data;
  logic [$clog2(ID_DEPTH+1)-1:0] id_level_unused;

  sf_dw_conv #(.C(HC), .W(W), .H(H), .STRIDE(1), .FROZEN(FROZEN),
               .SEED(SEED * 2), .ID(ID_BASE)) u_dw (
    .clk, .rst_n, .cfg,
    .in_valid, .in_data(in_data[C-1:HC]),
    .out_valid(dw_valid), .out_data(dw_data), .overflow(win_ovf)
  );

  sf_pw_conv #(.C_IN(HC), .C_OUT(HC), .FROZEN(FROZEN), .RELU(1'b1),
               .SEED(SEED * 2 + 1), .ID(ID_BASE + 8'd1)) u_pw (
    .clk, .rst_n, .cfg,
    .in_valid(dw_valid), .in_data(dw_data),
    .out_valid(pw_valid), .out_data(pw_data)
  );

  sf_fifo #(.WIDTH(HC*8), .DEPTH(ID_DEPTH)) u_id_fifo (
    .clk, .rst_n,
    .push(in_valid), .din(in_data[HC-1:0]),
    .pop(pw_valid), .dout(id_data),
    .empty(), .full(), .level(id_level_unused),
    .overflow(id_ovf), .underflow(id_udf)
  );

  assign out_valid = pw_valid;
  always_comb begin
    for (int k = 0; k < HC; k++) begin
      out_data[2*k]     = id_data[k];
      out_data[2*k + 1] = pw_data[k];
    end
  end

  assign error = win_ovf | id_ovf | id_udf;
endmodule
