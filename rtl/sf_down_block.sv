// sf_down_block: the downscaling building block (Fig. 4, right). There is no
// channel split: the full C_IN-channel input feeds two branches, each a
// depthwise 3x3 convolution with stride 2 and BN followed by a pointwise
// 1x1 convolution with BN and ReLU. Concatenating the branches doubles the
// channel count while the stride halves width and height; a two-group
// channel shuffle follows: out[2k] = branch A[k], out[2k+1] = branch B[k].
//
// The two branches see the same pixels and have identical pipelines, so
// their results arrive in the same cycle and need no alignment buffer.
// Each branch has its own window generator and line buffers (sharing them
// would save area; duplication keeps the branches independent).
// Unit IDs: ID_BASE / +1 (branch A dw / pw), ID_BASE+2 / +3 (branch B).
//
// Timing: as sf_regular_block; one output per 2x2 input pixels.
//
// Default size: module 1 of the paper's network (Table 1: 320x240x32 in,
// 160x120x64 out).
module sf_down_block
  import sf_pkg::*;
#(
  parameter int          C_IN    = 32,
  parameter int          W       = 320,
  parameter int          H       = 240,
  parameter bit          FROZEN  = 1'b0,
  parameter int unsigned SEED    = 1,
  parameter logic [7:0]  ID_BASE = 8'd0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic               in_valid,
  input  act_t [C_IN-1:0]    in_data,
  output logic               out_valid,
  output act_t [2*C_IN-1:0]  out_data,
  output logic               error
);
  logic [1:0]           dw_valid, pw_valid, ovf;
  act_t [C_IN-1:0]      dw_data [2];
  act_t [C_IN-1:0]      pw_data [2];

  for (genvar b = 0; b < 2; b++) begin : g_branch
    sf_dw_conv #(.C(C_IN), .W(W), .H(H), .STRIDE(2), .FROZEN(FROZEN),
                 .SEED(SEED * 4 + 2 * b), .ID(ID_BASE + 8'(2 * b))) u_dw (
      .clk, .rst_n, .cfg,
      .in_valid, .in_data,
      .out_valid(dw_valid[b]), .out_data(dw_data[b]), .overflow(ovf[b])
    );
    sf_pw_conv #(.C_IN(C_IN), .C_OUT(C_IN), .FROZEN(FROZEN), .RELU(1'b1),
                 .SEED(SEED * 4 + 2 * b + 1), .ID(ID_BASE + 8'(2 * b + 1))) u_pw (
      .clk, .rst_n, .cfg,
      .in_valid(dw_valid[b]), .in_data(dw_data[b]),
      .out_valid(pw_valid[b]), .out_data(pw_data[b])
    );
  end

  assign out_valid = pw_valid[0];
  always_comb begin
    for (int k = 0; k < C_IN; k++) begin
      out_data[2*k]     = pw_data[0][k];
      out_data[2*k + 1] = pw_data[1][k];
    end
  end

  assign error = |ovf | (pw_valid[0] ^ pw_valid[1]);
endmodule
