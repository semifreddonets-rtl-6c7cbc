// sf_stem_conv: the first layer of every core, a full 3x3 convolution with
// stride 2 from the C_IN input channels (3 for an RGB image) to C_OUT = 32
// channels, followed by batch norm and ReLU (Table 1: Conv2D, stride 2,
// 640x480x3 -> 320x240x32). The kernel size, padding 1 and the BN/ReLU
// after it follow ShuffleNetV2, on which the paper builds; the paper gives
// only the stride and the shapes.
//
// FROZEN = 1 hard-wires the weights (frozen core), FROZEN = 0 keeps them in
// a register file (trainable cores; unit ID, region REG_WEIGHT,
// idx = (out*C_IN + in)*9 + tap, tap = row*3 + col).
//
// Timing as sf_dw_conv: a result leaves 2 cycles after its window; one
// result for every second pixel of every second line.
module sf_stem_conv
  import sf_pkg::*;
#(
  parameter int          C_IN   = 3,
  parameter int          C_OUT  = 32,
  parameter int          W      = 640,
  parameter int          H      = 480,
  parameter int          STRIDE = 2,
  parameter bit          FROZEN = 1'b0,
  parameter int unsigned SEED   = 1,
  parameter logic [7:0]  ID     = 8'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              in_valid,
  input  act_t [C_IN-1:0]   in_data,
  output logic              out_valid,
  output act_t [C_OUT-1:0]  out_data,
  output logic              overflow
);
  logic                      win_valid;
  act_t [2:0][2:0][C_IN-1:0] win;
  wgt_t                      wmem [C_OUT*C_IN*9];
  logic                      acc_valid;
  acc_t [C_OUT-1:0]          acc;

  sf_window3x3 #(.C(C_IN), .W(W), .H(H), .STRIDE(STRIDE)) u_win (
    .clk, .rst_n, .in_valid, .in_data,
    .win_valid, .win, .win_row(), .win_col(), .overflow
  );

  always_ff @(posedge clk) begin
    if (!FROZEN && cfg.we && cfg.id == ID && cfg.region == REG_WEIGHT && cfg.idx < C_OUT*C_IN*9)
      wmem[cfg.idx] <= cfg.data[7:0];
  end

  function automatic wgt_t weight(input int o, input int i, input int tap);
    if (FROZEN) return frozen_weight(SEED, o, i*9 + tap);
    else        return wmem[(o*C_IN + i)*9 + tap];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0;
      acc       <= '0;
    end else begin
      acc_valid <= win_valid;
      if (win_valid) begin
        for (int o = 0; o < C_OUT; o++) begin
          acc_t s;
          s = '0;
          for (int i = 0; i < C_IN; i++)
            for (int r = 0; r < 3; r++)
              for (int c = 0; c < 3; c++)
                s += acc_t'(win[r][c][i]) * acc_t'(weight(o, i, r*3 + c));
          acc[o] <= s;
        end
      end
    end
  end

  sf_bn_relu #(.C(C_OUT), .RELU(1'b1), .ID(ID)) u_bn (
    .clk, .rst_n, .cfg,
    .in_valid(acc_valid), .in_acc(acc),
    .out_valid, .out_data
  );
endmodule
