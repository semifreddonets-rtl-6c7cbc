// sf_dw_conv: depthwise 3x3 convolution (one 3x3 kernel per channel,
// padding 1, stride 1 or 2) followed by batch norm without ReLU, as in the
// ShuffleNetV2-style blocks of the paper (Fig. 4: "Depthwise Conv 3x3", BN).
//
// FROZEN = 1 builds the frozen-core version: every weight is a hard-wired
// constant (sf_pkg::frozen_weight(SEED, channel, tap)), so each multiplier
// becomes a fixed scaler and zero weights disappear in synthesis.
// FROZEN = 0 builds the trainable version: the C*9 weights are a register
// file written over the configuration bus (unit ID, region REG_WEIGHT,
// idx = channel*9 + tap, tap = row*3 + col). Batch norm is configurable in
// both versions.
//
// Timing: the window generator presents a window one cycle after it has
// consumed the pixel below-right of the centre; the multiply-accumulate and
// the BN stage are one register each, so a result leaves 2 cycles after its
// window. A stride-2 instance only computes the windows of even centres.
//
// Default size: one branch of a regular block in module 3 of the paper's
// network (Table 1: 80x60 maps, 128 channels, 64 per branch).
module sf_dw_conv
  import sf_pkg::*;
#(
  parameter int          C      = 64,
  parameter int          W      = 80,
  parameter int          H      = 60,
  parameter int          STRIDE = 1,
  parameter bit          FROZEN = 1'b0,
  parameter int unsigned SEED   = 1,
  parameter logic [7:0]  ID     = 8'd0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  input  act_t [C-1:0]  in_data,
  output logic          out_valid,
  output act_t [C-1:0]  out_data,
  output logic          overflow
);
  logic                   win_valid;
  act_t [2:0][2:0][C-1:0] win;
  wgt_t                   wmem [C*9];
  logic                   acc_valid;
  acc_t [C-1:0]           acc;

  sf_window3x3 #(.C(C), .W(W), .H(H), .STRIDE(STRIDE)) u_win (
    .clk, .rst_n, .in_valid, .in_data,
    .win_valid, .win, .win_row(), .win_col(), .overflow
  );

  // trainable weight memory (unused, and removed, when FROZEN = 1)
  always_ff @(posedge clk) begin
    if (!FROZEN && cfg.we && cfg.id == ID && cfg.region == REG_WEIGHT && cfg.idx < C*9)
      wmem[cfg.idx] <= cfg.data[7:0];
  end

  function automatic wgt_t weight(input int ch, input int tap);
    if (FROZEN) return frozen_weight(SEED, ch, tap);
    else        return wmem[ch*9 + tap];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0;
      acc       <= '0;
    end else begin
      acc_valid <= win_valid;
      if (win_valid) begin
        for (int k = 0; k < C; k++) begin
          acc_t s;
          s = '0;
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++)
              s += acc_t'(win[r][c][k]) * acc_t'(weight(k, r*3 + c));
          acc[k] <= s;
        end
      end
    end
  end

  sf_bn_relu #(.C(C), .RELU(1'b0), .ID(ID)) u_bn (
    .clk, .rst_n, .cfg,
    .in_valid(acc_valid), .in_acc(acc),
    .out_valid, .out_data
  );
endmodule
