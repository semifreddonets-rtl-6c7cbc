// sf_bn_relu: batch normalisation folded into a per-channel scale and bias,
// requantisation to 8 bit and an optional ReLU.
//
// For every channel k: y[k] = sat8((acc[k] * scale[k] + bias[k]) >>> shift),
// then max(y, 0) when RELU = 1. The paper keeps batch-norm parameters
// trainable in every core, the frozen one included, so scale, bias and shift
// are registers written over the configuration bus (unit ID = ID; region
// REG_BN_SCALE / REG_BN_BIAS with idx = channel, region REG_CTRL idx 0 =
// shift). Folding BN into scale/bias and the widths (16-bit scale, 32-bit
// bias, 5-bit shift) are this design's choices. Reset values give the
// identity mapping scale = 1, bias = 0, shift = 0.
//
// Timing: one register stage; out_valid follows in_valid by one cycle.
//
// Default size: the 64 channels of a branch in module 3 of the paper's
// network (Table 1: 80x60x128 maps).
module sf_bn_relu
  import sf_pkg::*;
#(
  parameter int         C    = 64,
  parameter bit         RELU = 1'b1,
  parameter logic [7:0] ID   = 8'd0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  input  acc_t [C-1:0]     in_acc,
  output logic             out_valid,
  output act_t [C-1:0]     out_data
);
  logic signed [15:0] scale [C];
  logic signed [31:0] bias  [C];
  logic [4:0]         shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < C; k++) begin
        scale[k] <= 16'sd1;
        bias[k]  <= '0;
      end
      shift <= '0;
    end else if (cfg.we && cfg.id == ID) begin
      if (cfg.region == REG_BN_SCALE && cfg.idx < C) scale[cfg.idx] <= cfg.data[15:0];
      if (cfg.region == REG_BN_BIAS  && cfg.idx < C) bias[cfg.idx]  <= cfg.data;
      if (cfg.region == REG_CTRL     && cfg.idx == 0) shift         <= cfg.data[4:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < C; k++) begin
          logic signed [47:0] v;
          act_t y;
          v = (48'(in_acc[k]) * 48'(scale[k]) + 48'(bias[k])) >>> shift;
          y = sat8(v);
          out_data[k] <= (RELU && y < 0) ? act_t'(0) : y;
        end
      end
    end
  end
endmodule
