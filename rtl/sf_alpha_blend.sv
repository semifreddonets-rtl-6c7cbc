// sf_alpha_blend: trainable alpha blending layer between the frozen core and
// one trainable core (paper Eq. 1, Fig. 3):
//   y[k] = alpha[k] * x_f[k] + (1 - alpha[k]) * x_t[k]   for each channel k.
// The paper defines alpha = sigmoid(w) of a trained parameter w; the sigmoid
// is evaluated when the model is exported, and the hardware holds alpha
// itself as a 9-bit unsigned fixed-point number a in [0, 256], alpha =
// a/256, so that both 0 (cores separated) and 1 are exact; 128 makes the
// trainable core a residual extractor. The number format and the rounding,
//   y = (a*x_f + (256-a)*x_t + 128) >>> 8,
// are this design's choice. alpha[k] is written at unit ID, region
// REG_ALPHA, idx = k; reset value 0.
//
// The two inputs must be aligned (same pixel in the same cycle). Timing:
// one register stage.
//
// Default size: the 128 channels of module 3 (Table 1).
module sf_alpha_blend
  import sf_pkg::*;
#(
  parameter int         C  = 128,
  parameter logic [7:0] ID = 8'd0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  input  act_t [C-1:0]  x_f,
  input  act_t [C-1:0]  x_t,
  output logic          out_valid,
  output act_t [C-1:0]  out_data
);
  logic [8:0] alpha [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < C; k++) alpha[k] <= '0;
    end else if (cfg.we && cfg.id == ID && cfg.region == REG_ALPHA && cfg.idx < C) begin
      alpha[cfg.idx] <= (cfg.data[8:0] > 9'd256) ? 9'd256 : cfg.data[8:0];
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
          logic signed [18:0] s;
          s = 19'($signed({1'b0, alpha[k]})) * 19'(x_f[k])
            + 19'($signed(10'd256 - {1'b0, alpha[k]})) * 19'(x_t[k])
            + 19'sd128;
          out_data[k] <= act_t'(s >>> 8);
        end
      end
    end
  end
endmodule
