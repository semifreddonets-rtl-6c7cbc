// sf_pw_conv: pointwise (1x1) convolution from C_IN to C_OUT channels
// followed by batch norm and ReLU (Fig. 4: "Conv 1x1", "BN, ReLU").
//
// All C_OUT x C_IN products of a pixel are computed in the cycle the pixel
// arrives, so the unit accepts a new pixel every cycle (the paper's fully
// pipelined, non-time-multiplexed datapath). FROZEN = 1 hard-wires the
// weights (sf_pkg::frozen_weight(SEED, out, in)), turning multipliers into
// fixed scalers; FROZEN = 0 keeps them in a register file written over the
// configuration bus (unit ID, region REG_WEIGHT, idx = out*C_IN + in).
//
// Timing: two register stages (MAC, BN); out_valid follows in_valid by 2.
//
// Default size: one branch of a regular block in module 3 of the paper's
// network (Table 1: 128 channels, 64 per branch).
module sf_pw_conv
  import sf_pkg::*;
#(
  parameter int          C_IN   = 64,
  parameter int          C_OUT  = 64,
  parameter bit          FROZEN = 1'b0,
  parameter bit          RELU   = 1'b1,
  parameter int unsigned SEED   = 1,
  parameter logic [7:0]  ID     = 8'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              in_valid,
  input  act_t [C_IN-1:0]   in_data,
  output logic              out_valid,
  output act_t [C_OUT-1:0]  out_data
);
  wgt_t             wmem [C_OUT*C_IN];
  logic             acc_valid;
  acc_t [C_OUT-1:0] acc;

  always_ff @(posedge clk) begin
    if (!FROZEN && cfg.we && cfg.id == ID && cfg.region == REG_WEIGHT && cfg.idx < C_OUT*C_IN)
      wmem[cfg.idx] <= cfg.data[7:0];
  end

  function automatic wgt_t weight(input int o, input int i);
    if (FROZEN) return frozen_weight(SEED, o, i);
    else        return wmem[o*C_IN + i];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0;
      acc       <= '0;
    end else begin
      acc_valid <= in_valid;
      if (in_valid) begin
        for (int o = 0; o < C_OUT; o++) begin
          acc_t s;
          s = '0;
          for (int i = 0; i < C_IN; i++)
            s += acc_t'(in_data[i]) * acc_t'(weight(o, i));
          acc[o] <= s;
        end
      end
    end
  end

  sf_bn_relu #(.C(C_OUT), .RELU(RELU), .ID(ID)) u_bn (
    .clk, .rst_n, .cfg,
    .in_valid(acc_valid), .in_acc(acc),
    .out_valid, .out_data
  );
endmodule
