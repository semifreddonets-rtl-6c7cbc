// tb_sf_bn_relu: checks folded batch norm, requantisation, saturation and
// ReLU for random accumulators, scales, biases and shifts, with and
// without ReLU; checks the one-cycle latency and the reset defaults
// (identity with saturation).
module tb_sf_bn_relu;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, v1, v2;
  acc_t [C-1:0] acc;
  act_t [C-1:0] y1, y2;

  sf_bn_relu #(.C(C), .RELU(1'b1), .ID(8'd3)) dut1 (.clk, .rst_n, .cfg, .in_valid, .in_acc(acc), .out_valid(v1), .out_data(y1));
  sf_bn_relu #(.C(C), .RELU(1'b0), .ID(8'd4)) dut2 (.clk, .rst_n, .cfg, .in_valid, .in_acc(acc), .out_valid(v2), .out_data(y2));

  initial begin
    int sc[C], bi[C], sh;
    cfg = '0; in_valid = 0; acc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset defaults: identity with saturation
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int k = 0; k < C; k++) acc[k] = $urandom_range(0, 600) - 300;
      @(negedge clk);
      in_valid = 0;
      check_eq("valid", int'(v2), 1);
      for (int k = 0; k < C; k++) check_eq("default", int'(y2[k]), sat8(acc[k]));
    end
    for (int round = 0; round < 10; round++) begin
      sh = $urandom_range(0, 12);
      for (int k = 0; k < C; k++) begin
        sc[k] = $urandom_range(0, 2000) - 1000; bi[k] = $urandom_range(0, 200000) - 100000;
        cfg_write(8'd3, REG_BN_SCALE, k, sc[k]); cfg_write(8'd3, REG_BN_BIAS, k, bi[k]);
        cfg_write(8'd4, REG_BN_SCALE, k, sc[k]); cfg_write(8'd4, REG_BN_BIAS, k, bi[k]);
      end
      cfg_write(8'd3, REG_CTRL, 0, sh); cfg_write(8'd4, REG_CTRL, 0, sh);
      for (int t = 0; t < 20; t++) begin
        @(negedge clk);
        in_valid = 1;
        for (int k = 0; k < C; k++) acc[k] = $urandom_range(0, 20000) - 10000;
        @(negedge clk);
        in_valid = 0;
        check_eq("valid", int'(v1 & v2), 1);
        for (int k = 0; k < C; k++) begin
          check_eq("relu", int'(y1[k]), bn(acc[k], sc[k], bi[k], sh, 1'b1));
          check_eq("norelu", int'(y2[k]), bn(acc[k], sc[k], bi[k], sh, 1'b0));
        end
      end
    end
    finish_tb();
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
