// tb_sf_alpha_blend: checks y = (a*x_f + (256-a)*x_t + 128) >>> 8 per
// channel for random alphas and inputs, the special values a = 0 (only the
// trainable input), 128 (average) and 256 (only the frozen input), the
// clamp of alpha to 256, and the one-cycle latency.
module tb_sf_alpha_blend;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int C = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, out_valid;
  act_t [C-1:0] xf, xt, y;
  sf_alpha_blend #(.C(C), .ID(8'd7)) dut (.clk, .rst_n, .cfg, .in_valid, .x_f(xf), .x_t(xt), .out_valid, .out_data(y));

  initial begin
    int a[C];
    cfg = '0; in_valid = 0; xf = '0; xt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      for (int k = 0; k < C; k++) begin
        int wr;
        case (round)
          0: wr = 0;
          1: wr = 128;
          2: wr = 256;
          3: wr = 400;          // clamps to 256
          default: wr = $urandom_range(0, 256);
        endcase
        a[k] = (wr > 256) ? 256 : wr;
        cfg_write(8'd7, REG_ALPHA, k, wr);
      end
      for (int t = 0; t < 20; t++) begin
        @(negedge clk);
        in_valid = 1;
        for (int k = 0; k < C; k++) begin
          xf[k] = act_t'($urandom_range(0, 255)); xt[k] = act_t'($urandom_range(0, 255));
        end
        @(negedge clk);
        in_valid = 0;
        check_eq("valid", int'(out_valid), 1);
        for (int k = 0; k < C; k++) begin
          check_eq("blend", int'(y[k]), blend(a[k], int'(xf[k]), int'(xt[k])));
          if (round == 0) check_eq("alpha0", int'(y[k]), int'(xt[k]));
          if (round == 2) check_eq("alpha1", int'(y[k]), int'(xf[k]));
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
