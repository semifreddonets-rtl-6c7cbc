// tb_sf_stem_conv: checks the stride-2 3x3 stem convolution (3 -> C_OUT
// channels, BN, ReLU), trainable and frozen, against the reference model on
// two random frames with the minimum blanking; checks the result count.
module tb_sf_stem_conv;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int CI = 3, CO = 4, W = 9, H = 6;
  localparam logic [7:0] ID1 = 8'd64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, v1, v2, o1, o2;
  act_t [CI-1:0] in_data;
  act_t [CO-1:0] d1, d2;
  int q1[$], q2[$];

  sf_stem_conv #(.C_IN(CI), .C_OUT(CO), .W(W), .H(H), .FROZEN(1'b0), .ID(ID1)) dut1 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v1), .out_data(d1), .overflow(o1));
  sf_stem_conv #(.C_IN(CI), .C_OUT(CO), .W(W), .H(H), .FROZEN(1'b1), .SEED(1000), .ID(8'd0)) dut2 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v2), .out_data(d2), .overflow(o2));

  always @(posedge clk) if (rst_n) begin
    if (v1) for (int k = 0; k < CO; k++) q1.push_back(int'(d1[k]));
    if (v2) for (int k = 0; k < CO; k++) q2.push_back(int'(d2[k]));
  end

  initial begin
    arr_t x, w1, w2, sc, bi, sc2, bi2;
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    w1 = new[CO * CI * 9]; w2 = new[CO * CI * 9];
    sc = new[CO]; bi = new[CO]; sc2 = new[CO]; bi2 = new[CO];
    foreach (w1[n]) begin
      w1[n] = $urandom_range(0, 127) - 64;
      cfg_write(ID1, REG_WEIGHT, n, w1[n]);
      w2[n] = int'(frozen_weight(1000, n / (CI * 9), n % (CI * 9)));
    end
    for (int k = 0; k < CO; k++) begin
      sc[k] = $urandom_range(1, 3); bi[k] = $urandom_range(0, 400) - 200;
      sc2[k] = $urandom_range(1, 3); bi2[k] = $urandom_range(0, 400) - 200;
      cfg_write(ID1, REG_BN_SCALE, k, sc[k]); cfg_write(ID1, REG_BN_BIAS, k, bi[k]);
      cfg_write(8'd0, REG_BN_SCALE, k, sc2[k]); cfg_write(8'd0, REG_BN_BIAS, k, bi2[k]);
    end
    cfg_write(ID1, REG_CTRL, 0, 8);
    cfg_write(8'd0, REG_CTRL, 0, 8);
    for (int f = 0; f < 2; f++) begin
      x = new[W * H * CI];
      foreach (x[n]) x[n] = $urandom_range(0, 255) - 128;
      q1.delete(); q2.delete();
      for (int r = 0; r < H; r++) begin
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          in_valid = 1;
          for (int k = 0; k < CI; k++) in_data[k] = act_t'(x[(r * W + c) * CI + k]);
        end
        @(negedge clk); in_valid = 0;
      end
      repeat (W + 10) @(negedge clk);
      check_stream($sformatf("trainable f%0d", f), q1,
                   bn_map(conv3x3(x, W, H, CI, CO, 1'b0, 2, w1), CO, sc, bi, 8, 1'b1));
      check_stream($sformatf("frozen f%0d", f), q2,
                   bn_map(conv3x3(x, W, H, CI, CO, 1'b0, 2, w2), CO, sc2, bi2, 8, 1'b1));
    end
    check_eq("overflow", int'(o1 | o2), 0);
    finish_tb();
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
