// tb_sf_pw_conv: checks the 1x1 convolution with BN and ReLU, trainable and
// frozen, against the reference model on random pixels sent back to back
// (one per cycle), and checks the 2-cycle latency.
module tb_sf_pw_conv;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int CI = 6, CO = 5, NPIX = 40;
  localparam logic [7:0] ID1 = 8'd9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, v1, v2;
  act_t [CI-1:0] in_data;
  act_t [CO-1:0] d1, d2;
  int q1[$], q2[$];
  int cyc = 0, first_in = -1, first_out = -1;

  sf_pw_conv #(.C_IN(CI), .C_OUT(CO), .FROZEN(1'b0), .RELU(1'b1), .ID(ID1)) dut1 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v1), .out_data(d1));
  sf_pw_conv #(.C_IN(CI), .C_OUT(CO), .FROZEN(1'b1), .RELU(1'b0), .SEED(5), .ID(8'd10)) dut2 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v2), .out_data(d2));

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && first_in < 0) first_in = cyc;
    if (v1 && first_out < 0) first_out = cyc;
    if (v1) for (int k = 0; k < CO; k++) q1.push_back(int'(d1[k]));
    if (v2) for (int k = 0; k < CO; k++) q2.push_back(int'(d2[k]));
  end

  initial begin
    arr_t x, w1, w2, sc, bi, sc2, bi2;
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    w1 = new[CO * CI]; w2 = new[CO * CI];
    sc = new[CO]; bi = new[CO]; sc2 = new[CO]; bi2 = new[CO];
    foreach (w1[n]) begin
      w1[n] = $urandom_range(0, 255) - 128;
      cfg_write(ID1, REG_WEIGHT, n, w1[n]);
      w2[n] = int'(frozen_weight(5, n / CI, n % CI));
    end
    for (int k = 0; k < CO; k++) begin
      sc[k] = $urandom_range(1, 3); bi[k] = $urandom_range(0, 400) - 200;
      cfg_write(ID1, REG_BN_SCALE, k, sc[k]); cfg_write(ID1, REG_BN_BIAS, k, bi[k]);
      sc2[k] = 1; bi2[k] = 0;
    end
    cfg_write(ID1, REG_CTRL, 0, 7);
    x = new[NPIX * CI];
    foreach (x[n]) x[n] = $urandom_range(0, 255) - 128;
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      in_valid = 1;
      for (int k = 0; k < CI; k++) in_data[k] = act_t'(x[p * CI + k]);
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    check_stream("trainable", q1, bn_map(pw(x, NPIX, CI, CO, w1), CO, sc, bi, 7, 1'b1));
    check_stream("frozen", q2, bn_map(pw(x, NPIX, CI, CO, w2), CO, sc2, bi2, 0, 1'b0));
    check_eq("latency", first_out - first_in, 2);
    finish_tb();
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
