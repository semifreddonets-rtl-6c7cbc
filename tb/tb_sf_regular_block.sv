// tb_sf_regular_block: checks the regular block (channel split, depthwise
// 3x3 + BN, 1x1 + BN + ReLU, concat, channel shuffle) against the reference
// model, trainable and frozen, on two random frames. Frame 1 uses the
// minimum blanking, frame 2 random idle cycles between pixels.
module tb_sf_regular_block;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int C = 8, HC = C / 2, W = 6, H = 5;
  localparam logic [7:0] IDT = 8'h50;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, v1, v2, e1, e2;
  act_t [C-1:0] in_data, d1, d2;
  int q1[$], q2[$];

  sf_regular_block #(.C(C), .W(W), .H(H), .FROZEN(1'b0), .ID_BASE(IDT)) dut1 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v1), .out_data(d1), .error(e1));
  sf_regular_block #(.C(C), .W(W), .H(H), .FROZEN(1'b1), .SEED(21), .ID_BASE(8'h10)) dut2 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v2), .out_data(d2), .error(e2));

  always @(posedge clk) if (rst_n) begin
    if (v1) for (int k = 0; k < C; k++) q1.push_back(int'(d1[k]));
    if (v2) for (int k = 0; k < C; k++) q2.push_back(int'(d2[k]));
  end

  // BN tables: [0] depthwise, [1] pointwise
  arr_t sc[2], bi[2], fsc[2], fbi[2];
  int sh[2] = '{5, 7};

  function automatic arr_t model(arr_t x, arr_t wdw, arr_t wpw, arr_t s0, arr_t b0, arr_t s1, arr_t b1);
    arr_t idh, br, a;
    idh = slice(x, C, 0, HC);
    br  = slice(x, C, HC, HC);
    a   = bn_map(conv3x3(br, W, H, HC, HC, 1'b1, 1, wdw), HC, s0, b0, sh[0], 1'b0);
    a   = bn_map(pw(a, W * H, HC, HC, wpw), HC, s1, b1, sh[1], 1'b1);
    return cat_shuffle(idh, a, HC);
  endfunction

  initial begin
    arr_t x, wdw, wpw, fdw, fpw;
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wdw = new[HC * 9]; wpw = new[HC * HC]; fdw = new[HC * 9]; fpw = new[HC * HC];
    foreach (wdw[n]) begin
      wdw[n] = $urandom_range(0, 127) - 64; cfg_write(IDT, REG_WEIGHT, n, wdw[n]);
      fdw[n] = int'(frozen_weight(42, n / 9, n % 9));
    end
    foreach (wpw[n]) begin
      wpw[n] = $urandom_range(0, 127) - 64; cfg_write(IDT + 8'd1, REG_WEIGHT, n, wpw[n]);
      fpw[n] = int'(frozen_weight(43, n / HC, n % HC));
    end
    for (int u = 0; u < 2; u++) begin
      sc[u] = new[HC]; bi[u] = new[HC]; fsc[u] = new[HC]; fbi[u] = new[HC];
      for (int k = 0; k < HC; k++) begin
        sc[u][k] = $urandom_range(1, 4); bi[u][k] = $urandom_range(0, 100) - 50;
        fsc[u][k] = $urandom_range(1, 4); fbi[u][k] = $urandom_range(0, 100) - 50;
        cfg_write(IDT + 8'(u), REG_BN_SCALE, k, sc[u][k]);
        cfg_write(IDT + 8'(u), REG_BN_BIAS, k, bi[u][k]);
        cfg_write(8'h10 + 8'(u), REG_BN_SCALE, k, fsc[u][k]);
        cfg_write(8'h10 + 8'(u), REG_BN_BIAS, k, fbi[u][k]);
      end
      cfg_write(IDT + 8'(u), REG_CTRL, 0, sh[u]);
      cfg_write(8'h10 + 8'(u), REG_CTRL, 0, sh[u]);
    end
    for (int f = 0; f < 2; f++) begin
      x = new[W * H * C];
      foreach (x[n]) x[n] = $urandom_range(0, 255) - 128;
      q1.delete(); q2.delete();
      for (int r = 0; r < H; r++) begin
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          in_valid = 1;
          for (int k = 0; k < C; k++) in_data[k] = act_t'(x[(r * W + c) * C + k]);
          if (f == 1 && $urandom_range(0, 2) == 0) begin
            @(negedge clk); in_valid = 0; repeat ($urandom_range(0, 3)) @(negedge clk);
          end
        end
        @(negedge clk); in_valid = 0;
      end
      repeat (W + 20) @(negedge clk);
      check_stream($sformatf("trainable f%0d", f), q1, model(x, wdw, wpw, sc[0], bi[0], sc[1], bi[1]));
      check_stream($sformatf("frozen f%0d", f), q2, model(x, fdw, fpw, fsc[0], fbi[0], fsc[1], fbi[1]));
    end
    check_eq("error flags", int'(e1 | e2), 0);
    finish_tb();
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
