// tb_sf_down_block: checks the downscaling block (two stride-2 depthwise
// 3x3 + BN and 1x1 + BN + ReLU branches, concat to twice the channels,
// channel shuffle) against the reference model, trainable and frozen, on
// two random frames of odd size; checks the output pixel count.
module tb_sf_down_block;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int C = 4, W = 7, H = 5;
  localparam logic [7:0] IDT = 8'h60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, v1, v2, e1, e2;
  act_t [C-1:0] in_data;
  act_t [2*C-1:0] d1, d2;
  int q1[$], q2[$];

  sf_down_block #(.C_IN(C), .W(W), .H(H), .FROZEN(1'b0), .ID_BASE(IDT)) dut1 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v1), .out_data(d1), .error(e1));
  sf_down_block #(.C_IN(C), .W(W), .H(H), .FROZEN(1'b1), .SEED(9), .ID_BASE(8'h20)) dut2 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v2), .out_data(d2), .error(e2));

  always @(posedge clk) if (rst_n) begin
    if (v1) for (int k = 0; k < 2 * C; k++) q1.push_back(int'(d1[k]));
    if (v2) for (int k = 0; k < 2 * C; k++) q2.push_back(int'(d2[k]));
  end

  // per unit u = 0..3 (A dw, A pw, B dw, B pw): weights and BN
  arr_t tw[4], fw[4], sc[4], bi[4];
  int sh[4] = '{5, 7, 6, 7};

  function automatic arr_t model(bit frozen, arr_t x);
    arr_t br[2];
    for (int b = 0; b < 2; b++) begin
      arr_t a;
      a = bn_map(conv3x3(x, W, H, C, C, 1'b1, 2, frozen ? fw[2*b] : tw[2*b]), C,
                 sc[2*b], bi[2*b], sh[2*b], 1'b0);
      br[b] = bn_map(pw(a, ((W + 1) / 2) * ((H + 1) / 2), C, C, frozen ? fw[2*b+1] : tw[2*b+1]), C,
                     sc[2*b+1], bi[2*b+1], sh[2*b+1], 1'b1);
    end
    return cat_shuffle(br[0], br[1], C);
  endfunction

  initial begin
    arr_t x;
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int u = 0; u < 4; u++) begin
      int nw;
      nw = (u % 2 == 0) ? C * 9 : C * C;
      tw[u] = new[nw]; fw[u] = new[nw]; sc[u] = new[C]; bi[u] = new[C];
      for (int n = 0; n < nw; n++) begin
        tw[u][n] = $urandom_range(0, 127) - 64;
        cfg_write(IDT + 8'(u), REG_WEIGHT, n, tw[u][n]);
        fw[u][n] = (u % 2 == 0) ? int'(frozen_weight(9 * 4 + u, n / 9, n % 9))
                                : int'(frozen_weight(9 * 4 + u, n / C, n % C));
      end
      for (int k = 0; k < C; k++) begin
        sc[u][k] = $urandom_range(1, 4); bi[u][k] = $urandom_range(0, 100) - 50;
        cfg_write(IDT + 8'(u), REG_BN_SCALE, k, sc[u][k]); cfg_write(IDT + 8'(u), REG_BN_BIAS, k, bi[u][k]);
        cfg_write(8'h20 + 8'(u), REG_BN_SCALE, k, sc[u][k]); cfg_write(8'h20 + 8'(u), REG_BN_BIAS, k, bi[u][k]);
      end
      cfg_write(IDT + 8'(u), REG_CTRL, 0, sh[u]);
      cfg_write(8'h20 + 8'(u), REG_CTRL, 0, sh[u]);
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
        end
        @(negedge clk); in_valid = 0;
      end
      repeat (W + 20) @(negedge clk);
      check_stream($sformatf("trainable f%0d", f), q1, model(1'b0, x));
      check_stream($sformatf("frozen f%0d", f), q2, model(1'b1, x));
      check_eq("pixels", q1.size() / (2 * C), ((W + 1) / 2) * ((H + 1) / 2));
    end
    check_eq("error flags", int'(e1 | e2), 0);
    finish_tb();
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
