// tb_sf_dw_conv: checks the depthwise 3x3 convolution with BN against the
// reference model, for a trainable stride-1 instance and a frozen stride-2
// instance, over two frames each (the second frame checks that the line
// buffers and position counters restart cleanly). Images are random, with
// the minimum blanking the window generator needs (1 idle cycle per line,
// W+1 after the frame). Also checks the number of results per frame.
module tb_sf_dw_conv;
  import sf_pkg::*;
  import sf_ref_pkg::*;

  localparam int C = 4, W = 7, H = 5;
  localparam logic [7:0] ID1 = 8'd5, ID2 = 8'd6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic in_valid;
  act_t [C-1:0] in_data;
  logic v1, v2, ovf1, ovf2;
  act_t [C-1:0] d1, d2;

  sf_dw_conv #(.C(C), .W(W), .H(H), .STRIDE(1), .FROZEN(1'b0), .ID(ID1)) dut1 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v1), .out_data(d1), .overflow(ovf1));
  sf_dw_conv #(.C(C), .W(W), .H(H), .STRIDE(2), .FROZEN(1'b1), .SEED(77), .ID(ID2)) dut2 (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid(v2), .out_data(d2), .overflow(ovf2));

  int checks = 0, failures = 0;
  int q1[$], q2[$];

  always @(posedge clk) if (rst_n) begin
    if (v1) for (int k = 0; k < C; k++) q1.push_back(int'(d1[k]));
    if (v2) for (int k = 0; k < C; k++) q2.push_back(int'(d2[k]));
  end

  task automatic cfg_write(logic [7:0] id, logic [3:0] region, int idx, int data);
    @(negedge clk);
    cfg = '{we: 1'b1, id: id, region: region, idx: 20'(idx), data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic drive(arr_t x);
    for (int r = 0; r < H; r++) begin
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        in_valid = 1'b1;
        for (int k = 0; k < C; k++) in_data[k] = act_t'(x[(r * W + c) * C + k]);
      end
      @(negedge clk);
      in_valid = 1'b0;
    end
    repeat (W + 12) @(negedge clk);
  endtask

  task automatic check(string what, int got[$], arr_t exp);
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL %s: %0d values, expected %0d", what, got.size(), exp.size());
    end
    for (int n = 0; n < exp.size() && n < got.size(); n++) begin
      checks++;
      if (got[n] != exp[n]) begin
        failures++;
        if (failures < 10) $display("FAIL %s[%0d]: got %0d expected %0d", what, n, got[n], exp[n]);
      end
    end
  endtask

  initial begin
    arr_t x, w1, w2, sc1, bi1, sc2, bi2, e1, e2;
    int sh1, sh2;
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    w1 = new[C * 9]; w2 = new[C * 9];
    sc1 = new[C]; bi1 = new[C]; sc2 = new[C]; bi2 = new[C];
    sh1 = 6; sh2 = 5;
    for (int n = 0; n < C * 9; n++) begin
      w1[n] = $urandom_range(0, 127) - 64;
      cfg_write(ID1, REG_WEIGHT, n, w1[n]);
      w2[n] = int'(frozen_weight(77, n / 9, n % 9));
    end
    for (int k = 0; k < C; k++) begin
      sc1[k] = $urandom_range(1, 4); bi1[k] = $urandom_range(0, 200) - 100;
      sc2[k] = $urandom_range(1, 4); bi2[k] = $urandom_range(0, 200) - 100;
      cfg_write(ID1, REG_BN_SCALE, k, sc1[k]); cfg_write(ID1, REG_BN_BIAS, k, bi1[k]);
      cfg_write(ID2, REG_BN_SCALE, k, sc2[k]); cfg_write(ID2, REG_BN_BIAS, k, bi2[k]);
    end
    cfg_write(ID1, REG_CTRL, 0, sh1);
    cfg_write(ID2, REG_CTRL, 0, sh2);

    for (int f = 0; f < 2; f++) begin
      x = new[W * H * C];
      foreach (x[n]) x[n] = $urandom_range(0, 255) - 128;
      q1.delete(); q2.delete();
      drive(x);
      e1 = bn_map(conv3x3(x, W, H, C, C, 1'b1, 1, w1), C, sc1, bi1, sh1, 1'b0);
      e2 = bn_map(conv3x3(x, W, H, C, C, 1'b1, 2, w2), C, sc2, bi2, sh2, 1'b0);
      check($sformatf("stride1 trainable frame %0d", f), q1, e1);
      check($sformatf("stride2 frozen frame %0d", f), q2, e2);
    end
    checks++;
    if (ovf1 || ovf2) begin failures++; $display("FAIL window FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
