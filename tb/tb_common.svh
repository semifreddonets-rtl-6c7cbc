// tb_common.svh: tasks shared by the testbenches. Include inside a module
// that declares clk and cfg (sf_pkg::cfg_t). Provides the check counters,
// a configuration-bus write and a comparison of a captured stream against
// reference values.
int checks = 0, failures = 0;

task automatic cfg_write(logic [7:0] id, logic [3:0] region, int idx, int data);
  @(negedge clk);
  cfg = '{we: 1'b1, id: id, region: region, idx: 20'(idx), data: data};
  @(negedge clk);
  cfg.we = 1'b0;
endtask

task automatic check_eq(string what, int got, int exp);
  checks++;
  if (got != exp) begin
    failures++;
    if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
  end
endtask

task automatic check_stream(string what, int got[$], sf_ref_pkg::arr_t exp);
  check_eq({what, " count"}, got.size(), exp.size());
  for (int n = 0; n < exp.size() && n < got.size(); n++)
    check_eq($sformatf("%s[%0d]", what, n), got[n], exp[n]);
endtask

task automatic finish_tb();
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask

// random trainable weights for unit id, written to the design and recorded
task automatic rand_weights(logic [7:0] id, int n, int lo, int hi);
  sf_ref_pkg::arr_t w = new[n];
  foreach (w[k]) begin
    w[k] = $urandom_range(0, hi - lo) + lo;
    cfg_write(id, sf_pkg::REG_WEIGHT, k, w[k]);
  end
  sf_ref_pkg::tbl_w[int'(id)] = w;
endtask

// random batch-norm parameters for unit id with C channels
task automatic rand_bn(logic [7:0] id, int C, int shift);
  sf_ref_pkg::arr_t s = new[C], b = new[C];
  for (int k = 0; k < C; k++) begin
    s[k] = $urandom_range(1, 4); b[k] = $urandom_range(0, 200) - 100;
    cfg_write(id, sf_pkg::REG_BN_SCALE, k, s[k]);
    cfg_write(id, sf_pkg::REG_BN_BIAS, k, b[k]);
  end
  cfg_write(id, sf_pkg::REG_CTRL, 0, shift);
  sf_ref_pkg::tbl_scale[int'(id)] = s;
  sf_ref_pkg::tbl_bias[int'(id)]  = b;
  sf_ref_pkg::tbl_shift[int'(id)] = shift;
endtask

// random alpha factors for blend unit id
task automatic rand_alpha(logic [7:0] id, int C);
  sf_ref_pkg::arr_t a = new[C];
  for (int k = 0; k < C; k++) begin
    a[k] = $urandom_range(0, 256);
    cfg_write(id, sf_pkg::REG_ALPHA, k, a[k]);
  end
  sf_ref_pkg::tbl_alpha[int'(id)] = a;
endtask

// configure a regular (nu = 2) or down (nu = 4) block at unit ID base
task automatic cfg_block(logic [7:0] base, bit down, int C, bit frozen);
  if (down) begin
    for (int u = 0; u < 4; u++) begin
      if (!frozen) rand_weights(base + 8'(u), (u % 2 == 0) ? C * 9 : C * C, -64, 63);
      rand_bn(base + 8'(u), C, (u % 2 == 0) ? 7 : 8);
    end
  end else begin
    if (!frozen) begin
      rand_weights(base, (C / 2) * 9, -64, 63);
      rand_weights(base + 8'd1, (C / 2) * (C / 2), -64, 63);
    end
    rand_bn(base, C / 2, 7);
    rand_bn(base + 8'd1, C / 2, 8);
  end
endtask
