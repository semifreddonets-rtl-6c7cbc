// tb_sf_model_head: checks the model head against a reference model in
// three settings: (1) per-pixel outputs, 2 groups, all 8 outputs, ReLU-like
// activation; (2) global average pooling over the frame with 5 outputs and
// the identity activation; (3) back-to-back pixels, which must raise the
// overrun flag. Checks one output per cycle (n_out cycles per pixel) and
// the number of pooled results. Lines of pixels arrive in bursts, as from
// the backbone, and must be absorbed by the head's input line buffer.
module tb_sf_model_head;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int CI = 8, L = 4, NR = 8, W = 3, H = 2, NPIX = W * H;
  localparam logic [7:0] ID = 8'hC0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, out_valid, out_pooled, busy, overrun;
  act_t [CI-1:0] in_data;
  logic [2:0] out_ch;
  act_t out_data;
  int qd[$], qc[$], qp[$], qt[$];
  int cyc = 0;

  sf_model_head #(.C_IN(CI), .LANES(L), .N_ROWS(NR), .W(W), .H(H), .ID(ID)) dut (
    .clk, .rst_n, .cfg, .in_valid, .in_data, .out_valid, .out_ch, .out_data,
    .out_pooled, .busy, .overrun);

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      qd.push_back(int'(out_data)); qc.push_back(int'(out_ch));
      qp.push_back(int'(out_pooled)); qt.push_back(cyc);
    end
  end

  int wt[NR][L], bias[NR];

  function automatic int conv_out(arr_t x, int p, int o, int g_log2, int opg_log2, int shift);
    int g, cpg, base;
    longint s = 0;
    g = o >> opg_log2; cpg = CI >> g_log2; base = (g * cpg) % CI;
    for (int j = 0; j < L; j++)
      if (j < cpg) s += longint'(x[p * CI + (base + j) % CI]) * wt[o][j];
    return sat8((s + bias[o]) >>> shift);
  endfunction

  // gap idle cycles after every pixel, or, with burst = 1, after every
  // line (the pixels of a line back to back, as the backbone delivers them)
  task automatic send(arr_t x, int gap, bit burst = 1'b0);
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      in_valid = 1;
      for (int k = 0; k < CI; k++) in_data[k] = act_t'(x[p * CI + k]);
      if (!burst || p % W == W - 1) begin
        @(negedge clk);
        in_valid = 0;
        repeat (gap) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    arr_t x;
    int n_out, g_log2, opg_log2, shift;
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < NR; o++) begin
      for (int j = 0; j < L; j++) begin
        wt[o][j] = $urandom_range(0, 255) - 128;
        cfg_write(ID, REG_WEIGHT, o * L + j, wt[o][j]);
      end
      bias[o] = $urandom_range(0, 2000) - 1000;
      cfg_write(ID, REG_BN_BIAS, o, bias[o]);
    end
    // ---- (1) per pixel, 2 groups of 4 outputs, ReLU activation
    n_out = 8; g_log2 = 1; opg_log2 = 2; shift = 6;
    cfg_write(ID, REG_CTRL, 0, n_out); cfg_write(ID, REG_CTRL, 1, g_log2);
    cfg_write(ID, REG_CTRL, 2, opg_log2); cfg_write(ID, REG_CTRL, 3, shift);
    cfg_write(ID, REG_CTRL, 4, 0); cfg_write(ID, REG_CTRL, 5, 1);
    for (int s = 0; s < 8; s++) begin
      if (s > 0) cfg_write(ID, REG_PWL, 3 * s, 0);
      cfg_write(ID, REG_PWL, 3 * s + 1, (s == 0) ? 0 : 16);
      cfg_write(ID, REG_PWL, 3 * s + 2, 0);
    end
    x = new[NPIX * CI];
    foreach (x[n]) x[n] = $urandom_range(0, 255) - 128;
    qd.delete(); qc.delete(); qp.delete(); qt.delete();
    send(x, W * n_out + 2, 1'b1);
    check_eq("outputs (1)", qd.size(), NPIX * n_out);
    for (int n = 0; n < qd.size() && n < NPIX * n_out; n++) begin
      int e;
      e = conv_out(x, n / n_out, n % n_out, g_log2, opg_log2, shift);
      check_eq("channel (1)", qc[n], n % n_out);
      check_eq("value (1)", qd[n], (e < 0) ? 0 : e);
      check_eq("pooled flag (1)", qp[n], 0);
      if (n % n_out != 0) check_eq("one output per cycle", qt[n] - qt[n - 1], 1);
    end
    // ---- (2) global average pooling, 5 outputs, identity activation
    n_out = 5; shift = 7;
    cfg_write(ID, REG_CTRL, 0, n_out); cfg_write(ID, REG_CTRL, 3, shift);
    cfg_write(ID, REG_CTRL, 4, 'hFFFF); cfg_write(ID, REG_CTRL, 5, 0);
    foreach (x[n]) x[n] = $urandom_range(0, 255) - 128;
    qd.delete(); qc.delete(); qp.delete(); qt.delete();
    send(x, n_out + 4);
    check_eq("pooled outputs (2)", qd.size(), n_out);
    for (int o = 0; o < n_out && o < qd.size(); o++) begin
      longint sum, recip;
      sum = 0;
      recip = ((64'd1 << 24) + NPIX / 2) / NPIX;
      for (int p = 0; p < NPIX; p++) sum += conv_out(x, p, o, g_log2, opg_log2, shift);
      check_eq("pooled channel (2)", qc[o], o);
      check_eq("pooled flag (2)", qp[o], 1);
      check_eq("pooled value (2)", qd[o], sat8((sum * recip) >>> 24));
    end
    // ---- (3) pixels faster than the head can take them
    check_eq("no overrun yet", int'(overrun), 0);
    send(x, 0, 1'b1);
    check_eq("overrun flagged", int'(overrun), 1);
    finish_tb();
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
