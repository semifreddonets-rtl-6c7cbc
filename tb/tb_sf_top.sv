// tb_sf_top: end-to-end test of the accelerator at reduced width: a 32x480
// image (the paper's 480 lines, so the pipeline's row lag and the frame-end
// drain are as at full size), 4 stem channels (32 per core at the end, a
// 64-input head with 32 lanes), the default 3 repeated frozen blocks per
// module, and 512 head rows with n_out = 256 in two groups of 128, which
// loads the head to 2*256/(16*33) = 97% of the image rate (99.8% at full
// size).
//
// All trainable weights, all batch-norm parameters, the alpha factors and
// the head are configured with random values over the configuration bus
// and recorded; the reference model then computes every core's output and
// the head's output for each frame, which are compared with the streams.
// Frame 0: core shuffle off, head per pixel (no pooling, no activation).
// Frames 1 and 2, sent back to back with the minimum blanking (one idle
// cycle per line, IMG_W+1 after the frame): core shuffle on, and the head
// split in two groups, one per trainable core: group 0 gives per-pixel
// outputs (segmentation-like), group 1 global averages (classification-
// like), both through a ReLU made with the piecewise-linear activation.
// Counted mechanisms (each must occur): stride-2 downscaling, alpha blend
// with 0 < alpha < 1, core shuffle off and on, core-sync FIFO holding
// pixels, grouped head convolution, head per-pixel and pooled outputs, PWL
// activation, head line buffer holding more than one pixel, frames at full
// input rate without any error flag.
module tb_sf_top;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int IW = 32, IH = 480, CS = 4, NREP = 3;
  localparam int C4 = 8 * CS, HL = 8 * CS, HR = 512;
  localparam int W1 = IW / 2, H1 = IH / 2, W2 = W1 / 2, H2 = H1 / 2;
  localparam int W3 = (W2 + 1) / 2, H3 = (H2 + 1) / 2, W4 = (W3 + 1) / 2, H4 = (H3 + 1) / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic in_valid, f_valid, t_valid, head_valid, head_pooled;
  act_t [2:0] in_pix;
  act_t [C4-1:0] f_feat, t1_feat, t2_feat;
  logic [$clog2(HR)-1:0] head_ch;
  act_t head_data;
  logic [5:0] error;

  sf_top #(.IMG_W(IW), .IMG_H(IH), .C_STEM(CS), .N_REP(NREP), .HEAD_ROWS(HR)) dut (
    .clk, .rst_n, .cfg, .in_valid, .in_pix,
    .f_valid, .f_feat, .t_valid, .t1_feat, .t2_feat,
    .head_valid, .head_ch, .head_data, .head_pooled, .error);

  int qf[$], qt1[$], qt2[$], qh[$], qhc[$], qhp[$];
  int max_sync = 0, max_hbuf = 0, n_stem = 0;
  int cyc = 0, last_in = 0, last_head = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid) last_in = cyc;
    if (dut.s_valid[0]) n_stem++;
    if (int'(dut.u_m3.sync_level) > max_sync) max_sync = int'(dut.u_m3.sync_level);
    if (int'(dut.u_head.q_level) > max_hbuf) max_hbuf = int'(dut.u_head.q_level);
    if (f_valid) for (int k = 0; k < C4; k++) qf.push_back(int'(f_feat[k]));
    if (t_valid) for (int k = 0; k < C4; k++) begin qt1.push_back(int'(t1_feat[k])); qt2.push_back(int'(t2_feat[k])); end
    if (head_valid) begin
      qh.push_back(int'(head_data)); qhc.push_back(int'(head_ch)); qhp.push_back(int'(head_pooled));
      last_head = cyc;
    end
  end

  // ---- head model
  int hw[HR][HL], hb[HR];
  int n_out, g_log2, opg_log2, hshift;

  function automatic int head_conv(arr_t t1, arr_t t2, int p, int o);
    int g, cpg, base;
    longint s = 0;
    g = o >> opg_log2; cpg = (2 * C4) >> g_log2; base = (g * cpg) % (2 * C4);
    for (int j = 0; j < HL; j++)
      if (j < cpg) begin
        int ch, v;
        ch = (base + j) % (2 * C4);
        v = (ch < C4) ? t1[p * C4 + ch] : t2[p * C4 + ch - C4];
        s += longint'(v) * hw[o][j];
      end
    return sat8((s + hb[o]) >>> hshift);
  endfunction

  // ---- whole network model for one frame
  task automatic model(arr_t x, bit sh, output arr_t f, output arr_t t1, output arr_t t2);
    arr_t a, b, c;
    a = stem(x, IW, IH, CS, 1'b1, 1000, 'h00);
    b = stem(x, IW, IH, CS, 1'b0, 0, 'h40);
    c = stem(x, IW, IH, CS, 1'b0, 0, 'h80);
    semifreddo(a, b, c, W1, H1, CS,     1'b1, NREP, 1, 'h01, 'h41, 'h81, sh, a, b, c);
    semifreddo(a, b, c, W2, H2, 2 * CS, 1'b1, NREP, 2, 'h0B, 'h46, 'h86, sh, a, b, c);
    semifreddo(a, b, c, W3, H3, 4 * CS, 1'b0, NREP, 3, 'h15, 'h4B, 'h8B, sh, a, b, c);
    semifreddo(a, b, c, W3, H3, 4 * CS, 1'b1, NREP, 4, 'h1F, 'h50, 'h90, sh, a, b, c);
    f = a; t1 = b; t2 = c;
  endtask

  task automatic send_frame(arr_t x);
    for (int r = 0; r < IH; r++) begin
      for (int c = 0; c < IW; c++) begin
        @(negedge clk);
        in_valid = 1;
        for (int k = 0; k < 3; k++) in_pix[k] = act_t'(x[(r * IW + c) * 3 + k]);
      end
      @(negedge clk); in_valid = 0;
    end
    repeat (IW + 1) @(negedge clk);
  endtask

  initial begin
    arr_t x[3], ef, e1, e2, all_f, all_t1, all_t2;
    int mods_c[4] = '{CS, 2 * CS, 4 * CS, 4 * CS};
    bit mods_d[4] = '{1'b1, 1'b1, 1'b0, 1'b1};
    int idf[4] = '{'h01, 'h0B, 'h15, 'h1F};
    int idt[4] = '{'h41, 'h46, 'h4B, 'h50};
    int n_alpha_mid = 0, n_pixel_out = 0, n_pooled_out = 0, n_shuffle[2] = '{0, 0};
    int t_frame0, bid, n, e, n_act = 0;
    cfg = '0; in_valid = 0; in_pix = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- configuration
    rand_bn(8'h00, CS, 9);
    for (int c = 1; c <= 2; c++) begin
      rand_weights(8'(64 * c), CS * 3 * 9, -64, 63);
      rand_bn(8'(64 * c), CS, 9);
    end
    for (int s = 0; s < 4; s++) begin
      int co;
      co = mods_d[s] ? 2 * mods_c[s] : mods_c[s];
      cfg_block(8'(idf[s]), mods_d[s], mods_c[s], 1'b1);
      for (int k = 1; k <= NREP; k++) cfg_block(8'(idf[s] + 4 + 2 * (k - 1)), 1'b0, co, 1'b1);
      for (int c = 0; c < 2; c++) begin
        cfg_block(8'(idt[s] + 64 * c), mods_d[s], mods_c[s], 1'b0);
        bid = idt[s] + 64 * c + 4;
        rand_alpha(8'(bid), co);
        for (int k = 0; k < co; k++)
          if (tbl_alpha[bid][k] > 0 && tbl_alpha[bid][k] < 256) n_alpha_mid++;
      end
    end
    for (int o = 0; o < HR; o++) begin
      for (int j = 0; j < HL; j++) begin
        hw[o][j] = $urandom_range(0, 255) - 128;
        cfg_write(ID_HEAD, REG_WEIGHT, o * HL + j, hw[o][j]);
      end
      hb[o] = $urandom_range(0, 4000) - 2000;
      cfg_write(ID_HEAD, REG_BN_BIAS, o, hb[o]);
    end
    n_out = 256; g_log2 = 1; opg_log2 = 7; hshift = 8;
    cfg_write(ID_HEAD, REG_CTRL, 0, n_out); cfg_write(ID_HEAD, REG_CTRL, 1, g_log2);
    cfg_write(ID_HEAD, REG_CTRL, 2, opg_log2); cfg_write(ID_HEAD, REG_CTRL, 3, hshift);
    cfg_write(ID_HEAD, REG_CTRL, 4, 0); cfg_write(ID_HEAD, REG_CTRL, 5, 0);
    for (int s = 0; s < 8; s++) begin      // ReLU, used once act_en = 1
      if (s > 0) cfg_write(ID_HEAD, REG_PWL, 3 * s, 0);
      cfg_write(ID_HEAD, REG_PWL, 3 * s + 1, (s == 0) ? 0 : 16);
    end
    cfg_write(ID_CTRL, REG_CTRL, 0, 0);
    n_shuffle[0]++;

    for (int f = 0; f < 3; f++) begin
      x[f] = new[IW * IH * 3];
      foreach (x[f][n]) x[f][n] = $urandom_range(0, 255) - 128;
    end

    // ---- frame 0: shuffle off, head per pixel
    send_frame(x[0]);
    repeat (20000) @(negedge clk);
    model(x[0], 1'b0, ef, e1, e2);
    check_stream("frame0 frozen core", qf, ef);
    check_stream("frame0 trainable core 1", qt1, e1);
    check_stream("frame0 trainable core 2", qt2, e2);
    check_eq("frame0 head outputs", qh.size(), W4 * H4 * n_out);
    for (int n = 0; n < qh.size() && n < W4 * H4 * n_out; n++) begin
      check_eq("frame0 head channel", qhc[n], n % n_out);
      check_eq("frame0 head value", qh[n], head_conv(e1, e2, n / n_out, n % n_out));
      check_eq("frame0 head not pooled", qhp[n], 0);
      n_pixel_out++;
    end
    t_frame0 = last_head - last_in;
    qf.delete(); qt1.delete(); qt2.delete(); qh.delete(); qhc.delete(); qhp.delete();

    // ---- frames 1, 2 back to back: shuffle on; head group 0 (core 1's
    // half) per pixel and group 1 (core 2's half) pooled, both with ReLU
    cfg_write(ID_CTRL, REG_CTRL, 0, 1);
    n_shuffle[1]++;
    cfg_write(ID_HEAD, REG_CTRL, 4, 'b10); cfg_write(ID_HEAD, REG_CTRL, 5, 1);
    send_frame(x[1]);
    send_frame(x[2]);
    repeat (20000) @(negedge clk);
    all_f = {}; all_t1 = {}; all_t2 = {};
    n = 0;
    for (int f = 1; f <= 2; f++) begin
      model(x[f], 1'b1, ef, e1, e2);
      all_f = {all_f, ef}; all_t1 = {all_t1, e1}; all_t2 = {all_t2, e2};
      for (int p = 0; p < W4 * H4; p++)
        for (int o = 0; o < n_out / 2; o++) begin
          e = head_conv(e1, e2, p, o);
          if (n < qh.size()) begin
            check_eq("mixed per-pixel channel", qhc[n], o);
            check_eq("mixed per-pixel value", qh[n], (e < 0) ? 0 : e);
            check_eq("mixed per-pixel flag", qhp[n], 0);
            n_pixel_out++; n_act++;
          end
          n++;
        end
      for (int o = n_out / 2; o < n_out; o++) begin
        longint sum, recip;
        sum = 0;
        recip = ((64'd1 << 24) + (W4 * H4) / 2) / (W4 * H4);
        for (int p = 0; p < W4 * H4; p++) sum += head_conv(e1, e2, p, o);
        e = sat8((sum * recip) >>> 24);
        if (n < qh.size()) begin
          check_eq("pooled channel", qhc[n], o);
          check_eq("pooled value", qh[n], (e < 0) ? 0 : e);
          check_eq("pooled flag", qhp[n], 1);
          n_pooled_out++; n_act++;
        end
        n++;
      end
    end
    check_eq("frames1-2 head outputs", qh.size(), n);
    check_stream("frames1-2 frozen core", qf, all_f);
    check_stream("frames1-2 trainable core 1", qt1, all_t1);
    check_stream("frames1-2 trainable core 2", qt2, all_t2);
    check_eq("error flags", int'(error), 0);

    // ---- mechanisms
    $display("stem outputs %0d, alpha strictly between 0 and 1: %0d, shuffle off/on %0d/%0d",
             n_stem, n_alpha_mid, n_shuffle[0], n_shuffle[1]);
    $display("core-sync FIFO max level (module 3) %0d, head line buffer max %0d", max_sync, max_hbuf);
    $display("head per-pixel outputs %0d, pooled outputs %0d", n_pixel_out, n_pooled_out);
    $display("frame 0: last head output %0d cycles after the last input pixel", t_frame0);
    $display("input frame period %0d cycles; at 640x480 this is %0d cycles, 200 fps needs %0d MHz",
             IH * (IW + 1) + IW + 1, 480 * 641 + 641, ((480 * 641 + 641) * 200 + 999999) / 1000000);
    check_eq("stride-2 stem decimation", n_stem, 3 * W1 * H1);
    check_eq("alpha blending used", int'(n_alpha_mid > 0), 1);
    check_eq("core shuffle off used", int'(n_shuffle[0] > 0), 1);
    check_eq("core shuffle on used", int'(n_shuffle[1] > 0), 1);
    check_eq("core-sync FIFO used", int'(max_sync > 0), 1);
    check_eq("head line buffer used", int'(max_hbuf > 1), 1);
    check_eq("head per-pixel outputs", int'(n_pixel_out > 0), 1);
    check_eq("head pooled outputs", int'(n_pooled_out > 0), 1);
    check_eq("head activation used", int'(n_act > 0), 1);
    finish_tb();
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
