// tb_sf_semifreddo_module: checks a whole Semifreddo module, one with a
// downscaling first block and one with a regular first block, each with 2
// repeated frozen blocks, against the reference model: frozen output,
// both trainable outputs after alpha blending and core shuffle.
// Frame 0: the trainable streams arrive a whole frame before the frozen one
// (the core-sync FIFO must hold them), core shuffle off. Frame 1: all three
// streams arrive together, core shuffle on. Counts that the FIFO held data
// and that both shuffle settings were exercised.
module tb_sf_semifreddo_module;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int C = 4, W = 6, H = 4, NR = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic shuffle_en, fv, tv;
  act_t [C-1:0] f_in, t1_in, t2_in;
  logic afv, atv, ae, bfv, btv, be;
  act_t [2*C-1:0] af, at1, at2;
  act_t [C-1:0] bf, bt1, bt2;
  int qaf[$], qat1[$], qat2[$], qbf[$], qbt1[$], qbt2[$];
  int max_level = 0;
  logic [$clog2(NR*(W+24)+17)-1:0] alevel, blevel;

  sf_semifreddo_module #(.C_IN(C), .W(W), .H(H), .DOWN(1'b1), .N_REP(NR), .SEED(1),
    .ID_F(8'h01), .ID_T1(8'h41), .ID_T2(8'h81)) dut_a (
    .clk, .rst_n, .cfg, .shuffle_en,
    .f_in_valid(fv), .f_in, .f_out_valid(afv), .f_out(af),
    .t_in_valid(tv), .t1_in, .t2_in, .t_out_valid(atv), .t1_out(at1), .t2_out(at2),
    .error(ae), .sync_level(alevel));
  sf_semifreddo_module #(.C_IN(C), .W(W), .H(H), .DOWN(1'b0), .N_REP(NR), .SEED(2),
    .ID_F(8'h11), .ID_T1(8'h51), .ID_T2(8'h91)) dut_b (
    .clk, .rst_n, .cfg, .shuffle_en,
    .f_in_valid(fv), .f_in, .f_out_valid(bfv), .f_out(bf),
    .t_in_valid(tv), .t1_in, .t2_in, .t_out_valid(btv), .t1_out(bt1), .t2_out(bt2),
    .error(be), .sync_level(blevel));

  always @(posedge clk) if (rst_n) begin
    if (int'(alevel) > max_level) max_level = int'(alevel);
    if (afv) for (int k = 0; k < 2 * C; k++) qaf.push_back(int'(af[k]));
    if (atv) for (int k = 0; k < 2 * C; k++) begin qat1.push_back(int'(at1[k])); qat2.push_back(int'(at2[k])); end
    if (bfv) for (int k = 0; k < C; k++) qbf.push_back(int'(bf[k]));
    if (btv) for (int k = 0; k < C; k++) begin qbt1.push_back(int'(bt1[k])); qbt2.push_back(int'(bt2[k])); end
  end

  task automatic send(arr_t x, bit frozen_stream, bit trainable_stream, arr_t y1, arr_t y2);
    for (int r = 0; r < H; r++) begin
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        fv = frozen_stream; tv = trainable_stream;
        for (int k = 0; k < C; k++) begin
          f_in[k]  = act_t'(x[(r * W + c) * C + k]);
          t1_in[k] = act_t'(y1[(r * W + c) * C + k]);
          t2_in[k] = act_t'(y2[(r * W + c) * C + k]);
        end
      end
      @(negedge clk); fv = 0; tv = 0;
    end
    repeat (W + 4) @(negedge clk);
  endtask

  initial begin
    arr_t x, x1, x2, ef, e1, e2;
    int n_shuffle[2] = '{0, 0};
    cfg = '0; fv = 0; tv = 0; f_in = '0; t1_in = '0; t2_in = '0; shuffle_en = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // module A: down; frozen BN for first block + repeats, trainable blocks
    cfg_block(8'h01, 1'b1, C, 1'b1);
    for (int k = 1; k <= NR; k++) cfg_block(8'h01 + 8'(4 + 2 * (k - 1)), 1'b0, 2 * C, 1'b1);
    cfg_block(8'h41, 1'b1, C, 1'b0); cfg_block(8'h81, 1'b1, C, 1'b0);
    rand_alpha(8'h45, 2 * C); rand_alpha(8'h85, 2 * C);
    // module B: regular
    cfg_block(8'h11, 1'b0, C, 1'b1);
    for (int k = 1; k <= NR; k++) cfg_block(8'h11 + 8'(4 + 2 * (k - 1)), 1'b0, C, 1'b1);
    cfg_block(8'h51, 1'b0, C, 1'b0); cfg_block(8'h91, 1'b0, C, 1'b0);
    rand_alpha(8'h55, C); rand_alpha(8'h95, C);

    for (int f = 0; f < 2; f++) begin
      bit sh;
      sh = (f == 1);
      shuffle_en = sh;
      n_shuffle[sh]++;
      x = new[W * H * C]; x1 = new[W * H * C]; x2 = new[W * H * C];
      foreach (x[n]) begin
        x[n] = $urandom_range(0, 127); x1[n] = $urandom_range(0, 127); x2[n] = $urandom_range(0, 127);
      end
      qaf.delete(); qat1.delete(); qat2.delete(); qbf.delete(); qbt1.delete(); qbt2.delete();
      if (f == 0) begin
        send(x, 1'b0, 1'b1, x1, x2);   // trainable streams first
        send(x, 1'b1, 1'b0, x1, x2);   // frozen stream a frame later
      end else begin
        send(x, 1'b1, 1'b1, x1, x2);
      end
      repeat (4 * (W + 20)) @(negedge clk);
      semifreddo(x, x1, x2, W, H, C, 1'b1, NR, 1, 'h01, 'h41, 'h81, sh, ef, e1, e2);
      check_stream($sformatf("A frozen f%0d", f), qaf, ef);
      check_stream($sformatf("A t1 f%0d", f), qat1, e1);
      check_stream($sformatf("A t2 f%0d", f), qat2, e2);
      semifreddo(x, x1, x2, W, H, C, 1'b0, NR, 2, 'h11, 'h51, 'h91, sh, ef, e1, e2);
      check_stream($sformatf("B frozen f%0d", f), qbf, ef);
      check_stream($sformatf("B t1 f%0d", f), qbt1, e1);
      check_stream($sformatf("B t2 f%0d", f), qbt2, e2);
    end
    check_eq("errors", int'(ae | be), 0);
    check_eq("sync FIFO held a frame", int'(max_level >= W * H), 1);
    check_eq("shuffle off used", int'(n_shuffle[0] > 0), 1);
    check_eq("shuffle on used", int'(n_shuffle[1] > 0), 1);
    $display("sync FIFO max level %0d, shuffle off/on frames %0d/%0d", max_level, n_shuffle[0], n_shuffle[1]);
    finish_tb();
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
