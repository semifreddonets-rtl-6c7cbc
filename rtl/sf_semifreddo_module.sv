// sf_semifreddo_module: one Semifreddo module (Fig. 3, Table 1), spanning
// the frozen core and both trainable cores.
//
// Frozen core: a first block (a downscaling block when DOWN = 1, otherwise
// a regular block) followed by N_REP regular blocks, all with hard-wired
// weights. Each trainable core: one block of the same kind as the frozen
// first block, with configurable weights. Both trainable results are alpha
// blended with the output of the frozen first block (y = a*x_f +
// (1-a)*x_t), then optionally exchanged by the core shuffle, and leave as
// the input of the next module's trainable blocks. The frozen stream
// continues through the repeated frozen blocks.
//
// Keeping the cores in step: the trainable input arrives earlier than the
// frozen input (it skipped the previous module's N_REP repeated frozen
// blocks), so it waits in a core-sync FIFO that is popped whenever a frozen
// input pixel enters. The frozen first block and both trainable blocks then
// receive the same pixel in the same cycle, have identical pipelines, and
// deliver aligned results to the blending layers without further buffering.
// SKEW_DEPTH, the FIFO size, covers the latency of N_REP regular blocks
// (about W+16 pixels each). This synchronisation scheme is this design's
// reading of the paper's "keeping both cores in synch with each other in
// the pipeline".
//
// Unit IDs: frozen ID_F+0..3 (first block), ID_F+4+2(k-1), +1 (repeat k);
// trainable ID_T1/ID_T2 +0..3 (block), +4 (alpha blend).
//
// Default size: module 1 of the paper's network (Table 1: 320x240x32 in,
// 160x120x64 out, 3 repeated blocks).
module sf_semifreddo_module
  import sf_pkg::*;
#(
  parameter int          C_IN       = 32,
  parameter int          W          = 320,
  parameter int          H          = 240,
  parameter bit          DOWN       = 1'b1,
  parameter int          N_REP      = 3,
  parameter int unsigned SEED       = 1,
  parameter logic [7:0]  ID_F       = 8'h01,
  parameter logic [7:0]  ID_T1      = 8'h41,
  parameter logic [7:0]  ID_T2      = 8'h81,
  parameter int          SKEW_DEPTH = N_REP * (W + 24) + 16,
  // derived output shape
  parameter int          C_OUT      = DOWN ? 2 * C_IN : C_IN,
  parameter int          W_O        = DOWN ? (W + 1) / 2 : W,
  parameter int          H_O        = DOWN ? (H + 1) / 2 : H
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              shuffle_en,
  // frozen core stream
  input  logic              f_in_valid,
  input  act_t [C_IN-1:0]   f_in,
  output logic              f_out_valid,
  output act_t [C_OUT-1:0]  f_out,
  // trainable core streams (aligned with each other)
  input  logic              t_in_valid,
  input  act_t [C_IN-1:0]   t1_in,
  input  act_t [C_IN-1:0]   t2_in,
  output logic              t_out_valid,
  output act_t [C_OUT-1:0]  t1_out,
  output act_t [C_OUT-1:0]  t2_out,
  output logic              error,
  output logic [$clog2(SKEW_DEPTH+1)-1:0] sync_level
);
  act_t [1:0][C_IN-1:0] t_q;
  logic                 f_q_valid;
  act_t [C_IN-1:0]      f_q;

  // one register on the frozen input: a trainable pixel that arrives in
  // the same cycle as its frozen twin is then already in the FIFO
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_q_valid <= 1'b0;
      f_q       <= '0;
    end else begin
      f_q_valid <= f_in_valid;
      if (f_in_valid) f_q <= f_in;
    end
  end
  logic                 sync_ovf, sync_udf;
  logic [2:0]           blk_err;

  // ---- core-sync FIFO on the trainable streams
  sf_fifo #(.WIDTH(2*C_IN*8), .DEPTH(SKEW_DEPTH)) u_sync (
    .clk, .rst_n,
    .push(t_in_valid), .din({t2_in, t1_in}),
    .pop(f_q_valid), .dout(t_q),
    .empty(), .full(), .level(sync_level),
    .overflow(sync_ovf), .underflow(sync_udf)
  );

  // ---- first blocks: frozen, trainable #1, trainable #2 (lock step)
  logic [2:0]            b_valid;
  act_t [C_OUT-1:0]      b_data [3];
  act_t [C_IN-1:0]       b_in   [3];
  localparam logic [7:0] B_ID [3] = '{ID_F, ID_T1, ID_T2};

  assign b_in[0] = f_q;
  assign b_in[1] = t_q[0];
  assign b_in[2] = t_q[1];

  for (genvar i = 0; i < 3; i++) begin : g_first
    if (DOWN) begin : g_down
      sf_down_block #(.C_IN(C_IN), .W(W), .H(H), .FROZEN(i == 0),
                      .SEED(SEED * 16), .ID_BASE(B_ID[i])) u_blk (
        .clk, .rst_n, .cfg,
        .in_valid(f_q_valid), .in_data(b_in[i]),
        .out_valid(b_valid[i]), .out_data(b_data[i]), .error(blk_err[i])
      );
    end else begin : g_reg
      sf_regular_block #(.C(C_IN), .W(W), .H(H), .FROZEN(i == 0),
                         .SEED(SEED * 16), .ID_BASE(B_ID[i])) u_blk (
        .clk, .rst_n, .cfg,
        .in_valid(f_q_valid), .in_data(b_in[i]),
        .out_valid(b_valid[i]), .out_data(b_data[i]), .error(blk_err[i])
      );
    end
  end

  // ---- alpha blending and core shuffle
  logic             a_valid [2];
  act_t [C_OUT-1:0] a_data  [2];

  for (genvar t = 0; t < 2; t++) begin : g_blend
    sf_alpha_blend #(.C(C_OUT), .ID(B_ID[t+1] + 8'd4)) u_blend (
      .clk, .rst_n, .cfg,
      .in_valid(b_valid[0]), .x_f(b_data[0]), .x_t(b_data[t+1]),
      .out_valid(a_valid[t]), .out_data(a_data[t])
    );
  end

  sf_core_shuffle #(.C(C_OUT)) u_shuffle (
    .en(shuffle_en), .a_in(a_data[0]), .b_in(a_data[1]),
    .a_out(t1_out), .b_out(t2_out)
  );
  assign t_out_valid = a_valid[0];

  // ---- repeated frozen blocks
  logic             r_valid [N_REP+1];
  act_t [C_OUT-1:0] r_data  [N_REP+1];
  logic [N_REP:0]   r_err;

  assign r_valid[0] = b_valid[0];
  assign r_data[0]  = b_data[0];
  assign r_err[0]   = 1'b0;

  for (genvar k = 1; k <= N_REP; k++) begin : g_rep
    sf_regular_block #(.C(C_OUT), .W(W_O), .H(H_O), .FROZEN(1'b1),
                       .SEED(SEED * 16 + k), .ID_BASE(ID_F + 8'(4 + 2 * (k - 1)))) u_blk (
      .clk, .rst_n, .cfg,
      .in_valid(r_valid[k-1]), .in_data(r_data[k-1]),
      .out_valid(r_valid[k]), .out_data(r_data[k]), .error(r_err[k])
    );
  end

  assign f_out_valid = r_valid[N_REP];
  assign f_out       = r_data[N_REP];

  assign error = sync_ovf | sync_udf | (|blk_err) | (|r_err)
               | (b_valid[0] != b_valid[1]) | (b_valid[0] != b_valid[2]);

  // the three first blocks must stay in lock step, and the trainable pixel
  // must be waiting when its frozen twin enters
  always_ff @(posedge clk or negedge rst_n) begin
    if (rst_n) begin
      a_lockstep: assert (b_valid[0] == b_valid[1] && b_valid[0] == b_valid[2]);
      a_sync:     assert (!(f_q_valid && sync_level == 0));
    end
  end
endmodule
