// sf_top: SemifreddoNet accelerator with one frozen core, two trainable
// cores and a model head (paper Sec. 3, Fig. 1, Fig. 3, Table 1).
//
// Every core has the same hard-wired topology:
//   stem     3x3 conv, stride 2     IMG_W x IMG_H x 3  ->  /2  x C_STEM
//   module 1 down block (+3 frozen regular blocks)     ->  /4  x 2*C_STEM
//   module 2 down block (+3)                           ->  /8  x 4*C_STEM
//   module 3 regular block (+3)                        ->  /8  x 4*C_STEM
//   module 4 down block (+3)                           ->  /16 x 8*C_STEM
// The frozen core runs the first block of each module plus N_REP repeated
// regular blocks, all with hard-wired weights; each trainable core runs only
// the first block of each module, with weights in register files, and
// alpha-blends its result with the frozen core's result of the same block.
// Defaults are the paper's: 640x480 input, 32 stem channels (256 at the
// end), 3 repeats. The trainable cores' final 256-channel maps, side by
// side (512 channels), feed the model head; the frozen core's and both
// trainable cores' final maps are also outputs, for a host that runs its
// own heads.
//
// Streams: one pixel per valid cycle in raster order, no back-pressure.
// The input must leave at least one idle cycle after each line and
// IMG_W+1 idle cycles after each frame (the window generators need them to
// produce the padding positions), and the head needs n_out cycles per head
// pixel on average. The sticky error bits report any violation.
// Head input buffer (this design's choice, the paper does not describe the
// head's input side): every 3x3 window delays its output by one row of its
// own input, so the frozen path (which the trainable cores wait for) lags
// LAG = 23 + 36*N_REP image rows (131 for N_REP = 3). At the end of a frame
// the pipeline drains at full clock speed, so the head lines produced during
// the last LAG image rows arrive at once. The head's buffer holds
// ceil(LAG/16)+1 head lines (400 pixels at the defaults, capped at a frame).
//
// Configuration: the cfg bus reaches every unit (see sf_pkg). Unit IDs:
// core c (0 frozen, 1 and 2 trainable) uses ID c*64 for its stem; frozen
// module s uses 1+10*s .. 10+10*s, trainable module s of core c uses
// c*64+1+5*s .. c*64+5+5*s; the head uses ID_HEAD; ID_CTRL, REG_CTRL idx 0
// bit 0 enables the core shuffle.
module sf_top
  import sf_pkg::*;
#(
  parameter int IMG_W  = 640,
  parameter int IMG_H  = 480,
  parameter int C_STEM = 32,
  parameter int N_REP  = 3,
  // derived
  parameter int C_OUT      = 8 * C_STEM,
  parameter int HEAD_LANES = 8 * C_STEM,
  parameter int HEAD_ROWS  = 16 * C_STEM
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  cfg_t                           cfg,
  // input image stream (signed 8-bit per colour channel)
  input  logic                           in_valid,
  input  act_t [2:0]                     in_pix,
  // backbone feature maps
  output logic                           f_valid,
  output act_t [C_OUT-1:0]               f_feat,
  output logic                           t_valid,
  output act_t [C_OUT-1:0]               t1_feat,
  output act_t [C_OUT-1:0]               t2_feat,
  // model head results
  output logic                           head_valid,
  output logic [$clog2(HEAD_ROWS)-1:0]   head_ch,
  output act_t                           head_data,
  output logic                           head_pooled,
  // sticky errors: [0] stem window overflow, [4:1] module errors,
  // [5] head overrun
  output logic [5:0]                     error
);
  localparam int W1 = (IMG_W + 1) / 2, H1 = (IMG_H + 1) / 2;
  localparam int W2 = (W1 + 1) / 2,    H2 = (H1 + 1) / 2;
  localparam int W3 = (W2 + 1) / 2,    H3 = (H2 + 1) / 2;
  localparam int W4 = (W3 + 1) / 2,    H4 = (H3 + 1) / 2;
  localparam int LAG_ROWS  = 23 + 36 * N_REP;
  localparam int HEAD_BUF  = ((LAG_ROWS + 15) / 16 + 1) * W4 < W4 * H4
                             ? ((LAG_ROWS + 15) / 16 + 1) * W4 : W4 * H4;
  localparam int C1 = C_STEM, C2 = 2 * C_STEM, C3 = 4 * C_STEM, C4 = 8 * C_STEM;

  // ---- global control register
  logic shuffle_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) shuffle_en <= 1'b0;
    else if (cfg.we && cfg.id == ID_CTRL && cfg.region == REG_CTRL && cfg.idx == 0)
      shuffle_en <= cfg.data[0];
  end

  // ---- stems of the three cores
  logic [2:0]       s_valid, s_ovf;
  act_t [C1-1:0]    s_data [3];

  for (genvar c = 0; c < 3; c++) begin : g_stem
    sf_stem_conv #(.C_IN(3), .C_OUT(C1), .W(IMG_W), .H(IMG_H), .STRIDE(2),
                   .FROZEN(c == 0), .SEED(1000), .ID(8'(64 * c))) u_stem (
      .clk, .rst_n, .cfg,
      .in_valid, .in_data(in_pix),
      .out_valid(s_valid[c]), .out_data(s_data[c]), .overflow(s_ovf[c])
    );
  end

  // ---- Semifreddo modules
  logic           m1_fv, m1_tv, m2_fv, m2_tv, m3_fv, m3_tv, m4_fv, m4_tv;
  act_t [C2-1:0]  m1_f, m1_t1, m1_t2;
  act_t [C3-1:0]  m2_f, m2_t1, m2_t2;
  act_t [C3-1:0]  m3_f, m3_t1, m3_t2;
  act_t [C4-1:0]  m4_f, m4_t1, m4_t2;
  logic [3:0]     m_err;

  sf_semifreddo_module #(.C_IN(C1), .W(W1), .H(H1), .DOWN(1'b1), .N_REP(N_REP),
                         .SEED(1), .ID_F(8'h01), .ID_T1(8'h41), .ID_T2(8'h81)) u_m1 (
    .clk, .rst_n, .cfg, .shuffle_en,
    .f_in_valid(s_valid[0]), .f_in(s_data[0]), .f_out_valid(m1_fv), .f_out(m1_f),
    .t_in_valid(s_valid[1]), .t1_in(s_data[1]), .t2_in(s_data[2]),
    .t_out_valid(m1_tv), .t1_out(m1_t1), .t2_out(m1_t2),
    .error(m_err[0]), .sync_level()
  );

  sf_semifreddo_module #(.C_IN(C2), .W(W2), .H(H2), .DOWN(1'b1), .N_REP(N_REP),
                         .SEED(2), .ID_F(8'h0B), .ID_T1(8'h46), .ID_T2(8'h86)) u_m2 (
    .clk, .rst_n, .cfg, .shuffle_en,
    .f_in_valid(m1_fv), .f_in(m1_f), .f_out_valid(m2_fv), .f_out(m2_f),
    .t_in_valid(m1_tv), .t1_in(m1_t1), .t2_in(m1_t2),
    .t_out_valid(m2_tv), .t1_out(m2_t1), .t2_out(m2_t2),
    .error(m_err[1]), .sync_level()
  );

  sf_semifreddo_module #(.C_IN(C3), .W(W3), .H(H3), .DOWN(1'b0), .N_REP(N_REP),
                         .SEED(3), .ID_F(8'h15), .ID_T1(8'h4B), .ID_T2(8'h8B)) u_m3 (
    .clk, .rst_n, .cfg, .shuffle_en,
    .f_in_valid(m2_fv), .f_in(m2_f), .f_out_valid(m3_fv), .f_out(m3_f),
    .t_in_valid(m2_tv), .t1_in(m2_t1), .t2_in(m2_t2),
    .t_out_valid(m3_tv), .t1_out(m3_t1), .t2_out(m3_t2),
    .error(m_err[2]), .sync_level()
  );

  sf_semifreddo_module #(.C_IN(C3), .W(W3), .H(H3), .DOWN(1'b1), .N_REP(N_REP),
                         .SEED(4), .ID_F(8'h1F), .ID_T1(8'h50), .ID_T2(8'h90)) u_m4 (
    .clk, .rst_n, .cfg, .shuffle_en,
    .f_in_valid(m3_fv), .f_in(m3_f), .f_out_valid(m4_fv), .f_out(m4_f),
    .t_in_valid(m3_tv), .t1_in(m3_t1), .t2_in(m3_t2),
    .t_out_valid(m4_tv), .t1_out(m4_t1), .t2_out(m4_t2),
    .error(m_err[3]), .sync_level()
  );

  assign f_valid = m4_fv;
  assign f_feat  = m4_f;
  assign t_valid = m4_tv;
  assign t1_feat = m4_t1;
  assign t2_feat = m4_t2;

  // ---- model head on both trainable cores' maps
  logic head_overrun;
  sf_model_head #(.C_IN(2 * C4), .LANES(HEAD_LANES), .N_ROWS(HEAD_ROWS),
                  .W(W4), .H(H4), .ID(ID_HEAD), .IN_DEPTH(HEAD_BUF)) u_head (
    .clk, .rst_n, .cfg,
    .in_valid(m4_tv), .in_data({m4_t2, m4_t1}),
    .out_valid(head_valid), .out_ch(head_ch), .out_data(head_data),
    .out_pooled(head_pooled), .busy(), .overrun(head_overrun)
  );

  assign error = {head_overrun, m_err, |s_ovf};
endmodule
