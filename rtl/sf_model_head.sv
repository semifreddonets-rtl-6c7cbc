// sf_model_head: the multi-purpose model head (paper Sec. 3.3), which turns
// backbone feature maps into task outputs without help from a host.
//
// It is a pointwise (1x1) convolution with a configurable number of outputs
// n_out (1..N_ROWS), an optional global average pooling and a configurable
// piecewise-linear activation. The weight memory holds N_ROWS x LANES =
// 512 x 256 = 131072 weights, the paper's limit. Row o holds the weights of
// output o. Grouped convolution: with G = 2^g_log2 groups, each group sees
// C_IN/G consecutive input channels (at most LANES) and produces 2^opg_log2
// consecutive outputs, so output o uses the inputs of group o >> opg_log2.
// With the default C_IN = 512 (the 256-channel maps of both trainable cores
// side by side) and G = 2, one group classifies from core #1 and the other
// from core #2: 2 x 256 outputs x 256 weights = 131072, the paper's example.
//
// Operation: a feature pixel (C_IN channels) is latched; then one output per
// cycle is computed as a LANES-wide dot product with one weight row, plus a
// per-output bias, and requantised: y = sat8((dot + bias[o]) >>> shift).
// Without pooling y goes through the activation and out, tagged with o.
// With pooling, y is added to a per-output running sum; after the last
// pixel of the W x H frame the sums are scaled by round(2^24/(W*H)) >>> 24
// (the average), sent through the activation and out, and cleared.
// Pixels wait in an input buffer (a FIFO of IN_DEPTH pixels); a pixel that
// finds it full is dropped and sets the sticky overrun flag. Computing one
// output per cycle is this design's choice. At one image pixel per cycle
// the 16x downscaled map delivers on average one head pixel per 256 image
// cycles, 16*641 = 10256 cycles per head line of 40 pixels at 640x480,
// enough for n_out = 256 outputs per pixel (10240 cycles). Arrivals are
// bursty, though: a head line arrives within one image line, and at the end
// of a frame the backbone drains its last rows at full clock speed, so all
// head lines still in flight arrive together. sf_top sizes IN_DEPTH for
// that drain; the default here is one head line.
// Configuration (unit ID): REG_WEIGHT idx = row*LANES + lane; REG_BN_BIAS
// idx = row; REG_CTRL idx 0 n_out, 1 g_log2, 2 opg_log2, 3 shift,
// 4 pool_mask, 5 act_en; REG_PWL as in sf_pwl_act. pool_mask bit g
// (g < 16) enables pooling for the outputs of group g, so one group can
// classify the whole image while another segments it per pixel, as in the
// paper's example of 256 scene classes and 256 object types at once; the
// per-group mask is this design's choice.
module sf_model_head
  import sf_pkg::*;
#(
  parameter int         C_IN   = 512,
  parameter int         LANES  = 256,
  parameter int         N_ROWS = 512,
  parameter int         W      = 40,
  parameter int         H      = 30,
  parameter int         NSEG   = 8,
  parameter logic [7:0] ID     = ID_HEAD,
  parameter int         IN_DEPTH = W,
  parameter int         TAGW   = $clog2(N_ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  input  act_t [C_IN-1:0]  in_data,
  output logic             out_valid,
  output logic [TAGW-1:0]  out_ch,
  output act_t             out_data,
  output logic             out_pooled,   // out_data is a pooled average
  output logic             busy,
  output logic             overrun
);
  localparam int NPIX  = W * H;
  localparam int PCW   = $clog2(NPIX + 1);
  localparam int RS    = 24;
  localparam longint RECIP = ((64'd1 << RS) + NPIX / 2) / NPIX;
  localparam int CINL  = $clog2(C_IN);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_POOL} state_t;

  // ---- configuration
  logic [LANES-1:0][7:0] wmem [N_ROWS];
  logic signed [31:0]    bias [N_ROWS];
  logic [TAGW:0]         n_out;
  logic [3:0]            g_log2, opg_log2;
  logic [4:0]            shift;
  logic [15:0]           pool_mask;
  logic                  act_en;

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.id == ID && cfg.region == REG_WEIGHT && cfg.idx < N_ROWS*LANES)
      wmem[cfg.idx / LANES][cfg.idx % LANES] <= cfg.data[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_ROWS; o++) bias[o] <= '0;
      n_out    <= (TAGW+1)'(N_ROWS);
      g_log2   <= '0;
      opg_log2 <= 4'(TAGW);
      shift    <= '0;
      pool_mask <= '0;
      act_en   <= 1'b0;
    end else if (cfg.we && cfg.id == ID) begin
      if (cfg.region == REG_BN_BIAS && cfg.idx < N_ROWS) bias[cfg.idx] <= cfg.data;
      if (cfg.region == REG_CTRL) begin
        case (cfg.idx)
          0: n_out    <= cfg.data[TAGW:0];
          1: g_log2   <= cfg.data[3:0];
          2: opg_log2 <= cfg.data[3:0];
          3: shift    <= cfg.data[4:0];
          4: pool_mask <= cfg.data[15:0];
          5: act_en   <= cfg.data[0];
          default: ;
        endcase
      end
    end
  end

  // output o is pooled when its group's bit is set in pool_mask
  function automatic logic pooled(input logic [TAGW-1:0] oi);
    return pool_mask[4'(int'(oi) >> opg_log2)];
  endfunction

  // ---- input line buffer
  act_t [C_IN-1:0]  q_data;
  logic             q_empty, q_pop, q_udf_unused;
  logic [$clog2(IN_DEPTH+1)-1:0] q_level;

  sf_fifo #(.WIDTH(C_IN*8), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .push(in_valid), .din(in_data),
    .pop(q_pop), .dout(q_data),
    .empty(q_empty), .full(), .level(q_level),
    .overflow(overrun), .underflow(q_udf_unused)
  );

  // ---- sequencing
  state_t           state;
  act_t [C_IN-1:0]  x;
  logic [TAGW-1:0]  o;
  logic [PCW-1:0]   pix_cnt;
  logic             last_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      x        <= '0;
      o        <= '0;
      pix_cnt  <= '0;
      last_pix <= 1'b0;
    end else begin
      if (q_pop) pix_cnt <= (pix_cnt == PCW'(NPIX - 1)) ? '0 : pix_cnt + 1'b1;
      case (state)
        S_IDLE: if (!q_empty) begin
          x        <= q_data;
          o        <= '0;
          last_pix <= (pix_cnt == PCW'(NPIX - 1));
          state    <= S_RUN;
        end
        S_RUN: begin
          if ({1'b0, o} == n_out - 1'b1) begin
            o     <= '0;
            state <= (|pool_mask && last_pix) ? S_DRAIN : S_IDLE;
          end else begin
            o <= o + 1'b1;
          end
        end
        S_DRAIN: state <= S_POOL;
        S_POOL: begin
          if ({1'b0, o} == n_out - 1'b1) begin
            o     <= '0;
            state <= S_IDLE;
          end else begin
            o <= o + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy  = (state != S_IDLE) || !q_empty;
  assign q_pop = (state == S_IDLE) && !q_empty;

  // ---- stage 1: dot product of one weight row with the group's inputs
  logic            s1_valid;
  logic [TAGW-1:0] s1_o;
  acc_t            s1_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_o     <= '0;
      s1_acc   <= '0;
    end else begin
      s1_valid <= (state == S_RUN);
      if (state == S_RUN) begin
        int   grp, cpg, base;
        acc_t s;
        grp  = int'(o) >> opg_log2;
        cpg  = C_IN >> g_log2;
        base = (grp * cpg) % C_IN;
        s    = '0;
        for (int j = 0; j < LANES; j++)
          if (j < cpg)
            s += acc_t'(x[(base + j) % C_IN]) * acc_t'($signed(wmem[o][j]));
        s1_o   <= o;
        s1_acc <= s;
      end
    end
  end

  // ---- stage 2: bias and requantisation; pooling sums; pooled averages
  logic signed [31:0] pool_acc [N_ROWS];
  logic               a_valid;
  act_t               a_data;
  logic [TAGW-1:0]    a_tag;
  logic               a_pooled;
  act_t               y;

  always_comb y = sat8(48'(($signed(48'(s1_acc)) + 48'(bias[s1_o])) >>> shift));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_ROWS; k++) pool_acc[k] <= '0;
      a_valid    <= 1'b0;
      a_data     <= '0;
      a_tag      <= '0;
      a_pooled   <= 1'b0;
    end else begin
      a_valid <= 1'b0;
      if (s1_valid) begin
        if (pooled(s1_o)) begin
          pool_acc[s1_o] <= pool_acc[s1_o] + 32'(y);
        end else begin
          a_valid    <= 1'b1;
          a_data     <= y;
          a_tag      <= s1_o;
          a_pooled   <= 1'b0;
        end
      end else if (state == S_POOL && pooled(o)) begin
        a_valid    <= 1'b1;
        a_data     <= sat8(48'((64'(pool_acc[o]) * RECIP) >>> RS));
        a_tag      <= o;
        a_pooled   <= 1'b1;
        pool_acc[o] <= '0;
      end
    end
  end

  // ---- activation
  sf_pwl_act #(.NSEG(NSEG), .ID(ID), .TAGW(TAGW + 1)) u_act (
    .clk, .rst_n, .cfg, .en(act_en),
    .in_valid(a_valid), .in_data(a_data), .in_tag({a_pooled, a_tag}),
    .out_valid, .out_data, .out_tag({out_pooled, out_ch})
  );
endmodule
