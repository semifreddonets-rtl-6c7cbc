// sf_pkg: types, configuration-bus format and shared arithmetic for the
// SemifreddoNet accelerator.
//
// All weights and feature-map values are 8-bit signed fixed point numbers,
// as in the original design. A feature-map pixel travels through the design
// as a packed vector of act_t, one element per channel, qualified by a
// valid bit (one pixel per valid cycle, raster order, no back-pressure).
//
// Configurable state (trainable weights, batch-norm parameters, alpha
// blending factors, head settings) is written through one broadcast
// configuration bus, cfg_t. Every configurable unit owns an 8-bit unit ID
// and decodes writes whose id matches; the region field selects which of
// its tables is addressed and idx the entry. The bus format, unit IDs and
// region codes are this design's own choice.
//
// Frozen weights are hard-wired constants. The trained values are not
// published, so frozen_weight() derives a deterministic stand-in value from
// a per-layer seed and the weight's indices; a quarter of them are zero,
// which synthesis prunes, as it would prune the zero weights of a trained
// model. Replacing this function with a table of trained values changes no
// other file.
package sf_pkg;

  typedef logic signed [7:0] act_t;   // feature-map value
  typedef logic signed [7:0] wgt_t;   // weight

  // configuration bus (one write per cycle when we = 1)
  typedef struct packed {
    logic        we;
    logic [7:0]  id;      // unit ID
    logic [3:0]  region;  // table inside the unit
    logic [19:0] idx;     // entry inside the table
    logic [31:0] data;
  } cfg_t;

  // region codes
  localparam logic [3:0] REG_WEIGHT   = 4'd0;  // conv / head weights
  localparam logic [3:0] REG_BN_SCALE = 4'd1;  // per-channel BN scale (s16)
  localparam logic [3:0] REG_BN_BIAS  = 4'd2;  // per-channel BN bias (s32)
  localparam logic [3:0] REG_CTRL     = 4'd3;  // per-unit control words
  localparam logic [3:0] REG_ALPHA    = 4'd4;  // alpha blend factors (u9)
  localparam logic [3:0] REG_PWL      = 4'd6;  // piecewise-linear table

  // unit IDs: [7:6] core (0 frozen, 1 trainable #1, 2 trainable #2,
  // 3 shared units), [5:0] unit number inside the core
  localparam logic [7:0] ID_HEAD = 8'hC0;
  localparam logic [7:0] ID_CTRL = 8'hFF;

  localparam int ACC_W = 32;          // accumulator width
  typedef logic signed [ACC_W-1:0] acc_t;

  // saturate to the 8-bit signed range
  function automatic act_t sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return act_t'(8'sd127);
    else if (v < -48'sd128) return act_t'(-8'sd128);
    else                    return act_t'(v[7:0]);
  endfunction

  // stand-in value of a hard-wired weight: seed selects the layer,
  // a and b the weight inside it (e.g. output and input channel)
  function automatic wgt_t frozen_weight(input int unsigned seed,
                                         input int unsigned a,
                                         input int unsigned b);
    int unsigned h;
    h = seed * 32'h9E3779B1 ^ (a + 32'd1) * 32'h85EBCA6B ^ (b + 32'd7) * 32'hC2B2AE35;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    if (h[3:2] == 2'b00) return '0;
    return wgt_t'($signed(h[23:16]) >>> 2);
  endfunction

endpackage
