// sf_pwl_act: configurable activation function of the model head,
// approximating an arbitrary activation as a piecewise linear function
// (paper Sec. 3.3).
//
// NSEG segments. Segment 0 covers x < bp[1], segment s covers
// bp[s] <= x < bp[s+1], the last one x >= bp[NSEG-1]; breakpoints must be
// ascending. In segment s: y = sat8((slope[s] * x) >>> 4 + icpt[s]), slope
// in signed Q4.4, intercept a signed 16-bit integer. The segment count and
// number formats are this design's choice. Configuration at unit ID,
// region REG_PWL: idx = 3*s + 0 breakpoint (s >= 1), 3*s + 1 slope,
// 3*s + 2 intercept. Reset: slope 1.0, intercept 0, i.e. the identity.
// With en = 0 the input passes unchanged.
//
// Timing: one register stage.
module sf_pwl_act
  import sf_pkg::*;
#(
  parameter int         NSEG = 8,
  parameter logic [7:0] ID   = 8'd0,
  parameter int         TAGW = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,
  input  logic            en,
  input  logic            in_valid,
  input  act_t            in_data,
  input  logic [TAGW-1:0] in_tag,     // carried along (channel number)
  output logic            out_valid,
  output act_t            out_data,
  output logic [TAGW-1:0] out_tag
);
  act_t               bp    [NSEG];
  logic signed [7:0]  slope [NSEG];
  logic signed [15:0] icpt  [NSEG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSEG; s++) begin
        bp[s]    <= act_t'(-8'sd128);
        slope[s] <= 8'sd16;
        icpt[s]  <= '0;
      end
    end else if (cfg.we && cfg.id == ID && cfg.region == REG_PWL && cfg.idx < 3*NSEG) begin
      case (cfg.idx % 3)
        0:       bp[cfg.idx / 3]    <= cfg.data[7:0];
        1:       slope[cfg.idx / 3] <= cfg.data[7:0];
        default: icpt[cfg.idx / 3]  <= cfg.data[15:0];
      endcase
    end
  end

  function automatic act_t pwl(input act_t x);
    int seg;
    logic signed [47:0] v;
    seg = 0;
    for (int s = 1; s < NSEG; s++)
      if (x >= bp[s]) seg = s;
    v = ((48'(x) * 48'(slope[seg])) >>> 4) + 48'(icpt[seg]);
    return sat8(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= en ? pwl(in_data) : in_data;
        out_tag  <= in_tag;
      end
    end
  end
endmodule
