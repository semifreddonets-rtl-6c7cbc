// tb_sf_pwl_act: checks the piecewise-linear activation: reset identity,
// bypass when disabled, a ReLU, a leaky ReLU and a random 8-segment
// function, all against a reference evaluation for every 8-bit input;
// also checks that the tag travels with the value.
module tb_sf_pwl_act;
  import sf_pkg::*;
  import sf_ref_pkg::*;
  localparam int NSEG = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic en, in_valid, out_valid;
  act_t x, y;
  logic [9:0] tag_i, tag_o;
  int bp[NSEG], sl[NSEG], ic[NSEG];

  sf_pwl_act #(.NSEG(NSEG), .ID(8'd11)) dut (.clk, .rst_n, .cfg, .en, .in_valid, .in_data(x),
    .in_tag(tag_i), .out_valid, .out_data(y), .out_tag(tag_o));

  function automatic int ref_pwl(int v);
    int s = 0;
    for (int k = 1; k < NSEG; k++) if (v >= bp[k]) s = k;
    return sat8(((longint'(v) * sl[s]) >>> 4) + ic[s]);
  endfunction

  task automatic sweep(string what, bit use_en);
    for (int v = -128; v < 128; v++) begin
      @(negedge clk);
      en = use_en; in_valid = 1; x = act_t'(v); tag_i = 10'(v + 300);
      @(negedge clk);
      in_valid = 0;
      check_eq({what, " valid"}, int'(out_valid), 1);
      check_eq({what, " tag"}, int'(tag_o), v + 300);
      check_eq(what, int'(y), use_en ? ref_pwl(v) : v);
    end
  endtask

  task automatic load();
    for (int s = 0; s < NSEG; s++) begin
      if (s > 0) cfg_write(8'd11, REG_PWL, 3 * s, bp[s]);
      cfg_write(8'd11, REG_PWL, 3 * s + 1, sl[s]);
      cfg_write(8'd11, REG_PWL, 3 * s + 2, ic[s]);
    end
  endtask

  initial begin
    cfg = '0; en = 0; in_valid = 0; x = 0; tag_i = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSEG; s++) begin bp[s] = -128; sl[s] = 16; ic[s] = 0; end
    sweep("identity", 1'b1);
    // ReLU: segment 0 below 0 is flat zero, the others identity
    for (int s = 0; s < NSEG; s++) begin bp[s] = 0; sl[s] = (s == 0) ? 0 : 16; ic[s] = 0; end
    load(); sweep("relu", 1'b1);
    // leaky ReLU, slope 1/8 below zero
    for (int s = 0; s < NSEG; s++) begin bp[s] = 0; sl[s] = (s == 0) ? 2 : 16; ic[s] = 0; end
    load(); sweep("leaky", 1'b1);
    sweep("bypass", 1'b0);
    // random ascending breakpoints
    bp[0] = -128;
    for (int s = 1; s < NSEG; s++) bp[s] = -128 + s * 32 - $urandom_range(0, 20);
    for (int s = 0; s < NSEG; s++) begin sl[s] = $urandom_range(0, 80) - 40; ic[s] = $urandom_range(0, 100) - 50; end
    load(); sweep("random", 1'b1);
    finish_tb();
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
