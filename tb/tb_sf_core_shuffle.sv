// tb_sf_core_shuffle: checks that the cross-core shuffle exchanges the
// upper half of the channels of the two trainable streams when enabled and
// passes both streams unchanged when disabled.
module tb_sf_core_shuffle;
  import sf_pkg::*;
  localparam int C = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  `include "tb_common.svh"

  logic en;
  act_t [C-1:0] a, b, ao, bo;
  sf_core_shuffle #(.C(C)) dut (.en, .a_in(a), .b_in(b), .a_out(ao), .b_out(bo));

  initial begin
    for (int t = 0; t < 200; t++) begin
      en = t[0];
      for (int k = 0; k < C; k++) begin
        a[k] = act_t'($urandom); b[k] = act_t'($urandom);
      end
      #1;
      for (int k = 0; k < C; k++) begin
        if (en && k >= C / 2) begin
          check_eq("a swapped", int'(ao[k]), int'(b[k]));
          check_eq("b swapped", int'(bo[k]), int'(a[k]));
        end else begin
          check_eq("a kept", int'(ao[k]), int'(a[k]));
          check_eq("b kept", int'(bo[k]), int'(b[k]));
        end
      end
      @(negedge clk);
    end
    finish_tb();
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
