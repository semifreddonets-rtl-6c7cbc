// tb_sf_fifo: checks the FIFO against a queue model under random push/pop
// traffic, including simultaneous push and pop, full and empty, the level
// output and the sticky overflow and underflow flags.
module tb_sf_fifo;
  localparam int WD = 12, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sf_pkg::cfg_t cfg;
  `include "tb_common.svh"

  logic push, pop, empty, full, ovf, udf;
  logic [WD-1:0] din, dout;
  logic [$clog2(D+1)-1:0] level;
  int model[$];

  sf_fifo #(.WIDTH(WD), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full,
                                       .level, .overflow(ovf), .underflow(udf));
  initial begin
    int n_full = 0;
    push = 0; pop = 0; din = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      check_eq("level", int'(level), model.size());
      check_eq("empty", int'(empty), int'(model.size() == 0));
      check_eq("full", int'(full), int'(model.size() == D));
      if (model.size() > 0) check_eq("dout", int'(dout), model[0]);
      if (full) n_full++;
      push = ($urandom_range(0, 99) < 55) && (model.size() < D || $urandom_range(0, 1) == 0);
      pop  = ($urandom_range(0, 99) < 45) && model.size() > 0;
      din  = WD'($urandom);
      if (push && model.size() == D && !pop) push = 0;   // keep the model exact
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(int'(din));
    end
    check_eq("reached full", int'(n_full > 0), 1);
    check_eq("no overflow yet", int'(ovf), 0);
    // now force an overflow and an underflow
    @(negedge clk); push = 0; pop = 0;
    while (!full) begin @(negedge clk); push = 1; din = 1; @(posedge clk); #1; push = 0; end
    @(negedge clk); push = 1; @(negedge clk); push = 0;
    check_eq("overflow", int'(ovf), 1);
    while (!empty) begin @(negedge clk); pop = 1; @(posedge clk); #1; pop = 0; end
    @(negedge clk); pop = 1; @(negedge clk); pop = 0;
    check_eq("underflow", int'(udf), 1);
    finish_tb();
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL watchdog"); finish_tb();
  end
endmodule
