// sf_window3x3: 3x3 sliding-window generator for a raster-order pixel
// stream, with zero padding of one pixel on every side and stride 1 or 2.
//
// The generator walks a grid of (H+1) x (W+1) positions per frame. Positions
// with row < H and column < W consume one input pixel from a small input
// FIFO; the extra column (column W) and extra row (row H) are "virtual"
// positions that take a cycle each and feed zeros, which provides the right
// and bottom padding and flushes the last row without needing input. Two
// line buffers of W+1 pixels hold the two previous rows. After position
// (R, C) the window centred on output pixel (R-1, C-1) is complete and is
// presented the next cycle; with STRIDE = 2 only centres with even row and
// column are presented, so the output is ceil(W/2) x ceil(H/2).
//
// Interface: in_valid/in_data, no back-pressure. win[row][col] with row 0 =
// above the centre, col 0 = left of it. The stream must leave, per frame, at
// least one idle cycle per line and W+1 idle cycles after the last pixel for
// the virtual positions; otherwise the input FIFO fills and the sticky
// overflow flag is set. These blanking rules and the line-buffer
// organisation are this design's own; the paper only states that images
// arrive line by line in raster order.
//
// Default size: the depthwise window of a regular block in module 3 of the
// paper's network (Table 1: 80x60 maps, 64 channels per branch).
module sf_window3x3
  import sf_pkg::*;
#(
  parameter int C          = 64,
  parameter int W          = 80,
  parameter int H          = 60,
  parameter int STRIDE     = 1,
  parameter int FIFO_DEPTH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  act_t [C-1:0]              in_data,
  output logic                      win_valid,
  output act_t [2:0][2:0][C-1:0]    win,
  output logic [$clog2(H+1)-1:0]    win_row,   // centre row
  output logic [$clog2(W+1)-1:0]    win_col,   // centre column
  output logic                      overflow
);
  localparam int RW = $clog2(H + 1);
  localparam int CW = $clog2(W + 1);

  logic [RW-1:0] pr;
  logic [CW-1:0] pc;
  logic          virt, fifo_empty, step, underflow_unused;
  act_t [C-1:0]  fifo_dout, pix, top, mid;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level_unused;

  act_t [C-1:0]  lb0 [W+1];   // row pr-1
  act_t [C-1:0]  lb1 [W+1];   // row pr-2
  act_t [2:0][C-1:0] col0, col1, col2;  // window columns, col2 newest
  logic          left_pad;

  sf_fifo #(.WIDTH(C*8), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .push(in_valid), .din(in_data),
    .pop(step && !virt), .dout(fifo_dout),
    .empty(fifo_empty), .full(), .level(fifo_level_unused),
    .overflow, .underflow(underflow_unused)
  );

  assign virt = (pr == RW'(H)) || (pc == CW'(W));
  assign step = virt || !fifo_empty;
  assign pix  = virt ? '0 : fifo_dout;
  assign mid  = (pr >= 1) ? lb0[pc] : '0;
  assign top  = (pr >= 2) ? lb1[pc] : '0;

  always_ff @(posedge clk) begin
    if (step) begin
      lb1[pc] <= lb0[pc];
      lb0[pc] <= pix;
      col0    <= col1;
      col1    <= col2;
      col2    <= {pix, mid, top};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr        <= '0;
      pc        <= '0;
      win_valid <= 1'b0;
      left_pad  <= 1'b0;
      win_row   <= '0;
      win_col   <= '0;
    end else begin
      win_valid <= 1'b0;
      if (step) begin
        // window centre after this step is (pr-1, pc-1)
        win_valid <= (pr >= 1) && (pc >= 1) &&
                     (STRIDE == 1 || (pr[0] == 1'b1 && pc[0] == 1'b1));
        left_pad  <= (pc == 1);
        win_row   <= pr - 1'b1;
        win_col   <= pc - 1'b1;
        if (pc == CW'(W)) begin
          pc <= '0;
          pr <= (pr == RW'(H)) ? '0 : pr + 1'b1;
        end else begin
          pc <= pc + 1'b1;
        end
      end
    end
  end

  // win[row][col]; col2 holds rows {bottom, middle, top} = {[2],[1],[0]}
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      win[r][0] = left_pad ? '0 : col0[r];
      win[r][1] = col1[r];
      win[r][2] = col2[r];
    end
  end
endmodule
