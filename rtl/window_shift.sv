// window_shift -- flip-flop shift register that forms 3x3xC windows.
//
// Each cycle the line buffer delivers one 1x3xC column. Two columns are
// kept in flip-flops; together with the incoming one they form a 3x3xC
// window, so the convolution window slides along the row without reading
// any pixel from SRAM twice. The column of slot (r, c) completes the window
// centred on (r-2, c-1); the window centred on the last column of a row is
// completed at the first slot of the next row, with a zero column as its
// right padding, and the window at column 0 gets a zero column as its left
// padding.
//
// Stride: windows are only passed on at TensorFlow 'SAME' centre positions.
// For stride 1 that is every pixel; for stride 2 on an even size it is every
// odd position (padding only on the bottom and right), as TensorFlow does.
//
// Interface: adv, col_valid/col/col_r/col_c from the line buffer ->
// win_valid, win[ky][kx], and the window centre win_y/win_x. Timing: the
// window is combinational from the registers and the current column; the
// shift happens on the clock edge on which adv and col_valid are high.
module window_shift #(
  parameter int W      = 224,
  parameter int H      = 224,
  parameter int C      = 3,
  parameter int STRIDE = 1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       adv,
  input  logic                                       col_valid,
  input  logic [2:0][C-1:0][fixynn_pkg::ACT_W-1:0]   col,
  input  logic [$clog2(H+3)-1:0]                     col_r,
  input  logic [$clog2(W)-1:0]                       col_c,
  output logic                                       win_valid,
  output logic [2:0][2:0][C-1:0][fixynn_pkg::ACT_W-1:0] win,
  output logic [15:0]                                win_y,
  output logic [15:0]                                win_x
);
  import fixynn_pkg::*;

  // TensorFlow SAME: first centre position in each dimension
  function automatic int first_centre(int size);
    int o, tot;
    o   = out_size(size, STRIDE);
    tot = (o - 1) * STRIDE + KSIZE - size;
    if (tot < 0) tot = 0;
    return KSIZE / 2 - tot / 2;
  endfunction
  localparam int OFF_X = first_centre(W);
  localparam int OFF_Y = first_centre(H);

  logic [2:0][C-1:0][ACT_W-1:0] s1, s2;   // older, newer stored column
  int y, x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0;
    end else if (adv && col_valid) begin
      s1 <= s2;
      s2 <= col;
    end
  end

  always_comb begin
    logic [2:0][C-1:0][ACT_W-1:0] left, mid, right;
    if (col_c == '0) begin
      left = s1; mid = s2; right = '0;
      y = int'(col_r) - 3; x = W - 1;
    end else begin
      left = (col_c == 1) ? '0 : s1; mid = s2; right = col;
      y = int'(col_r) - 2; x = int'(col_c) - 1;
    end
    for (int ky = 0; ky < 3; ky++) begin
      win[ky][0] = left[ky];
      win[ky][1] = mid[ky];
      win[ky][2] = right[ky];
    end
    win_valid = col_valid && y >= OFF_Y && y < H && x >= OFF_X &&
                ((y - OFF_Y) % STRIDE == 0) && ((x - OFF_X) % STRIDE == 0);
    win_y = 16'(y);
    win_x = 16'(x);
  end
endmodule
