// tb_window_shift -- feeds the column sequence a line buffer produces (slots
// (r, c) of a W x H frame plus its flush slots, rows outside the frame zero)
// into stride-1 and stride-2 shift registers, with random pauses, and checks
// that the windows come out in raster order of their centres, at the
// TensorFlow 'SAME' centre positions, with zero padding on all four edges.
module tb_window_shift;
  import fixynn_pkg::*;
  localparam int W = 6, H = 5, C = 1;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, adv = 1, col_valid = 0;
  logic [2:0][C-1:0][7:0] col = '0;
  logic [$clog2(H+3)-1:0] col_r = '0;
  logic [$clog2(W)-1:0] col_c = '0;
  logic [1:0] win_valid;
  logic [2:0][2:0][C-1:0][7:0] win [2];
  logic [15:0] wy [2], wx [2];
  int next_y [2], next_x [2], nwin [2];

  for (genvar s = 0; s < 2; s++) begin : g
    window_shift #(.W(W), .H(H), .C(C), .STRIDE(s + 1)) dut (
      .clk, .rst_n, .adv, .col_valid, .col, .col_r, .col_c,
      .win_valid(win_valid[s]), .win(win[s]), .win_y(wy[s]), .win_x(wx[s])
    );
  end

  always #5 clk = ~clk;

  function automatic logic [7:0] pix(int r, int c);
    if (r < 0 || r >= H || c < 0 || c >= W) return 8'h00;
    return 8'(r * 16 + c + 1);
  endfunction

  always @(posedge clk) begin
    for (int s = 0; s < 2; s++)
      if (rst_n && adv && win_valid[s]) begin
        automatic int st = s + 1;
        checks++;
        if (int'(wy[s]) != next_y[s] || int'(wx[s]) != next_x[s]) begin
          failures++;
          if (failures < 10) $display("FAIL s%0d centre (%0d,%0d) exp (%0d,%0d)",
                                      st, wy[s], wx[s], next_y[s], next_x[s]);
        end
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) begin
            checks++;
            if (win[s][ky][kx][0] !== pix(int'(wy[s]) - 1 + ky, int'(wx[s]) - 1 + kx)) begin
              failures++;
              if (failures < 10) $display("FAIL s%0d (%0d,%0d) tap %0d%0d: %0d", st, wy[s], wx[s],
                                          ky, kx, win[s][ky][kx][0]);
            end
          end
        nwin[s]++;
        // TF SAME: stride 1 all; stride 2 on W=6 odd columns, on H=5 even rows
        next_x[s] += st;
        if (next_x[s] >= W) begin
          next_x[s] = (st == 1) ? 0 : 1;
          next_y[s] += st;
          if (next_y[s] >= H) next_y[s] = 0;
        end
      end
  end

  initial begin
    next_y = '{0, 0}; next_x = '{0, 1}; nwin = '{0, 0};
    #22 rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int r = 0; r <= H + 2; r++)
        for (int c = 0; c < W; c++) begin
          if (r == H + 2 && c > 0) break;
          @(negedge clk);
          adv = ($urandom_range(0, 3) != 0);
          col_valid = 1; col_r = 3'(r); col_c = 3'(c);
          for (int k = 0; k < 3; k++) col[k][0] = pix(r - 3 + k, c);
          @(posedge clk);
          while (!adv) begin
            @(negedge clk) adv = ($urandom_range(0, 1) != 0);
            @(posedge clk);
          end
        end
    end
    @(negedge clk) col_valid = 0;
    repeat (3) @(posedge clk);
    checks += 2;
    if (nwin[0] != 2 * W * H) begin failures++; $display("FAIL stride-1 windows %0d", nwin[0]); end
    if (nwin[1] != 2 * 3 * 3) begin failures++; $display("FAIL stride-2 windows %0d", nwin[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
