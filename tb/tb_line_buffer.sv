// tb_line_buffer -- streams three frames into a small line buffer with
// random input gaps and random pauses of adv (downstream stall), and checks
// the slot sequence (r, c), the three rows of every column read back (with
// zeros outside the frame), the 2*W+1 flush slots per frame during which
// in_ready is low, and that nothing moves while adv is low.
module tb_line_buffer;
  import fixynn_pkg::*;
  localparam int W = 6, H = 5, C = 2, NF = 3;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, adv = 0, in_valid = 0, in_ready, col_valid, flushing;
  logic [C-1:0][7:0] in_pix = '0;
  logic [2:0][C-1:0][7:0] col;
  logic [$clog2(H+3)-1:0] col_r;
  logic [$clog2(W)-1:0] col_c;
  int n_flush_slots = 0, n_held = 0;

  line_buffer #(.W(W), .H(H), .C(C)) dut (
    .clk, .rst_n, .adv, .in_valid, .in_ready, .in_pix,
    .col_valid, .col, .col_r, .col_c, .flushing
  );

  always #5 clk = ~clk;

  function automatic logic [7:0] pix(int f, int r, int c, int ch);
    return 8'(f * 97 + r * 31 + c * 7 + ch * 3 + 1);
  endfunction

  // expected slot sequence
  int ef = 0, er = 0, ec = 0;

  always @(negedge clk) adv <= ($urandom_range(0, 4) != 0);

  always @(posedge clk) begin
    if (rst_n && col_valid && adv) begin
      checks++;
      if (int'(col_r) != er || int'(col_c) != ec) begin
        failures++;
        if (failures < 10) $display("FAIL slot (%0d,%0d) exp (%0d,%0d)", col_r, col_c, er, ec);
      end
      for (int k = 0; k < 3; k++)
        for (int ch = 0; ch < C; ch++) begin
          automatic int row = er - 3 + k;
          automatic logic [7:0] e = (row >= 0 && row < H) ? pix(ef, row, ec, ch) : 8'h00;
          checks++;
          if (col[k][ch] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL f%0d slot (%0d,%0d) row %0d ch %0d: %0d exp %0d",
                                        ef, er, ec, row, ch, col[k][ch], e);
          end
        end
      if (er >= H) n_flush_slots++;
      // advance expected slot
      if (er == H + 2) begin er = 0; ec = 0; ef++; end
      else if (ec == W - 1) begin ec = 0; er++; end
      else ec++;
    end
    if (rst_n && col_valid && !adv) n_held++;
  end

  initial begin
    #22 rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int ch = 0; ch < C; ch++) in_pix[ch] = pix(f, r, c, ch);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
      @(negedge clk) in_valid = 0;
    end
    wait (ef == NF);
    checks += 2;
    if (n_flush_slots != NF * (2 * W + 1)) begin
      failures++;
      $display("FAIL flush slots %0d, expected %0d", n_flush_slots, NF * (2 * W + 1));
    end
    if (n_held == 0) begin failures++; $display("FAIL adv never held a column"); end
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
