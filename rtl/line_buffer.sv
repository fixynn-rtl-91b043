// line_buffer -- four-bank single-port SRAM line buffer between two layers.
//
// A layer's output arrives one 1x1xC pixel per cycle in raster order. The
// pixel of row r is written into bank r mod 4 while the same column of the
// three previous rows (r-3, r-2, r-1) is read from the other three banks, so
// every bank sees at most one access per cycle and single-port SRAMs
// suffice. At the end of each row the roles of the banks rotate, so the
// oldest row is the next to be overwritten. The read column (1x3xC) goes to
// the window shift register; rows outside the frame are replaced by zeros
// (the zero padding of the convolution).
//
// Each input pixel occupies one "slot" (r, c). The last windows of a frame
// need rows below the image, so after the last pixel of a frame the buffer
// inserts 2*W+1 flush slots of its own (virtual rows H and H+1, then one
// column of row H+2). While it flushes, in_ready is low and upstream stalls.
// The whole unit advances only when adv is high (the downstream output
// register can take data); with adv low nothing moves and no bank is
// accessed.
//
// Interface: in_valid/in_ready/in_pix (upstream handshake), adv, and the
// registered column output col_valid/col/col_r/col_c, where col[k] holds row
// col_r-3+k. Timing: a column leaves one cycle after its slot is issued (the
// SRAM read latency). The frame size, the bank rotation and the 1 pixel per
// cycle rate follow the paper; the flush and the handshake are this design's
// own.
module line_buffer #(
  parameter int W = 224,   // row length in pixels
  parameter int H = 224,   // rows per frame
  parameter int C = 3      // channels per pixel
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  adv,
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  logic [C-1:0][fixynn_pkg::ACT_W-1:0]   in_pix,
  output logic                                  col_valid,
  output logic [2:0][C-1:0][fixynn_pkg::ACT_W-1:0] col,
  output logic [$clog2(H+3)-1:0]                col_r,
  output logic [$clog2(W)-1:0]                  col_c,
  output logic                                  flushing
);
  import fixynn_pkg::*;

  localparam int RW = $clog2(H + 3);
  localparam int CW = $clog2(W);
  localparam int DW = C * ACT_W;

  logic [RW-1:0] r;
  logic [CW-1:0] c;
  logic [1:0]    wb;          // bank that holds row r
  logic          issue, wr;
  logic [1:0]    s1_wb;
  logic [DW-1:0] rdata [4];

  assign in_ready = adv && !flushing;
  assign issue    = adv && (flushing || in_valid);
  assign wr       = issue && !flushing;

  for (genvar b = 0; b < 4; b++) begin : g_bank
    logic is_wb;
    assign is_wb = (wb == 2'(b));
    sp_sram #(.DEPTH(W), .WIDTH(DW)) u_bank (
      .clk,
      .en   (issue && (!is_wb || wr)),
      .we   (is_wb),
      .addr (c),
      .wdata(in_pix),
      .rdata(rdata[b])
    );
  end

  // slot sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; c <= '0; wb <= '0; flushing <= 1'b0;
    end else if (issue) begin
      if (flushing && r == RW'(H + 2)) begin
        r <= '0; c <= '0; flushing <= 1'b0;
      end else begin
        if (!flushing && r == RW'(H - 1) && c == CW'(W - 1)) flushing <= 1'b1;
        if (c == CW'(W - 1)) begin
          c  <= '0;
          r  <= r + 1'b1;
          wb <= wb + 1'b1;
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end

  // stage 1: SRAM read data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_valid <= 1'b0; col_r <= '0; col_c <= '0; s1_wb <= '0;
    end else if (adv) begin
      col_valid <= issue;
      col_r     <= r;
      col_c     <= c;
      s1_wb     <= wb;
    end
  end

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      int row;
      row = int'(col_r) - 3 + k;
      if (row >= 0 && row < H) col[k] = rdata[2'(s1_wb + 2'(k + 1))];
      else                     col[k] = '0;
    end
  end

  // real pixels are only written to rows of the frame; flush slots lie below it
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue |-> (flushing ? (r >= RW'(H)) : (r < RW'(H))));
endmodule
