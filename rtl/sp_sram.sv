// sp_sram -- single-port SRAM bank, one of the four banks of a line buffer.
//
// One access per cycle: when en is high the bank either writes wdata at addr
// (we high) or reads addr into rdata (we low). rdata is registered and holds
// its value on cycles without a read, like a typical single-port SRAM macro.
// Written here as an array so that it simulates and synthesises anywhere; a
// process-specific macro with the same ports would replace it in a chip.
//
// Interface: clk, en, we, addr, wdata -> rdata. Timing: read data appears
// the cycle after the read.
module sp_sram #(
  parameter int DEPTH = 224,
  parameter int WIDTH = 24
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
