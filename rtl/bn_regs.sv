// bn_regs -- dedicated programmable registers of one datapath stage.
//
// The weights of the fixed layers are frozen, but their batch-norm
// parameters stay programmable so that each dataset can retrain them
// (adaptive BN). This block holds, for the C channels of one stage, a BN
// scale and a BN bias, plus one quantisation shift for the whole stage. They
// are written over the shared configuration bus; a write is taken when
// cfg_we is high and the address's layer and sub-stage fields equal LAYER
// and SUB. Reset values: scale 1, bias 0, shift 0 (identity BN, no
// quantisation shift).
//
// Interface: clk, rst_n, cfg_we/cfg_addr/cfg_wdata -> scale[C], bias[C],
// shift. Timing: a write is visible on the outputs the cycle after cfg_we.
module bn_regs #(
  parameter int LAYER = 1,
  parameter int SUB   = 0,
  parameter int C     = 8
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    cfg_we,
  input  fixynn_pkg::cfg_addr_t                   cfg_addr,
  input  logic [fixynn_pkg::CFG_DW-1:0]           cfg_wdata,
  output logic signed [fixynn_pkg::SCALE_W-1:0]   scale [C],
  output logic signed [fixynn_pkg::ACC_W-1:0]     bias  [C],
  output logic [fixynn_pkg::SHIFT_W-1:0]          shift
);
  import fixynn_pkg::*;

  logic hit;
  assign hit = cfg_we && (cfg_addr.layer == 4'(LAYER)) && (cfg_addr.sub == 1'(SUB));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < C; c++) begin
        scale[c] <= SCALE_W'(1);
        bias[c]  <= '0;
      end
      shift <= '0;
    end else if (hit) begin
      case (cfg_addr.field)
        CF_SCALE: if (int'(cfg_addr.ch) < C) scale[cfg_addr.ch] <= cfg_wdata[SCALE_W-1:0];
        CF_BIAS:  if (int'(cfg_addr.ch) < C) bias[cfg_addr.ch]  <= cfg_wdata[ACC_W-1:0];
        CF_SHIFT: shift <= cfg_wdata[SHIFT_W-1:0];
        default: ;
      endcase
    end
  end
endmodule
