// vesta_out_select: the IAND gate and the selector in front of the Output
// SRAM.
//
// The architecture figure shows a three-input selector feeding the Output
// SRAM with (a) an IAND gate whose inverted input is tapped from the LW SRAM
// read data and whose other input is the TFLIF spike output, (b) the TFLIF
// spikes themselves and (c) a branch taken after the adder tree. IAND is the
// residual connection of the "IAND" Spikformer variant:
// out = (NOT residual) AND spike.
// Output word (OUT_W = 64 bits):
//   OSEL_SPIKE : {56'b0, spike[7:0]}
//   OSEL_IAND  : {56'b0, ~resid[7:0] & spike[7:0]}
//   OSEL_RAW   : the eight 8-bit requantised sums, slot p in bits 8p+7..8p
// In this design branch (c) is taken after the requantiser rather than
// straight after the adder tree, so it fits the 8-bit Output SRAM lanes.
// The spike bit order is pix*4 + ts. Combinational.
module vesta_out_select
  import vesta_pkg::*;
(
  input  osel_e                     sel,
  input  logic [NSLOT-1:0]          spike,
  input  logic [NSLOT-1:0]          resid,
  input  logic [NSLOT-1:0][DW-1:0]  raw,
  output logic [OUT_W-1:0]          wdata
);
  always_comb begin
    unique case (sel)
      OSEL_SPIKE: wdata = {(OUT_W-NSLOT)'(0), spike};
      OSEL_IAND:  wdata = {(OUT_W-NSLOT)'(0), ~resid & spike};
      OSEL_RAW:   wdata = raw;
      default:    wdata = '0;
    endcase
  end
endmodule
