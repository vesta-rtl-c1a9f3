// vesta_pe_module: the PE array, UNITS PE units of eight PE blocks each
// (the paper's configuration is 512 units, 4096 PEs).
//
// Unit u takes weight byte u of the weight word (bits 8u+7..8u) and input
// bits 8u+7..8u of the input word (bit 8u+p drives PE p+1). The array is
// combinational; its eight products per unit and the SSSC product per unit
// go to the adder tree. The word layout is this design's choice: the paper
// only says that each unit holds one shared weight and eight 1-bit inputs.
module vesta_pe_module
  import vesta_pkg::*;
#(
  parameter int UNITS = 512
) (
  input  logic [UNITS*NPE-1:0]              in_word,
  input  logic [UNITS*WW-1:0]               w_word,
  output logic [UNITS-1:0][NPE-1:0][WW-1:0] prod,
  output logic [UNITS-1:0][WW+8:0]          sssc
);
  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    vesta_pe_unit u_unit (
      .spikes (in_word[u*NPE +: NPE]),
      .weight (w_word[u*WW +: WW]),
      .prod   (prod[u]),
      .sssc   (sssc[u])
    );
  end
endmodule
