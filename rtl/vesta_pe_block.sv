// vesta_pe_block: one processing element.
//
// Because one operand is a binary spike, the 8-bit x 1-bit product needs no
// multiplier: a 2:1 selector forwards the shared 8-bit weight when the spike
// is 1 and forwards 0 when it is 0 (PE block inset of the architecture
// figure, which prints the 0/1 selector inputs and the 8-bit widths).
// Purely combinational.
module vesta_pe_block #(
  parameter int WW = 8
) (
  input  logic                 spike,   // 1-bit input
  input  logic signed [WW-1:0] weight,  // shared weight of the unit
  output logic signed [WW-1:0] prod     // spike ? weight : 0
);
  always_comb prod = spike ? weight : '0;
endmodule
