// vesta_adder_tree: reduces the PE array to the eight results of one pass.
//
// A pass produces NSLOT = 8 results, one per PE position: two output pixels
// times four timesteps, with slot = {ts[1], pix, ts[0]} (see vesta_pkg).
//   WSSL / STDP : slot p = sum over all units of PE p. Each unit holds one
//                 weight row element; its eight PEs hold the inputs of two
//                 tokens at four timesteps.
//   ZSC         : units come in groups of four, one group per input channel,
//                 holding the kernel weights W_A1, W_A2, W_B1, W_B2. In the
//                 second and fourth unit of a group the inputs of each PE pair
//                 are swapped (the zig-zag of the ZSC figure: unit 1 holds
//                 A(1,1) A(1,2) ..., unit 2 holds A(2,2) A(2,1) ...), so slot p
//                 sums PE p of even units and PE p^1 of odd units.
//   SSSC        : the lower and upper halves of the array each give one
//                 output pixel (sum of their units' weight x pixel products);
//                 the value is copied to all four timesteps, since the image
//                 is the same at every timestep.
// The paper says the adder tree sums the different forms of PE output; the
// exact pairing for ZSC comes from the figure, while the SSSC grouping into
// two halves is this design's choice. Combinational: one balanced tree of
// 2-input adders per slot (vesta_sum_tree), after a per-unit selector that
// applies the zig-zag swap.
module vesta_adder_tree
  import vesta_pkg::*;
#(
  parameter int UNITS = 512
) (
  input  mode_e                             mode,
  input  logic [UNITS-1:0][NPE-1:0][WW-1:0] prod,
  input  logic [UNITS-1:0][WW+8:0]          sssc,
  output logic [NSLOT-1:0][ACC_W-1:0]       sum
);
  localparam int HALF = UNITS / 2;

  // Operand of slot p from unit u: PE p, or PE p^1 in odd units under ZSC.
  logic [NSLOT-1:0][UNITS-1:0][WW-1:0] opnd;
  always_comb
    for (int p = 0; p < NSLOT; p++)
      for (int u = 0; u < UNITS; u++)
        opnd[p][u] = (mode == MODE_ZSC && (u % 2 == 1)) ? prod[u][p ^ 1] : prod[u][p];

  logic [NSLOT-1:0][ACC_W-1:0] lin;
  logic [NPIX-1:0][ACC_W-1:0]  half;

  for (genvar p = 0; p < NSLOT; p++) begin : g_slot
    vesta_sum_tree #(.N(UNITS), .IW(WW), .OW(ACC_W)) u_tree (.in(opnd[p]), .out(lin[p]));
  end
  for (genvar h = 0; h < NPIX; h++) begin : g_half
    vesta_sum_tree #(.N(HALF), .IW(WW + 9), .OW(ACC_W)) u_tree (
      .in(sssc[h*HALF +: HALF]), .out(half[h]));
  end

  always_comb
    for (int p = 0; p < NSLOT; p++)
      sum[p] = (mode == MODE_SSSC) ? half[(p >> 1) & 1] : lin[p];   // pix = slot bit 1
endmodule
