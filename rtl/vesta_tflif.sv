// vesta_tflif: Temporal Fused LIF neuron for four timesteps.
//
// One call converts the four 8-bit input currents of a neuron (timesteps
// 1..4, produced in the same pass thanks to weight sharing) into its four
// spikes, so no membrane potential is stored between passes. The BN bias is
// folded into the threshold: the comparator's B input is "Threshold - beta".
// Per the TFLIF figure, block t:
//   v_t     = in_t + carry_{t-1}       (block 1: v_1 = in_1)
//   spike_t = (v_t > thr)              comparator A>B
//   carry_t = (spike_t ? 0 : v_t) >>> 1   hard reset to 0, leak by halving
// Block 4 has no reset/leak stage. All data paths are 8 bits wide as printed
// in the figure; the signed interpretation and the saturation of the 8-bit
// add are this design's choices. Combinational.
module vesta_tflif
  import vesta_pkg::*;
(
  input  logic [NTS-1:0][DW-1:0] cur,   // cur[t] = input of timestep t+1 (signed)
  input  logic signed [DW-1:0]   thr,   // threshold minus folded BN bias
  output logic [NTS-1:0]         spike
);
  // One TFLIF block per timestep; block t reads the carry of block t-1.
  for (genvar t = 0; t < NTS; t++) begin : g_blk
    logic signed [DW-1:0] v, kept, carry;
    logic                 fire;
    if (t == 0) begin : g_first
      assign v = signed'(cur[t]);
    end else begin : g_next
      assign v = sat_dw((ACC_W+1)'(signed'(cur[t])) + (ACC_W+1)'(g_blk[t-1].carry));
    end
    assign fire     = (v > thr);
    assign kept     = fire ? '0 : v;
    assign spike[t] = fire;
    assign carry    = kept >>> 1;
  end
endmodule
