// vesta_pe_unit: one PE unit = eight PE blocks sharing a single 8-bit weight.
//
// Each PE block gets its own 1-bit input, so a unit forms eight products of
// the same weight in one cycle; across timesteps and pixels these are the
// eight results of a pass (ZSC, WSSL, STDP). The eight products leave the
// unit individually and are reduced by the adder tree.
//
// For the shift-and-sum convolution (SSSC) the eight inputs are the bits of
// one unsigned 8-bit pixel, PE1 = MSB ... PE8 = LSB. Two shifter+adder groups
// each combine four PEs (PE1..PE4 and PE5..PE8) and the upper group's sum is
// shifted by 4 before the final add, so sssc = weight * pixel.
// The shift amounts 3,2,1,0 and 4 are those printed in the SSSC figure. The
// figure draws them as ">>"; since PE1 holds the most significant bit, this
// design shifts left, which is what makes the sum equal the 8-bit product.
// Combinational.
module vesta_pe_unit
  import vesta_pkg::*;
#(
  parameter int WW = vesta_pkg::WW
) (
  input  logic                     [NPE-1:0] spikes,  // bit p = PE(p+1); SSSC: bit 0 = pixel MSB
  input  logic signed [WW-1:0]               weight,
  output logic        [NPE-1:0][WW-1:0]      prod,     // individual PE outputs
  output logic signed [WW+8:0]               sssc     // weight * unsigned pixel
);
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    vesta_pe_block #(.WW(WW)) u_pe (.spike(spikes[p]), .weight(weight), .prod(prod[p]));
  end

  logic signed [WW+8:0] grp_hi, grp_lo;
  always_comb begin
    // PE1..PE4 carry pixel bits 7..4, PE5..PE8 bits 3..0.
    grp_hi = '0;
    grp_lo = '0;
    for (int b = 0; b < 4; b++) begin
      grp_hi += (WW+9)'(signed'(prod[b]))     <<< (3 - b);
      grp_lo += (WW+9)'(signed'(prod[b + 4])) <<< (3 - b);
    end
    sssc = (grp_hi <<< 4) + grp_lo;
  end
endmodule
