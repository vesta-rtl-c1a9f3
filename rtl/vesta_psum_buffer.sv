// vesta_psum_buffer: partial-sum buffer, requantiser and the register in
// front of the TFLIF module.
//
// The buffer holds one ACC_W = 24-bit partial sum per result slot, 8 x 24 =
// 192 bits, the size the paper gives for the extra buffer of the 2048-row MLP2
// layer (four 512-row segments accumulated over four cycles). The same buffer
// accumulates ZSC passes when a layer has more input channels than the array
// holds at once.
//   valid & first : acc <= sum          (start a new result)
//   valid & !first: acc <= acc + sum
//   valid & last  : q   <= sat8((acc_before + sum) >>> qshift), q_valid <= 1
// The 8-bit requantisation (arithmetic right shift by qshift, then
// saturation) is this design's choice: the paper only says that the TFLIF
// module receives 8-bit values. q and q_valid are registered, one cycle
// after the last pass is presented. q_sat flags a result that saturated.
module vesta_psum_buffer
  import vesta_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          valid,
  input  logic                          first,
  input  logic                          last,
  input  logic [NSLOT-1:0][ACC_W-1:0]   sum,
  input  logic [4:0]                    qshift,
  output logic                          q_valid,
  output logic [NSLOT-1:0][DW-1:0]      q,
  output logic                          q_sat
);
  logic [NSLOT-1:0][ACC_W-1:0] acc;
  logic signed [ACC_W:0]       total   [NSLOT];
  logic signed [ACC_W:0]       shifted [NSLOT];
  logic [NSLOT-1:0]            sat_bit;

  always_comb begin
    for (int p = 0; p < NSLOT; p++) begin
      total[p]   = (first ? '0 : (ACC_W+1)'(signed'(acc[p]))) + (ACC_W+1)'(signed'(sum[p]));
      shifted[p] = total[p] >>> qshift;
      sat_bit[p] = (shifted[p] != (ACC_W+1)'(signed'(sat_dw(shifted[p]))));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      q       <= '0;
      q_valid <= 1'b0;
      q_sat   <= 1'b0;
    end else begin
      q_valid <= valid && last;
      q_sat   <= valid && last && (|sat_bit);
      if (valid) begin
        for (int p = 0; p < NSLOT; p++) acc[p] <= total[p][ACC_W-1:0];
        if (last)
          for (int p = 0; p < NSLOT; p++) q[p] <= sat_dw(shifted[p]);
      end
    end
  end
endmodule
