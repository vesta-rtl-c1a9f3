// vesta_sum_tree: balanced binary adder tree, a helper of vesta_adder_tree.
//
// Sums N signed IW-bit operands into a signed OW-bit result. The operands are
// sign-extended to OW bits and padded with zeros to the next power of two;
// each level then adds neighbouring pairs, so the depth is ceil(log2 N)
// adders. Combinational.
module vesta_sum_tree #(
  parameter int N  = 8,
  parameter int IW = 8,
  parameter int OW = 24
) (
  input  logic [N-1:0][IW-1:0] in,
  output logic [OW-1:0]        out
);
  localparam int LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int NP     = 1 << LEVELS;

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int CNT = NP >> l;
    logic [CNT-1:0][OW-1:0] v;
    for (genvar i = 0; i < CNT; i++) begin : g_i
      if (l == 0 && i < N) begin : g_leaf
        assign v[i] = OW'(signed'(in[i]));
      end else if (l == 0) begin : g_pad
        assign v[i] = '0;
      end else begin : g_add
        assign v[i] = g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
      end
    end
  end

  assign out = g_lvl[LEVELS].v[0];
endmodule
