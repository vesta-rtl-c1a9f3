// tb_vesta_adder_tree: checks the three reductions of the adder tree with
// 8 units.
//  * ZSC: two input channels. For each, four 4x4 spike maps (timesteps
//    1..4) and a 2x2 kernel W_A1 W_B1 / W_A2 W_B2 are drawn at random; the
//    inputs are placed on the units exactly as in the ZSC figure and the
//    eight sums are compared with a direct 2x2, stride-2 convolution of the
//    two output pixels (rows 1-2 and rows 3-4 of column pair A,B).
//  * WSSL: slot p must be the plain sum of PE p over all units.
//  * SSSC: each half of the array gives one pixel, copied to four timesteps.
module tb_vesta_adder_tree;
  import vesta_pkg::*;
  localparam int U = 8;
  mode_e mode;
  logic [U-1:0][7:0][7:0] prod;
  logic [U-1:0][16:0] sssc;
  logic [7:0][23:0] sum;
  int checks = 0, failures = 0;

  vesta_adder_tree #(.UNITS(U)) dut (.mode, .prod, .sssc, .sum);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sum(int p, int e, string what);
    checks++;
    if (int'(signed'(sum[p])) != e) begin
      failures++;
      $display("FAIL %s slot %0d: %0d expected %0d", what, p, signed'(sum[p]), e);
    end
  endtask

  // ZSC placement, from the figure: row (1..4) and timestep (1..4) held by
  // PE k (1..8) of a unit whose kernel row is 1 (W_A1/W_B1) or 2 (W_A2/W_B2).
  int row_k1 [8] = '{1, 1, 3, 3, 1, 1, 3, 3};
  int ts_k1  [8] = '{1, 2, 1, 2, 3, 4, 3, 4};
  int row_k2 [8] = '{2, 2, 4, 4, 2, 2, 4, 4};
  int ts_k2  [8] = '{2, 1, 2, 1, 4, 3, 4, 3};

  initial begin
    for (int n = 0; n < 300; n++) begin
      // ---------------- ZSC ----------------
      bit map [2][4][5][3];   // [channel][ts-1][row][col: 1=A, 2=B]
      int w   [2][3][3];      // [channel][kernel row][kernel col]
      int e_zsc [2][4];       // [pixel][ts-1]
      for (int c = 0; c < 2; c++) begin
        for (int t = 0; t < 4; t++)
          for (int r = 1; r <= 4; r++)
            for (int k = 1; k <= 2; k++) map[c][t][r][k] = 1'($urandom);
        for (int kr = 1; kr <= 2; kr++)
          for (int kc = 1; kc <= 2; kc++) w[c][kr][kc] = $urandom_range(0, 255) - 128;
      end
      // units of channel c: 4c+0: W_A1, 4c+1: W_A2, 4c+2: W_B1, 4c+3: W_B2
      for (int c = 0; c < 2; c++)
        for (int q = 0; q < 4; q++) begin
          int kr, kc;
          kr = (q % 2 == 0) ? 1 : 2;
          kc = (q < 2) ? 1 : 2;
          for (int k = 0; k < 8; k++) begin
            int row, ts;
            row = (kr == 1) ? row_k1[k] : row_k2[k];
            ts  = (kr == 1) ? ts_k1[k]  : ts_k2[k];
            prod[4*c + q][k] = map[c][ts-1][row][kc] ? 8'(w[c][kr][kc]) : 8'd0;
          end
        end
      for (int px = 0; px < 2; px++)
        for (int t = 0; t < 4; t++) begin
          e_zsc[px][t] = 0;
          for (int c = 0; c < 2; c++)
            for (int kr = 1; kr <= 2; kr++)
              for (int kc = 1; kc <= 2; kc++)
                if (map[c][t][2*px + kr][kc]) e_zsc[px][t] += w[c][kr][kc];
        end
      sssc = '0;
      mode = MODE_ZSC;
      #1;
      for (int px = 0; px < 2; px++)
        for (int t = 0; t < 4; t++) expect_sum(slot_of(px, t), e_zsc[px][t], "ZSC");

      // ---------------- WSSL ----------------
      for (int u = 0; u < U; u++) prod[u] = {$urandom, $urandom};
      mode = (n % 2) ? MODE_WSSL : MODE_STDP;
      #1;
      for (int p = 0; p < 8; p++) begin
        int e;
        e = 0;
        for (int u = 0; u < U; u++) e += int'(signed'(prod[u][p]));
        expect_sum(p, e, "WSSL");
      end

      // ---------------- SSSC ----------------
      begin
        int e0, e1;
        e0 = 0; e1 = 0;
        for (int u = 0; u < U; u++) begin
          int v;
          v = $urandom_range(0, 255 * 255) - 128 * 255;
          sssc[u] = 17'(v);
          if (u < U / 2) e0 += v; else e1 += v;
        end
        mode = MODE_SSSC;
        #1;
        for (int t = 0; t < 4; t++) begin
          expect_sum(slot_of(0, t), e0, "SSSC");
          expect_sum(slot_of(1, t), e1, "SSSC");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
