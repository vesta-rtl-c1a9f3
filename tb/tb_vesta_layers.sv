// tb_vesta_layers: runs tiles of the layer types of a Spikformer-V2-style
// network on the full-size accelerator (512 units) and checks the results
// against layer arithmetic written independently of the hardware's data
// layout (matrix products and direct 2x2 stride-2 convolutions):
//   A  linear layer 512 -> 4 columns over all 196 tokens (WSSL)
//   B  MLP2-style linear layer 2048 -> 2 columns over 48 tokens, four
//      512-row segments accumulated per result (WSSL, n_seg = 4)
//   C  spike convolution, 128 input channels, 8x8 maps, 4 timesteps, one
//      output channel (ZSC)
//   D  8-bit image convolution, 3 channels, 4x8 image, one output channel
//      (SSSC)
// The testbench places the operands in the words as the hardware expects
// (slot order {ts[1], pix, ts[0]}, the ZSC zig-zag, MSB-first pixel bits) and
// reads the raw requantised sums (qshift chosen so nothing saturates).
module tb_vesta_layers;
  import vesta_pkg::*;
  localparam int U = 512;
  localparam int W = U * 8;

  logic clk = 0, rst_n = 0;
  logic host_req, host_we, host_gnt, host_rvalid;
  mem_e host_sel;
  logic [7:0] host_addr;
  logic [W-1:0] host_wdata;
  logic [63:0] host_rdata, res_data;
  logic start, busy, done, res_valid, res_sat;
  layer_cfg_t cfg;

  vesta_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int got [$][8];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic host_write(mem_e sel, int addr, logic [W-1:0] data);
    @(negedge clk);
    host_req = 1; host_we = 1; host_sel = sel; host_addr = 8'(addr); host_wdata = data;
    @(posedge clk);
    while (!host_gnt) @(posedge clk);
    #1 host_req = 0;
  endtask

  // Runs a job and collects the raw results (8 signed bytes each).
  task automatic run_job(layer_cfg_t c);
    got.delete();
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk);
      #1;
      if (res_valid) begin
        int v [8];
        for (int p = 0; p < 8; p++) v[p] = int'(signed'(res_data[p*8 +: 8]));
        got.push_back(v);
      end
      @(negedge clk);
    end
  endtask

  function automatic int rq(longint v, int sh);
    return int'(v >>> sh);
  endfunction

  // ---------------- A / B: linear layers ----------------
  task automatic linear(int rows, int ncol, int ntok, int qsh);
    bit x [4][196][2048];
    int wt [2048][4];
    int nseg, npair;
    layer_cfg_t c;
    nseg = rows / 512;
    npair = ntok / 2;
    for (int t = 0; t < 4; t++)
      for (int n = 0; n < ntok; n++)
        for (int k = 0; k < rows; k++) x[t][n][k] = ($urandom_range(0, 99) < 25);
    for (int k = 0; k < rows; k++)
      for (int j = 0; j < ncol; j++) wt[k][j] = $urandom_range(0, 255) - 128;
    // input word r*nseg+s: unit u = feature s*512+u; PE slot (pix,ts) = token 2r+pix
    for (int r = 0; r < npair; r++)
      for (int s = 0; s < nseg; s++) begin
        logic [W-1:0] wd;
        for (int u = 0; u < U; u++)
          for (int px = 0; px < 2; px++)
            for (int t = 0; t < 4; t++) wd[u*8 + slot_of(px, t)] = x[t][2*r + px][s*512 + u];
        host_write(MEM_LI, r * nseg + s, wd);
      end
    // weight word j*nseg+s: byte u = W[s*512+u][j]
    for (int j = 0; j < ncol; j++)
      for (int s = 0; s < nseg; s++) begin
        logic [W-1:0] wd;
        for (int u = 0; u < U; u++) wd[u*8 +: 8] = 8'(wt[s*512 + u][j]);
        host_write(MEM_LW, j * nseg + s, wd);
      end
    c = '0; c.mode = MODE_WSSL; c.osel = OSEL_RAW; c.w_from_lw = 1; c.in_from_li = 1;
    c.n_col = 12'(ncol); c.n_row = 8'(npair); c.n_seg = 4'(nseg); c.qshift = 5'(qsh);
    run_job(c);
    chk(got.size() == ncol * npair, "linear result count");
    for (int j = 0; j < ncol; j++)
      for (int r = 0; r < npair; r++)
        for (int px = 0; px < 2; px++)
          for (int t = 0; t < 4; t++) begin
            longint acc;
            acc = 0;
            for (int k = 0; k < rows; k++) if (x[t][2*r + px][k]) acc += wt[k][j];
            chk(got[j * npair + r][slot_of(px, t)] == rq(acc, qsh),
                $sformatf("linear %0d col %0d token %0d ts %0d: %0d vs %0d", rows, j, 2*r + px, t,
                          got[j * npair + r][slot_of(px, t)], rq(acc, qsh)));
          end
  endtask

  // ---------------- C: ZSC convolution ----------------
  task automatic conv_zsc();
    bit m [128][4][8][8];     // [channel][ts][row][col]
    int k [128][2][2];        // [channel][kr][kc]
    layer_cfg_t c;
    logic [W-1:0] wd;
    for (int ch = 0; ch < 128; ch++) begin
      for (int t = 0; t < 4; t++)
        for (int y = 0; y < 8; y++)
          for (int x = 0; x < 8; x++) m[ch][t][y][x] = 1'($urandom);
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) k[ch][a][b] = $urandom_range(0, 255) - 128;
    end
    // weights: units 4ch+0..3 = W_A1, W_A2, W_B1, W_B2 (kr,kc) = (0,0) (1,0) (0,1) (1,1)
    for (int ch = 0; ch < 128; ch++)
      for (int q = 0; q < 4; q++) wd[(4*ch + q)*8 +: 8] = 8'(k[ch][q % 2][q / 2]);
    host_write(MEM_SW, 0, wd);
    // pass r = ox*2 + oyp covers output column ox, output rows 2*oyp and 2*oyp+1
    for (int r = 0; r < 8; r++) begin
      int ox, y0;
      ox = r / 2; y0 = (r % 2) * 4;
      for (int ch = 0; ch < 128; ch++)
        for (int q = 0; q < 4; q++) begin
          int kr, kc;
          kr = q % 2; kc = q / 2;
          for (int px = 0; px < 2; px++)
            for (int t = 0; t < 4; t++) begin
              int pe;
              pe = slot_of(px, t);
              if (kr == 1) pe = pe ^ 1;     // zig-zag placement in W_A2 / W_B2 units
              wd[(4*ch + q)*8 + pe] = m[ch][t][y0 + 2*px + kr][2*ox + kc];
            end
        end
      host_write(MEM_LI, r, wd);
    end
    c = '0; c.mode = MODE_ZSC; c.osel = OSEL_RAW; c.w_from_lw = 0; c.in_from_li = 1;
    c.n_col = 1; c.n_row = 8; c.n_seg = 1; c.qshift = 5;
    run_job(c);
    chk(got.size() == 8, "ZSC result count");
    for (int r = 0; r < 8; r++)
      for (int px = 0; px < 2; px++)
        for (int t = 0; t < 4; t++) begin
          longint acc;
          int oy, ox;
          ox = r / 2; oy = (r % 2) * 2 + px;
          acc = 0;
          for (int ch = 0; ch < 128; ch++)
            for (int a = 0; a < 2; a++)
              for (int b = 0; b < 2; b++)
                if (m[ch][t][2*oy + a][2*ox + b]) acc += k[ch][a][b];
          chk(got[r][slot_of(px, t)] == rq(acc, 5),
              $sformatf("ZSC out (%0d,%0d) ts %0d: %0d vs %0d", oy, ox, t, got[r][slot_of(px, t)], rq(acc, 5)));
        end
  endtask

  // ---------------- D: SSSC convolution ----------------
  task automatic conv_sssc();
    int img [3][4][8];
    int k [3][2][2];
    layer_cfg_t c;
    logic [W-1:0] wd;
    for (int ch = 0; ch < 3; ch++) begin
      for (int y = 0; y < 4; y++)
        for (int x = 0; x < 8; x++) img[ch][y][x] = $urandom_range(0, 255);
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) k[ch][a][b] = $urandom_range(0, 255) - 128;
    end
    // each array half: units 4ch+q (ch < 3) hold kernel tap (q%2, q/2), the rest zero
    wd = '0;
    for (int h = 0; h < 2; h++)
      for (int ch = 0; ch < 3; ch++)
        for (int q = 0; q < 4; q++) wd[(h*256 + 4*ch + q)*8 +: 8] = 8'(k[ch][q % 2][q / 2]);
    host_write(MEM_SW, 0, wd);
    // pass r: output column r, output rows 0 (half 0) and 1 (half 1); 4x8 image -> 2x4
    for (int r = 0; r < 4; r++) begin
      wd = '0;
      for (int h = 0; h < 2; h++)
        for (int ch = 0; ch < 3; ch++)
          for (int q = 0; q < 4; q++) begin
            int pix;
            pix = img[ch][2*h + q % 2][2*r + q / 2];
            for (int b = 0; b < 8; b++) wd[(h*256 + 4*ch + q)*8 + b] = pix[7 - b];
          end
      host_write(MEM_LI, r, wd);
    end
    c = '0; c.mode = MODE_SSSC; c.osel = OSEL_RAW; c.w_from_lw = 0; c.in_from_li = 1;
    c.n_col = 1; c.n_row = 4; c.n_seg = 1; c.qshift = 11;
    run_job(c);
    chk(got.size() == 4, "SSSC result count");
    for (int r = 0; r < 4; r++)
      for (int oy = 0; oy < 2; oy++) begin
        longint acc;
        acc = 0;
        for (int ch = 0; ch < 3; ch++)
          for (int a = 0; a < 2; a++)
            for (int b = 0; b < 2; b++) acc += k[ch][a][b] * img[ch][2*oy + a][2*r + b];
        for (int t = 0; t < 4; t++)
          chk(got[r][slot_of(oy, t)] == rq(acc, 11),
              $sformatf("SSSC out (%0d,%0d): %0d vs %0d", oy, r, got[r][slot_of(oy, t)], rq(acc, 11)));
      end
  endtask

  initial begin
    host_req = 0; host_we = 0; host_sel = MEM_LI; host_addr = 0; host_wdata = '0;
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    linear(512, 4, 196, 5);
    $display("linear 512 done, checks=%0d failures=%0d", checks, failures);
    linear(2048, 2, 48, 6);
    $display("linear 2048 done, checks=%0d failures=%0d", checks, failures);
    conv_zsc();
    conv_sssc();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
