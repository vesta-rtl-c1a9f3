// tb_vesta_top: end-to-end test of the accelerator at its default size
// (512 PE units, 4096-bit operand words, 50 KB LI and LW SRAMs).
//
// Operand words are loaded through the host port, then six layer jobs run:
//   1 ZSC   spike convolution       SI inputs, SW weights, spike output
//   2 SSSC  8-bit image convolution SI inputs, SW weights, spike output
//   3 WSSL  linear layer            LI inputs, LW weights, raw output,
//           36 results so the 32-word Output SRAM wraps; host accesses
//           are attempted meanwhile (LI denied, SW granted)
//   4 WSSL  MLP2-style, 4 segments accumulated per result, saturating
//   5 WSSL  V column: LI inputs, SW weights, IAND output with residual
//           spikes from LW, spikes written back into SI word 1
//   6 STDP  dot product with the V column just written into SI, LW weights
// Every result is compared with a behavioural model of the whole data path
// (PE products, reduction, accumulation, requantisation, LIF, output
// select), the job latency is checked (passes + 3 cycles to done), the
// Output SRAM contents are read back through the host port, and each
// mechanism is counted; one that never happens is a failure.
module tb_vesta_top;
  import vesta_pkg::*;
  localparam int U = 512;          // must match vesta_top's default
  localparam int W = U * 8;
  localparam int OUTW = 32;

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
  int cnt_zsc = 0, cnt_sssc = 0, cnt_wssl = 0, cnt_stdp = 0, cnt_accum = 0, cnt_sat = 0;
  int cnt_iand = 0, cnt_raw = 0, cnt_wb = 0, cnt_deny = 0, cnt_grant_busy = 0;
  int cnt_spike = 0, cnt_reset = 0, cnt_wrap = 0;

  // reference copies of the SRAMs
  logic [W-1:0] m_li [100];
  logic [W-1:0] m_si [2];
  logic [W-1:0] m_lw [100];
  logic [W-1:0] m_sw [1];
  logic [63:0]  m_out [OUTW];
  logic [63:0]  exp_q [$];
  logic         exp_sat [$];

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [W-1:0] rand_word(int density);
    logic [W-1:0] v;
    for (int i = 0; i < W; i++) v[i] = ($urandom_range(0, 99) < density);
    return v;
  endfunction

  function automatic logic [W-1:0] rand_bytes();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic host_write(mem_e sel, int addr, logic [W-1:0] data);
    @(negedge clk);
    host_req = 1; host_we = 1; host_sel = sel; host_addr = 8'(addr); host_wdata = data;
    @(posedge clk);
    while (!host_gnt) @(posedge clk);
    #1 host_req = 0;
    case (sel)
      MEM_LI: m_li[addr] = data;
      MEM_SI: m_si[addr] = data;
      MEM_LW: m_lw[addr] = data;
      default: m_sw[addr] = data;
    endcase
  endtask

  // ---------------- behavioural model ----------------
  function automatic longint pass_sum(mode_e mode, logic [W-1:0] in_w, logic [W-1:0] w_w, int p);
    longint acc;
    acc = 0;
    if (mode == MODE_SSSC) begin
      int px;
      px = (p >> 1) & 1;   // slot bit 1 is the pixel
      for (int u = px * U / 2; u < (px + 1) * U / 2; u++) begin
        int pixel;
        pixel = 0;
        for (int b = 0; b < 8; b++) pixel = pixel * 2 + int'(in_w[u*8 + b]);
        acc += longint'(int'(signed'(w_w[u*8 +: 8])) * pixel);
      end
    end else begin
      for (int u = 0; u < U; u++) begin
        int k;
        k = (mode == MODE_ZSC && (u % 2 == 1)) ? (p ^ 1) : p;
        if (in_w[u*8 + k]) acc += longint'(int'(signed'(w_w[u*8 +: 8])));
      end
    end
    return acc;
  endfunction

  function automatic logic [3:0] lif(int c0, int c1, int c2, int c3, int th, ref int nsp, ref int nrs);
    int cur [4];
    int v, carry;
    logic [3:0] s;
    cur = '{c0, c1, c2, c3};
    carry = 0;
    for (int t = 0; t < 4; t++) begin
      v = cur[t] + carry;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      s[t] = v > th;
      if (s[t]) begin nsp++; if (t < 3) nrs++; end
      carry = s[t] ? 0 : ((v >= 0) ? v / 2 : -((-v + 1) / 2));
    end
    return s;
  endfunction

  // Computes the expected output words of a job (in issue order) and applies
  // the SI write-back to the reference SI.
  task automatic model_job(layer_cfg_t c);
    for (int j = 0; j < int'(c.n_col); j++)
      for (int r = 0; r < int'(c.n_row); r++) begin
        longint tot [8];
        int q [8];
        bit sat;
        logic [7:0] spk, resid;
        logic [63:0] word;
        sat = 0;
        for (int p = 0; p < 8; p++) tot[p] = 0;
        for (int s = 0; s < int'(c.n_seg); s++) begin
          logic [W-1:0] iw, ww;
          int ia, wa;
          ia = int'(c.in_base) + r * int'(c.n_seg) + s;
          wa = int'(c.w_base) + j * int'(c.n_seg) + s;
          iw = c.in_from_li ? m_li[ia] : m_si[ia];
          ww = c.w_from_lw ? m_lw[wa] : ((wa < 1) ? m_sw[wa] : '0);
          for (int p = 0; p < 8; p++) tot[p] += pass_sum(c.mode, iw, ww, p);
        end
        for (int p = 0; p < 8; p++) begin
          longint sh;
          sh = tot[p] >>> c.qshift;
          if (sh > 127) begin sh = 127; sat = 1; end
          if (sh < -128) begin sh = -128; sat = 1; end
          q[p] = int'(sh);
        end
        for (int px = 0; px < 2; px++) begin
          logic [3:0] s4;
          s4 = lif(q[slot_of(px, 0)], q[slot_of(px, 1)], q[slot_of(px, 2)], q[slot_of(px, 3)],
                   int'(c.thr), cnt_spike, cnt_reset);
          spk[px*4 +: 4] = s4;
        end
        resid = m_lw[int'(c.res_base) + r][(j % U) * 8 +: 8];
        case (c.osel)
          OSEL_SPIKE: word = {56'd0, spk};
          OSEL_IAND:  word = {56'd0, ~resid & spk};
          default:    for (int p = 0; p < 8; p++) word[p*8 +: 8] = 8'(q[p]);
        endcase
        if (c.si_wb) m_si[int'(c.si_wb_word)][r * 8 +: 8] = spk;
        exp_q.push_back(word);
        exp_sat.push_back(sat);
      end
  endtask

  // Runs a job; optionally tries host accesses while it runs.
  task automatic run_job(layer_cfg_t c, bit poke_host);
    int n_pass, cyc, k, idx;
    n_pass = int'(c.n_col) * int'(c.n_row) * int'(c.n_seg);
    exp_q.delete();
    exp_sat.delete();
    model_job(c);
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; k = 0;
    while (!done && cyc < 100000) begin
      if (poke_host && cyc == 2) begin
        // LI is being read: a write to it must be refused, one to SW accepted
        host_req = 1; host_we = 1; host_sel = MEM_LI; host_addr = 8'd99; host_wdata = '1;
        #1;
        chk(!host_gnt, "host write to busy LI refused");
        if (!host_gnt) cnt_deny++;
        host_sel = MEM_SW; host_addr = 8'd0; host_wdata = m_sw[0];
        #1;
        chk(host_gnt, "host write to idle SW granted during a job");
        if (host_gnt) cnt_grant_busy++;
      end
      @(posedge clk);
      #1 host_req = 0;
      if (res_valid) begin
        chk(k < exp_q.size(), "no extra results");
        if (k < exp_q.size()) begin
          chk(res_data == exp_q[k], $sformatf("result %0d of job mode %0d: %h expected %h", k, c.mode, res_data, exp_q[k]));
          chk(res_sat == exp_sat[k], "saturation flag");
          if (res_sat) cnt_sat++;
          idx = k % OUTW;
          if (k >= OUTW) cnt_wrap++;
          m_out[idx] = exp_q[k];
        end
        k++;
      end
      @(negedge clk);
      cyc++;
    end
    chk(k == exp_q.size(), $sformatf("result count %0d expected %0d", k, exp_q.size()));
    chk(cyc == n_pass + 3, $sformatf("job latency %0d cycles, expected %0d", cyc, n_pass + 3));
    case (c.mode)
      MODE_ZSC:  cnt_zsc++;
      MODE_SSSC: cnt_sssc++;
      MODE_WSSL: cnt_wssl++;
      default:   cnt_stdp++;
    endcase
    if (c.n_seg > 1) cnt_accum++;
    if (c.si_wb) cnt_wb++;
    if (c.osel == OSEL_IAND) cnt_iand++;
    if (c.osel == OSEL_RAW) cnt_raw++;
  endtask

  task automatic check_out_sram(int n_results);
    for (int a = 0; a < OUTW && a < n_results; a++) begin
      @(negedge clk);
      host_req = 1; host_we = 0; host_sel = MEM_OUT; host_addr = 8'(a);
      @(posedge clk);
      #1 host_req = 0;
      chk(host_rvalid && host_rdata == m_out[a], $sformatf("Output SRAM word %0d", a));
    end
  endtask

  initial begin
    layer_cfg_t c;
    host_req = 0; host_we = 0; host_sel = MEM_LI; host_addr = 0; host_wdata = '0;
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int a = 0; a < 16; a++) host_write(MEM_LI, a, rand_word(50));
    for (int a = 0; a < 12; a++) host_write(MEM_LW, a, rand_bytes());
    host_write(MEM_SI, 0, rand_word(50));
    host_write(MEM_SI, 1, rand_word(50));
    host_write(MEM_SW, 0, rand_bytes());

    // 1: ZSC
    c = '0; c.mode = MODE_ZSC; c.osel = OSEL_SPIKE; c.n_col = 1; c.n_row = 2; c.n_seg = 1;
    c.qshift = 5; c.thr = 8'sd10;
    run_job(c, 0);
    // 2: SSSC (one 8-bit pixel per unit)
    host_write(MEM_SI, 0, rand_bytes());
    host_write(MEM_SI, 1, rand_bytes());
    c = '0; c.mode = MODE_SSSC; c.osel = OSEL_SPIKE; c.n_col = 1; c.n_row = 2; c.n_seg = 1;
    c.qshift = 13; c.thr = 8'sd5;
    run_job(c, 0);
    // 3: WSSL, raw output, Output SRAM wraps, host accesses during the job
    c = '0; c.mode = MODE_WSSL; c.osel = OSEL_RAW; c.w_from_lw = 1; c.in_from_li = 1;
    c.n_col = 3; c.n_row = 12; c.n_seg = 1; c.qshift = 5; c.thr = 8'sd10;
    run_job(c, 1);
    check_out_sram(36);
    // 4: WSSL with four accumulated segments (MLP2), saturating
    c = '0; c.mode = MODE_WSSL; c.osel = OSEL_SPIKE; c.w_from_lw = 1; c.in_from_li = 1;
    c.n_col = 2; c.n_row = 3; c.n_seg = 4; c.qshift = 4; c.thr = 8'sd20; c.w_base = 2;
    run_job(c, 0);
    // 5: V column with IAND residual and write-back into SI word 1
    c = '0; c.mode = MODE_WSSL; c.osel = OSEL_IAND; c.w_from_lw = 0; c.in_from_li = 1;
    c.n_col = 1; c.n_row = 10; c.n_seg = 1; c.qshift = 5; c.thr = 8'sd5; c.res_base = 0;
    c.si_wb = 1; c.si_wb_word = 1;
    run_job(c, 0);
    // 6: STDP using the V column in SI word 1
    c = '0; c.mode = MODE_STDP; c.osel = OSEL_SPIKE; c.w_from_lw = 1; c.in_from_li = 0;
    c.n_col = 2; c.n_row = 1; c.n_seg = 1; c.in_base = 1; c.w_base = 5; c.qshift = 3; c.thr = 8'sd3;
    run_job(c, 0);
    check_out_sram(2);

    $display("mechanisms: zsc=%0d sssc=%0d wssl=%0d stdp=%0d accum=%0d sat=%0d iand=%0d raw=%0d si_wb=%0d",
             cnt_zsc, cnt_sssc, cnt_wssl, cnt_stdp, cnt_accum, cnt_sat, cnt_iand, cnt_raw, cnt_wb);
    $display("           host_denied=%0d host_granted_busy=%0d spikes=%0d lif_resets=%0d out_wrap=%0d",
             cnt_deny, cnt_grant_busy, cnt_spike, cnt_reset, cnt_wrap);
    chk(cnt_zsc > 0, "ZSC exercised");
    chk(cnt_sssc > 0, "SSSC exercised");
    chk(cnt_wssl > 0, "WSSL exercised");
    chk(cnt_stdp > 0, "STDP exercised");
    chk(cnt_accum > 0, "segment accumulation exercised");
    chk(cnt_sat > 0, "saturation exercised");
    chk(cnt_iand > 0, "IAND exercised");
    chk(cnt_raw > 0, "raw output exercised");
    chk(cnt_wb > 0, "SI write-back exercised");
    chk(cnt_deny > 0, "host denial exercised");
    chk(cnt_grant_busy > 0, "host grant during a job exercised");
    chk(cnt_spike > 0 && cnt_reset > 0, "LIF spikes and resets exercised");
    chk(cnt_wrap > 0, "Output SRAM wrap exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
