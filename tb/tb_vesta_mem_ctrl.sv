// tb_vesta_mem_ctrl: random internal and host traffic with a 64-bit word.
// Checks, every cycle, the grant rule (a host access is granted only when
// its target SRAM is idle inside the accelerator, writes to LI/SI/LW/SW and
// reads from the Output SRAM), the SRAM port signals, the masked spike
// write-back into SI, and the one-cycle host read return.
module tb_vesta_mem_ctrl;
  import vesta_pkg::*;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  logic host_req, host_we, host_gnt, host_rvalid;
  mem_e host_sel;
  logic [7:0] host_addr;
  logic [W-1:0] host_wdata;
  logic [63:0] host_rdata;
  logic rd_li, rd_si, rd_lw, rd_sw, wb_we, out_we;
  logic [7:0] rd_li_addr, rd_si_addr, rd_lw_addr, rd_sw_addr, wb_addr, out_addr;
  logic [5:0] wb_bitoff;
  logic [7:0] wb_bits;
  logic [63:0] out_wdata;
  logic [3:0] m_en, m_we;
  logic [3:0][7:0] m_addr;
  logic [3:0][W-1:0] m_wdata, m_wmask;
  logic [63:0] o_rdata, o_wdata;
  logic o_en, o_we;
  logic [7:0] o_addr;
  int checks = 0, failures = 0, n_gnt = 0, n_deny = 0;

  vesta_mem_ctrl #(.W(W), .AW(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    bit prev_rd;
    host_req = 0; host_we = 0; host_sel = MEM_LI; host_addr = 0; host_wdata = 0;
    {rd_li, rd_si, rd_lw, rd_sw, wb_we, out_we} = '0;
    rd_li_addr = 0; rd_si_addr = 0; rd_lw_addr = 0; rd_sw_addr = 0;
    wb_addr = 0; out_addr = 0; wb_bitoff = 0; wb_bits = 0; out_wdata = 0; o_rdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    prev_rd = 0;
    for (int n = 0; n < 4000; n++) begin
      bit [4:0] used;
      bit exp_gnt;
      int tgt;
      @(negedge clk);
      // previous cycle's host read must return now
      chk(host_rvalid == prev_rd, "host_rvalid");
      o_rdata = {$urandom, $urandom};
      #1;
      chk(host_rdata == o_rdata, "host_rdata");
      rd_li = 1'($urandom); rd_lw = 1'($urandom); rd_sw = 1'($urandom);
      wb_we = ($urandom_range(0, 3) == 0);
      rd_si = wb_we ? 1'b0 : 1'($urandom);
      out_we = 1'($urandom);
      rd_li_addr = 8'($urandom); rd_si_addr = 8'($urandom);
      rd_lw_addr = 8'($urandom); rd_sw_addr = 8'($urandom);
      wb_addr = 8'($urandom); wb_bitoff = 6'($urandom_range(0, 7) * 8);
      wb_bits = 8'($urandom); out_addr = 8'($urandom); out_wdata = {$urandom, $urandom};
      host_req = 1'($urandom); host_we = 1'($urandom);
      tgt = $urandom_range(0, 4);
      host_sel = mem_e'(tgt);
      host_addr = 8'($urandom); host_wdata = {$urandom, $urandom};
      #1;
      used = {out_we, rd_sw, rd_lw, rd_si | wb_we, rd_li};
      exp_gnt = host_req && !used[tgt] && ((tgt == 4) ? !host_we : host_we);
      chk(host_gnt == exp_gnt, "grant");
      if (exp_gnt) n_gnt++; else if (host_req) n_deny++;
      // LI / LW / SW ports
      chk(m_en[0] == (rd_li || (exp_gnt && tgt == 0)), "LI en");
      if (rd_li) chk(m_addr[0] == rd_li_addr && !m_we[0], "LI read");
      if (exp_gnt && tgt == 0) chk(m_we[0] && m_addr[0] == host_addr && m_wdata[0] == host_wdata && &m_wmask[0], "LI host write");
      if (rd_lw) chk(m_addr[2] == rd_lw_addr && !m_we[2], "LW read");
      if (exp_gnt && tgt == 2) chk(m_we[2] && m_addr[2] == host_addr && m_wdata[2] == host_wdata, "LW host write");
      if (rd_sw) chk(m_addr[3] == rd_sw_addr && !m_we[3], "SW read");
      if (exp_gnt && tgt == 3) chk(m_we[3] && m_addr[3] == host_addr && m_wdata[3] == host_wdata, "SW host write");
      // SI
      if (wb_we) begin
        logic [W-1:0] em, ed;
        em = '0; ed = '0;
        for (int b = 0; b < 8; b++) begin em[wb_bitoff + b] = 1'b1; ed[wb_bitoff + b] = wb_bits[b]; end
        chk(m_en[1] && m_we[1] && m_addr[1] == wb_addr && (m_wmask[1] == em) && ((m_wdata[1] & em) == ed), "SI write-back");
      end else if (rd_si) begin
        chk(m_en[1] && !m_we[1] && m_addr[1] == rd_si_addr, "SI read");
      end
      if (exp_gnt && tgt == 1) chk(m_we[1] && m_addr[1] == host_addr && m_wdata[1] == host_wdata, "SI host write");
      // Output SRAM
      if (out_we) chk(o_en && o_we && o_addr == out_addr && o_wdata == out_wdata, "OUT write");
      else if (exp_gnt && tgt == 4) chk(o_en && !o_we && o_addr == host_addr, "OUT host read");
      else chk(!o_en, "OUT idle");
      prev_rd = exp_gnt && tgt == 4;
    end
    chk(n_gnt > 100 && n_deny > 100, "both grants and denials seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
