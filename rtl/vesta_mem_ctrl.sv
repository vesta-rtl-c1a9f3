// vesta_mem_ctrl: memory controller between the off-chip memory interface,
// the system controller / datapath and the five on-chip SRAMs.
//
// Every SRAM has a single port. Accesses from inside the accelerator (operand
// reads issued by the system controller, spike write-back into the SI SRAM,
// result writes into the Output SRAM) always win. A host (off-chip side)
// request is granted, combinationally on host_gnt, in any cycle in which its
// target SRAM is not used internally, so the next tile can be loaded while a
// layer runs on other buffers. A granted host write stores a whole word in
// LI, SI, LW or SW; a granted host read of the Output SRAM returns its word
// on host_rdata one cycle later with host_rvalid. The write-back of eight
// spikes into SI uses a bit mask at bit offset wb_bitoff.
// The paper names the memory controller but does not describe it; this
// arbitration scheme is this design's own.
module vesta_mem_ctrl
  import vesta_pkg::*;
#(
  parameter int W  = 4096,   // operand word width = UNITS * 8
  parameter int AW = 8       // word address width on all internal ports
) (
  input  logic             clk,
  input  logic             rst_n,
  // off-chip side
  input  logic             host_req,
  input  logic             host_we,
  input  mem_e             host_sel,
  input  logic [AW-1:0]    host_addr,
  input  logic [W-1:0]     host_wdata,
  output logic             host_gnt,
  output logic             host_rvalid,
  output logic [OUT_W-1:0] host_rdata,
  // internal operand reads
  input  logic             rd_li,  input logic [AW-1:0] rd_li_addr,
  input  logic             rd_si,  input logic [AW-1:0] rd_si_addr,
  input  logic             rd_lw,  input logic [AW-1:0] rd_lw_addr,
  input  logic             rd_sw,  input logic [AW-1:0] rd_sw_addr,
  // spike write-back into SI
  input  logic             wb_we,
  input  logic [AW-1:0]    wb_addr,
  input  logic [$clog2(W)-1:0] wb_bitoff,
  input  logic [NSLOT-1:0] wb_bits,
  // result write into Output SRAM
  input  logic             out_we,
  input  logic [AW-1:0]    out_addr,
  input  logic [OUT_W-1:0] out_wdata,
  // SRAM ports: index MEM_LI, MEM_SI, MEM_LW, MEM_SW
  output logic [3:0]            m_en,
  output logic [3:0]            m_we,
  output logic [3:0][AW-1:0]    m_addr,
  output logic [3:0][W-1:0]     m_wdata,
  output logic [3:0][W-1:0]     m_wmask,
  input  logic [OUT_W-1:0]      o_rdata,
  output logic                  o_en,
  output logic                  o_we,
  output logic [AW-1:0]         o_addr,
  output logic [OUT_W-1:0]      o_wdata
);
  logic [4:0] busy;   // target used internally this cycle

  always_comb begin
    busy[MEM_LI]  = rd_li;
    busy[MEM_SI]  = rd_si || wb_we;
    busy[MEM_LW]  = rd_lw;
    busy[MEM_SW]  = rd_sw;
    busy[MEM_OUT] = out_we;
    host_gnt = host_req && (int'(host_sel) <= int'(MEM_OUT)) && !busy[host_sel]
               && ((host_sel == MEM_OUT) ? !host_we : host_we);

    m_en    = '0;
    m_we    = '0;
    m_addr  = '0;
    for (int i = 0; i < 4; i++) begin
      m_wdata[i] = '0;
      m_wmask[i] = '0;
    end
    // internal reads
    if (rd_li) begin m_en[P_LI] = 1'b1; m_addr[P_LI] = rd_li_addr; end
    if (rd_si) begin m_en[P_SI] = 1'b1; m_addr[P_SI] = rd_si_addr; end
    if (rd_lw) begin m_en[P_LW] = 1'b1; m_addr[P_LW] = rd_lw_addr; end
    if (rd_sw) begin m_en[P_SW] = 1'b1; m_addr[P_SW] = rd_sw_addr; end
    // spike write-back has priority over an SI read
    if (wb_we) begin
      m_en[P_SI]    = 1'b1;
      m_we[P_SI]    = 1'b1;
      m_addr[P_SI]  = wb_addr;
      m_wdata[P_SI] = W'(wb_bits) << wb_bitoff;
      m_wmask[P_SI] = W'({NSLOT{1'b1}}) << wb_bitoff;
    end
    // host writes into idle operand SRAMs
    if (host_gnt && host_sel != MEM_OUT) begin
      m_en[2'(host_sel)]    = 1'b1;
      m_we[2'(host_sel)]    = 1'b1;
      m_addr[2'(host_sel)]  = host_addr;
      m_wdata[2'(host_sel)] = host_wdata;
      m_wmask[2'(host_sel)] = '1;
    end

    o_en    = out_we || (host_gnt && host_sel == MEM_OUT);
    o_we    = out_we;
    o_addr  = out_we ? out_addr : host_addr;
    o_wdata = out_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rvalid <= 1'b0;
    else        host_rvalid <= host_gnt && host_sel == MEM_OUT;
  end
  assign host_rdata = o_rdata;

  // An SI operand read must never coincide with a spike write-back.
  a_si_conflict: assert property (@(posedge clk) disable iff (!rst_n) !(rd_si && wb_we));
endmodule
