// vesta_top: VESTA, a spiking-transformer accelerator whose single PE array
// serves convolution (ZSC with spike inputs, SSSC with 8-bit image inputs),
// linear layers (WSSL) and attention dot products (STDP).
//
// Data path (architecture figure): operand SRAMs -> selector -> PE module
// (UNITS units x 8 PE blocks) -> adder tree -> partial-sum buffer and
// register -> two TFLIF modules (two output pixels x four timesteps) ->
// IAND / selector -> Output SRAM, with the TFLIF spikes also written back
// into the SI SRAM (used for the V column of STDP).
// Operand sources per job: inputs from LI or SI, weights from LW or SW
// (usual choices: WSSL LI+LW or LI+SW, STDP SI+LW, ZSC and SSSC SI+SW).
//
// Timing: the system controller issues one pass per cycle; SRAM data arrive
// one cycle later and pass through PE module and adder tree into the
// partial-sum buffer; the requantised result is registered; the next cycle
// the TFLIF spikes are written to the Output SRAM (and SI), and also appear
// on res_valid/res_data. A job of n_col*n_row*n_seg passes ends with done
// three cycles after its last issue.
// Off-chip memory is not part of the design: its side of the memory
// controller is brought out as the host_* ports.
module vesta_top
  import vesta_pkg::*;
#(
  parameter int UNITS     = 512,  // PE units (paper: 512)
  parameter int LI_WORDS  = 100,  // 100 x 4096 b = 50 KB (paper: 50 KB)
  parameter int SI_WORDS  = 2,    // 2 x 4096 b = 1 KB (paper: 0.78 KB)
  parameter int LW_WORDS  = 100,  // 50 KB (paper: 50 KB)
  parameter int SW_WORDS  = 1,    // 0.5 KB (paper: 0.5 KB)
  parameter int OUT_WORDS = 32,   // 32 x 64 b = 0.25 KB (paper: 0.26 KB)
  localparam int W  = UNITS * NPE,
  localparam int AW = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // off-chip memory side
  input  logic             host_req,
  input  logic             host_we,
  input  mem_e             host_sel,
  input  logic [AW-1:0]    host_addr,
  input  logic [W-1:0]     host_wdata,
  output logic             host_gnt,
  output logic             host_rvalid,
  output logic [OUT_W-1:0] host_rdata,
  // job control
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             busy,
  output logic             done,
  // result stream (what is written into the Output SRAM)
  output logic             res_valid,
  output logic [OUT_W-1:0] res_data,
  output logic             res_sat
);
  localparam int LI_AW  = (LI_WORDS  > 1) ? $clog2(LI_WORDS)  : 1;
  localparam int SI_AW  = (SI_WORDS  > 1) ? $clog2(SI_WORDS)  : 1;
  localparam int LW_AW  = (LW_WORDS  > 1) ? $clog2(LW_WORDS)  : 1;
  localparam int SW_AW  = (SW_WORDS  > 1) ? $clog2(SW_WORDS)  : 1;
  localparam int OUT_AW = (OUT_WORDS > 1) ? $clog2(OUT_WORDS) : 1;

  // ---------------- system controller ----------------
  layer_cfg_t    cfg_q;
  logic          iss_valid, iss_first, iss_last;
  logic [7:0]    iss_row;
  logic [11:0]   iss_col;
  logic          rd_li, rd_si, rd_lw, rd_sw;
  logic [AW-1:0] in_addr, w_addr, res_addr;

  vesta_sys_ctrl #(.AW(AW), .PIPE_LAT(2)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q, .busy, .done,
    .iss_valid, .iss_first, .iss_last, .iss_row, .iss_col,
    .rd_li, .rd_si, .rd_lw, .rd_sw, .in_addr, .w_addr, .res_addr
  );

  // ---------------- memory controller and SRAMs ----------------
  logic                  wb_we, out_we;
  logic [AW-1:0]         out_addr;
  logic [$clog2(W)-1:0]  wb_bitoff;
  logic [NSLOT-1:0]      spikes;
  logic [OUT_W-1:0]      out_wdata;
  logic [3:0]            m_en, m_we;
  logic [3:0][AW-1:0]    m_addr;
  logic [3:0][W-1:0]     m_wdata, m_wmask, m_rdata;
  logic                  o_en, o_we;
  logic [AW-1:0]         o_addr;
  logic [OUT_W-1:0]      o_wdata, o_rdata;
  logic [AW-1:0]         lw_addr;

  assign lw_addr = (cfg_q.osel == OSEL_IAND) ? res_addr : w_addr;

  vesta_mem_ctrl #(.W(W), .AW(AW)) u_memctrl (
    .clk, .rst_n,
    .host_req, .host_we, .host_sel, .host_addr, .host_wdata,
    .host_gnt, .host_rvalid, .host_rdata,
    .rd_li, .rd_li_addr(in_addr), .rd_si, .rd_si_addr(in_addr),
    .rd_lw, .rd_lw_addr(lw_addr), .rd_sw, .rd_sw_addr(w_addr),
    .wb_we, .wb_addr(AW'(cfg_q.si_wb_word)), .wb_bitoff, .wb_bits(spikes),
    .out_we, .out_addr, .out_wdata,
    .m_en, .m_we, .m_addr, .m_wdata, .m_wmask,
    .o_rdata, .o_en, .o_we, .o_addr, .o_wdata
  );

  vesta_sram #(.DEPTH(LI_WORDS), .WIDTH(W)) u_li_sram (
    .clk, .en(m_en[P_LI]), .we(m_we[P_LI]), .addr(m_addr[P_LI][LI_AW-1:0]),
    .wdata(m_wdata[P_LI]), .wmask(m_wmask[P_LI]), .rdata(m_rdata[P_LI]));
  vesta_sram #(.DEPTH(SI_WORDS), .WIDTH(W)) u_si_sram (
    .clk, .en(m_en[P_SI]), .we(m_we[P_SI]), .addr(m_addr[P_SI][SI_AW-1:0]),
    .wdata(m_wdata[P_SI]), .wmask(m_wmask[P_SI]), .rdata(m_rdata[P_SI]));
  vesta_sram #(.DEPTH(LW_WORDS), .WIDTH(W)) u_lw_sram (
    .clk, .en(m_en[P_LW]), .we(m_we[P_LW]), .addr(m_addr[P_LW][LW_AW-1:0]),
    .wdata(m_wdata[P_LW]), .wmask(m_wmask[P_LW]), .rdata(m_rdata[P_LW]));
  vesta_sram #(.DEPTH(SW_WORDS), .WIDTH(W)) u_sw_sram (
    .clk, .en(m_en[P_SW]), .we(m_we[P_SW]), .addr(m_addr[P_SW][SW_AW-1:0]),
    .wdata(m_wdata[P_SW]), .wmask(m_wmask[P_SW]), .rdata(m_rdata[P_SW]));
  vesta_sram #(.DEPTH(OUT_WORDS), .WIDTH(OUT_W)) u_out_sram (
    .clk, .en(o_en), .we(o_we), .addr(o_addr[OUT_AW-1:0]),
    .wdata(o_wdata), .wmask('1), .rdata(o_rdata));

  // ---------------- stage 1: operands -> PE module -> adder tree ----------
  logic        v1, first1, last1;
  logic [7:0]  row1;
  logic [11:0] col1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; row1 <= '0; col1 <= '0;
    end else begin
      v1 <= iss_valid; first1 <= iss_first; last1 <= iss_last;
      row1 <= iss_row; col1 <= iss_col;
    end
  end

  logic [W-1:0] in_word, w_word;
  logic [NSLOT-1:0] resid1;
  always_comb begin
    in_word = cfg_q.in_from_li ? m_rdata[P_LI] : m_rdata[P_SI];
    w_word  = cfg_q.w_from_lw  ? m_rdata[P_LW] : m_rdata[P_SW];
    resid1  = m_rdata[P_LW][(32'(col1) % UNITS) * NPE +: NPE];
  end

  logic [UNITS-1:0][NPE-1:0][WW-1:0] prod;
  logic [UNITS-1:0][WW+8:0]          sssc;
  logic [NSLOT-1:0][ACC_W-1:0]       sum;

  vesta_pe_module #(.UNITS(UNITS)) u_pe (.in_word, .w_word, .prod, .sssc);
  vesta_adder_tree #(.UNITS(UNITS)) u_tree (.mode(cfg_q.mode), .prod, .sssc, .sum);

  // ---------------- stage 2: partial sums -> TFLIF -> output ---------------
  logic                     q_valid, q_sat;
  logic [NSLOT-1:0][DW-1:0] q;
  vesta_psum_buffer u_psum (
    .clk, .rst_n, .valid(v1), .first(first1), .last(last1), .sum,
    .qshift(cfg_q.qshift), .q_valid, .q, .q_sat
  );

  logic [7:0]       row2;
  logic [NSLOT-1:0] resid2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row2 <= '0; resid2 <= '0;
    end else if (v1 && last1) begin
      row2 <= row1; resid2 <= resid1;
    end
  end

  for (genvar px = 0; px < NPIX; px++) begin : g_lif
    logic [NTS-1:0][DW-1:0] cur;
    always_comb
      for (int t = 0; t < NTS; t++) cur[t] = q[slot_of(px, t)];
    vesta_tflif u_tflif (.cur, .thr(cfg_q.thr), .spike(spikes[px*NTS +: NTS]));
  end

  vesta_out_select u_osel (.sel(cfg_q.osel), .spike(spikes), .resid(resid2), .raw(q), .wdata(out_wdata));

  logic [AW-1:0] out_ptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      out_ptr <= '0;
    else if (start && !busy)         out_ptr <= '0;
    else if (q_valid)                out_ptr <= (32'(out_ptr) + 1 >= OUT_WORDS) ? '0 : out_ptr + AW'(1);
  end

  always_comb begin
    out_we    = q_valid;
    out_addr  = out_ptr;
    wb_we     = q_valid && cfg_q.si_wb;
    wb_bitoff = $clog2(W)'(32'(row2) * NSLOT);
    res_valid = q_valid;
    res_data  = out_wdata;
    res_sat   = q_sat;
  end
endmodule
