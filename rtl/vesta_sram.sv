// vesta_sram: single-port synchronous SRAM model used for all on-chip
// buffers (LI, SI, LW, SW and Output SRAM).
//
// In silicon these are foundry SRAM macros; here the array is written as a
// memory so that it synthesises to memory cells. One access per cycle: when
// en & we, bits selected by wmask are written; when en & !we, the word at
// addr appears on rdata one cycle later (rdata holds its value otherwise).
// The word widths and depths of each instance are set by vesta_top.
module vesta_sram #(
  parameter int DEPTH = 100,
  parameter int WIDTH = 4096,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        if (32'(addr) < DEPTH)
          mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
      end else begin
        rdata <= (32'(addr) < DEPTH) ? mem[addr] : '0;
      end
    end
  end
endmodule
