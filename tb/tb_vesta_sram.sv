// tb_vesta_sram: random masked writes and reads against a reference array;
// read data must appear exactly one cycle after the read and hold afterwards.
module tb_vesta_sram;
  localparam int D = 12, WD = 16;
  logic clk = 0;
  logic en, we;
  logic [3:0] addr;
  logic [WD-1:0] wdata, wmask, rdata;
  logic [WD-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  vesta_sram #(.DEPTH(D), .WIDTH(WD)) dut (.clk, .en, .we, .addr, .wdata, .wmask, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; wmask = 0;
    // initialise every word with full masks
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 4'(a); wdata = 16'($urandom); wmask = '1;
      ref_mem[a] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = 1;
      we = 1'($urandom);
      addr = 4'($urandom_range(0, D - 1));
      wdata = 16'($urandom);
      wmask = 16'($urandom);
      if (we) begin
        ref_mem[addr] = (ref_mem[addr] & ~wmask) | (wdata & wmask);
      end else begin
        logic [WD-1:0] e;
        e = ref_mem[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL read %h expected %h", rdata, e); end
        @(negedge clk);
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL read data not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
