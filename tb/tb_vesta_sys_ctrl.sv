// tb_vesta_sys_ctrl: random job descriptors. The issued passes are compared
// with the loop nest j / r / s written out in the testbench: weight word
// w_base + j*n_seg + s, input word in_base + r*n_seg + s, first/last flags,
// source selects and residual address. The job must issue one pass per
// cycle without gaps, and done must pulse PIPE_LAT + 1 = 3 cycles after the
// last issue.
module tb_vesta_sys_ctrl;
  import vesta_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  layer_cfg_t cfg, cfg_q;
  logic iss_valid, iss_first, iss_last;
  logic [7:0] iss_row;
  logic [11:0] iss_col;
  logic rd_li, rd_si, rd_lw, rd_sw;
  logic [7:0] in_addr, w_addr, res_addr;
  int checks = 0, failures = 0;

  vesta_sys_ctrl #(.AW(8), .PIPE_LAT(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 60; job++) begin
      int nc, nr, ns, waitc;
      nc = $urandom_range(1, 4); nr = $urandom_range(1, 6); ns = $urandom_range(1, 4);
      @(negedge clk);
      cfg = '0;
      cfg.mode = mode_e'($urandom_range(0, 3));
      cfg.osel = osel_e'($urandom_range(0, 2));
      cfg.w_from_lw  = (cfg.osel == OSEL_IAND) ? 1'b0 : 1'($urandom);
      cfg.in_from_li = 1'($urandom);
      cfg.n_col = 12'(nc); cfg.n_row = 8'(nr); cfg.n_seg = 4'(ns);
      cfg.w_base = 8'($urandom_range(0, 100)); cfg.in_base = 8'($urandom_range(0, 100));
      cfg.res_base = 8'($urandom_range(0, 100));
      start = 1;
      @(negedge clk);
      start = 0;
      chk(busy, "busy after start");
      for (int j = 0; j < nc; j++)
        for (int r = 0; r < nr; r++)
          for (int s = 0; s < ns; s++) begin
            chk(iss_valid, "issue every cycle");
            chk(w_addr == 8'(cfg.w_base + j * ns + s), "weight address");
            chk(in_addr == 8'(cfg.in_base + r * ns + s), "input address");
            chk(iss_first == (s == 0) && iss_last == (s == ns - 1), "first/last");
            chk(iss_row == 8'(r) && iss_col == 12'(j), "row/col tag");
            chk(rd_li == cfg.in_from_li && rd_si == !cfg.in_from_li, "input source");
            chk(rd_sw == !cfg.w_from_lw && rd_lw == (cfg.w_from_lw || cfg.osel == OSEL_IAND), "weight source");
            chk(res_addr == 8'(cfg.res_base + r), "residual address");
            chk(!done, "no early done");
            @(negedge clk);
          end
      chk(!iss_valid, "issue stops");
      waitc = 1;
      while (!done && waitc < 20) begin @(negedge clk); waitc++; end
      chk(done && waitc == 3, "done 3 cycles after the last issue");
      @(negedge clk);
      chk(!busy && !done, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
