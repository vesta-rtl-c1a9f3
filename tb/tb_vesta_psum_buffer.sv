// tb_vesta_psum_buffer: random groups of 1..4 passes are accumulated; one
// cycle after the last pass q must hold sat8(total >>> qshift) and q_valid
// must pulse. Checks the latency and that saturation happened at least once.
module tb_vesta_psum_buffer;
  import vesta_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid, first, last;
  logic [7:0][23:0] sum;
  logic [4:0] qshift;
  logic q_valid, q_sat;
  logic [7:0][7:0] q;
  int checks = 0, failures = 0, n_sat = 0;

  vesta_psum_buffer dut (.clk, .rst_n, .valid, .first, .last, .sum, .qshift, .q_valid, .q, .q_sat);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; first = 0; last = 0; sum = '0; qshift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 400; g++) begin
      int nseg;
      longint tot [8];
      logic [7:0] exp_q [8];
      bit any_sat;
      nseg = $urandom_range(1, 4);
      qshift = 5'($urandom_range(0, 12));
      for (int p = 0; p < 8; p++) tot[p] = 0;
      for (int s = 0; s < nseg; s++) begin
        @(negedge clk);
        valid = 1; first = (s == 0); last = (s == nseg - 1);
        for (int p = 0; p < 8; p++) begin
          int v;
          v = $urandom_range(0, 131072) - 65536;
          sum[p] = 24'(v);
          tot[p] += v;
        end
        @(posedge clk);
        #1;
        if (s < nseg - 1) begin
          checks++;
          if (q_valid) begin failures++; $display("FAIL early q_valid"); end
        end
      end
      // the edge just taken registered the result
      any_sat = 0;
      for (int p = 0; p < 8; p++) begin
        longint sh;
        sh = tot[p] >>> qshift;
        if (sh > 127)  begin sh = 127;  any_sat = 1; end
        if (sh < -128) begin sh = -128; any_sat = 1; end
        exp_q[p] = 8'(sh);
      end
      checks++;
      if (!q_valid) begin failures++; $display("FAIL q_valid missing, group %0d", g); end
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (q[p] !== exp_q[p]) begin
          failures++;
          $display("FAIL group %0d slot %0d q=%0d expected %0d", g, p, signed'(q[p]), signed'(exp_q[p]));
        end
      end
      checks++;
      if (q_sat !== any_sat) begin failures++; $display("FAIL q_sat"); end
      n_sat += any_sat;
      @(negedge clk);
      valid = 0;
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
