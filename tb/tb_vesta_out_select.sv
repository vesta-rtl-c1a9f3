// tb_vesta_out_select: random check of the three Output SRAM word formats.
module tb_vesta_out_select;
  import vesta_pkg::*;
  osel_e sel;
  logic [7:0] spike, resid;
  logic [7:0][7:0] raw;
  logic [63:0] wdata;
  int checks = 0, failures = 0;

  vesta_out_select dut (.sel, .spike, .resid, .raw, .wdata);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 600; n++) begin
      logic [63:0] exp_w;
      spike = 8'($urandom); resid = 8'($urandom);
      raw = {$urandom, $urandom};
      sel = osel_e'(n % 3);
      #1;
      case (n % 3)
        0: exp_w = {56'd0, spike};
        1: begin
          exp_w = '0;
          for (int b = 0; b < 8; b++) exp_w[b] = (resid[b] == 1'b0) && (spike[b] == 1'b1);
        end
        default: exp_w = raw;
      endcase
      checks++;
      if (wdata !== exp_w) begin
        failures++;
        $display("FAIL sel=%0d wdata=%h expected %h", n % 3, wdata, exp_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
