// tb_vesta_pe_module: random check of the PE array word layout with 16
// units: unit u uses weight byte u and input bits 8u..8u+7.
module tb_vesta_pe_module;
  import vesta_pkg::*;
  localparam int U = 16;
  logic [U*8-1:0] in_word, w_word;
  logic [U-1:0][7:0][7:0] prod;
  logic [U-1:0][16:0] sssc;
  int checks = 0, failures = 0;

  vesta_pe_module #(.UNITS(U)) dut (.in_word, .w_word, .prod, .sssc);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < U * 8; i += 32) begin
        in_word[i +: 32] = $urandom;
        w_word[i +: 32]  = $urandom;
      end
      #1;
      for (int u = 0; u < U; u++) begin
        int w, pixel;
        w = int'(signed'(w_word[u*8 +: 8]));
        pixel = 0;
        for (int p = 0; p < 8; p++) begin
          pixel = pixel * 2 + int'(in_word[u*8 + p]);
          checks++;
          if (int'(signed'(prod[u][p])) != (in_word[u*8 + p] ? w : 0)) begin
            failures++;
            $display("FAIL unit %0d pe %0d", u, p);
          end
        end
        checks++;
        if (int'(signed'(sssc[u])) != w * pixel) begin
          failures++;
          $display("FAIL unit %0d sssc", u);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
