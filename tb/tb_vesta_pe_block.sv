// tb_vesta_pe_block: exhaustive check of the spike-gated weight selector.
// For all 256 weights and both spike values, prod must equal spike*weight.
module tb_vesta_pe_block;
  logic spike;
  logic signed [7:0] weight, prod;
  int checks = 0, failures = 0;

  vesta_pe_block #(.WW(8)) dut (.spike, .weight, .prod);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = -128; w < 128; w++)
      for (int s = 0; s < 2; s++) begin
        spike = s[0]; weight = 8'(w);
        #1;
        checks++;
        if (int'(prod) != s * w) begin
          failures++;
          $display("FAIL spike=%0d weight=%0d prod=%0d", s, w, prod);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
