// tb_vesta_pe_unit: random check of one PE unit.
// Each of the eight products must be spike*weight, and the SSSC output must
// equal weight * pixel, where the pixel's MSB sits in PE1 (spikes[0]) and its
// LSB in PE8 (spikes[7]).
module tb_vesta_pe_unit;
  import vesta_pkg::*;
  logic [7:0] spikes;
  logic signed [7:0] weight;
  logic [7:0][7:0] prod;
  logic signed [16:0] sssc;
  int checks = 0, failures = 0;

  vesta_pe_unit dut (.spikes, .weight, .prod, .sssc);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int pixel, w;
      spikes = 8'($urandom);
      weight = 8'($urandom);
      if (n == 0) begin spikes = 8'hFF; weight = -8'sd128; end
      if (n == 1) begin spikes = 8'hFF; weight = 8'sd127; end
      #1;
      w = int'(weight);
      pixel = 0;
      for (int b = 0; b < 8; b++) pixel = pixel * 2 + int'(spikes[b]);
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (int'(signed'(prod[p])) != (spikes[p] ? w : 0)) begin
          failures++;
          $display("FAIL prod[%0d]=%0d w=%0d s=%b", p, signed'(prod[p]), w, spikes[p]);
        end
      end
      checks++;
      if (int'(sssc) != w * pixel) begin
        failures++;
        $display("FAIL sssc=%0d expected %0d (w=%0d pixel=%0d)", sssc, w * pixel, w, pixel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
