// tb_vesta_tflif: checks the four-timestep LIF against a reference written
// with integers: v_t = clamp(in_t + carry), spike = v_t > thr,
// carry = spike ? 0 : floor(v_t / 2). Also counts spikes and resets seen.
module tb_vesta_tflif;
  import vesta_pkg::*;
  logic [3:0][7:0] cur;
  logic signed [7:0] thr;
  logic [3:0] spike;
  int checks = 0, failures = 0, n_spk = 0;

  vesta_tflif dut (.cur, .thr, .spike);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    int v, carry, th;
    logic [3:0] exp_s;
    #1;
    th = int'(thr);
    carry = 0;
    for (int t = 0; t < 4; t++) begin
      v = int'(signed'(cur[t])) + carry;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      exp_s[t] = (v > th);
      carry = exp_s[t] ? 0 : ((v >= 0) ? v / 2 : -((-v + 1) / 2));
    end
    checks++;
    n_spk += $countones(exp_s);
    if (spike !== exp_s) begin
      failures++;
      $display("FAIL cur=%p thr=%0d spike=%b expected %b", cur, th, spike, exp_s);
    end
  endtask

  initial begin
    // Directed: constant input 40, threshold 50: v = 40, 60 -> spike, 40, 60 -> spike
    cur = {8'd40, 8'd40, 8'd40, 8'd40}; thr = 8'sd50; run_one();
    checks++;
    if (spike !== 4'b1010) begin failures++; $display("FAIL directed %b", spike); end
    // Directed saturation of the membrane
    cur = {8'd127, 8'd127, 8'd127, 8'd127}; thr = 8'sd127; run_one();
    for (int n = 0; n < 5000; n++) begin
      cur = {$urandom};
      thr = 8'($urandom_range(0, 80));
      run_one();
    end
    if (n_spk == 0) begin failures++; $display("FAIL no spikes seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
