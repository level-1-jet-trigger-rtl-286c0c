// tb_threshold_calc: random V0 charges and coefficients (including negative
// results and results above the output range); the reference is computed here
// with 64-bit integers: floor((A*V^2 + B*V + C) / 2^8), clipped to 18 bits,
// where V = V0A + V0C. Checks the value and the 3-clock latency.
module tb_threshold_calc;
  logic clk = 0, rst = 1, v0_valid = 0, thr_valid;
  logic [15:0] v0a = 0, v0c = 0;
  logic signed [31:0] coef_a = 0, coef_b = 0, coef_c = 0;
  logic [17:0] thr;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  threshold_calc dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint v, p, e;
    repeat (3) @(negedge clk); rst = 0;
    for (int n = 0; n < 300; n++) begin
      v0a = 16'($urandom); v0c = 16'($urandom);
      if (n % 3 == 0) begin v0a = v0a >> 6; v0c = v0c >> 6; end
      coef_a = (n % 2) ? $signed(32'($urandom % 64)) : -$signed(32'($urandom % 16));
      coef_b = $signed(32'($urandom % 200000)) - 100000;
      coef_c = $signed(32'($urandom));
      v = longint'(v0a) + longint'(v0c);
      p = longint'(coef_a) * v * v + longint'(coef_b) * v + longint'(coef_c);
      e = p >>> 8;
      if (e < 0) e = 0;
      if (e > 262143) e = 262143;
      @(negedge clk); v0_valid = 1; @(negedge clk); v0_valid = 0;
      checks++; if (thr_valid) failures++;
      @(negedge clk);
      checks++; if (thr_valid) failures++;
      @(negedge clk);
      checks++;
      if (!thr_valid || thr != 18'(e)) begin
        failures++;
        if (failures < 10) $display("v=%0d a=%0d b=%0d c=%0d got %0d exp %0d", v, coef_a, coef_b, coef_c, thr, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
