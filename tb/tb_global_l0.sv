// tb_global_l0: random local L0 candidates and enable masks; the global L0
// must be the OR of the enabled candidates 3 clocks later, with the pattern.
// The enable mask is a static setting applied at the output stage, so the
// mask that counts is the one present one clock before the output.
module tb_global_l0;
  logic clk = 0, rst = 1, l0_global;
  logic [31:0] l0_local = 0, tru_enable = 0, l0_pattern;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, nfire = 0;
  global_l0 dut (.*);
  logic [31:0] hist_l [4], hist_e [4];
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      // sparse candidates so that both outcomes occur
      l0_local   = ($urandom % 3 == 0) ? (32'h1 << ($urandom % 32)) : 32'h0;
      tru_enable = ($urandom % 4 == 0) ? 32'($urandom) : 32'hFFFF_FFFF;
      for (int k = 3; k > 0; k--) begin hist_l[k] = hist_l[k-1]; hist_e[k] = hist_e[k-1]; end
      hist_l[0] = l0_local; hist_e[0] = tru_enable;
      if (n >= 4) begin
        // outputs seen now reflect inputs applied 3 clocks before this one
        checks++;
        if (l0_pattern != (hist_l[3] & hist_e[1]) || l0_global != (l0_pattern != 0)) begin failures++; $display("n=%0d g=%0d p=%h exp %h", n, l0_global, l0_pattern, hist_l[3] & hist_e[1]); end
        if (l0_global) nfire++;
      end
    end
    checks++; if (nfire < 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
