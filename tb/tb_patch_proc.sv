// tb_patch_proc: loads groups of 4 random values with random gaps, and checks
// each patch sum, index and hit (sum above threshold), that the result comes
// one clock after the fourth load, and the hit map; then that clear restarts.
module tb_patch_proc;
  import stu_pkg::*;
  logic clk = 0, rst = 1, clear = 0, ld = 0;
  logic [11:0] din = 0;
  logic [17:0] thr = 18'd8000;
  logic res_valid, res_hit;
  logic [3:0] res_idx;
  logic [13:0] res_sum;
  logic [11:0] hit_map;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  patch_proc dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [11:0] exp_map;
    int s;
    repeat (3) @(negedge clk); rst = 0;
    for (int pass = 0; pass < 3; pass++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      exp_map = '0;
      thr = (pass == 2) ? 18'd0 : 18'(4000 + $urandom % 8000);
      for (int k = 0; k < 12; k++) begin
        s = 0;
        for (int j = 0; j < 4; j++) begin
          ld = 1; din = 12'($urandom); s += din;
          @(negedge clk);
          ld = 0;
          if (j < 3) begin
            check(!res_valid, "no result before the fourth load");
            repeat ($urandom % 3) @(negedge clk);
          end
        end
        // the result is registered at the edge that took the fourth load
        check(res_valid, $sformatf("result valid after 4th load, patch %0d", k));
        check(res_sum == 14'(s), $sformatf("sum %0d exp %0d", res_sum, s));
        check(res_idx == 4'(k), "index");
        check(res_hit == (s > thr), "hit");
        exp_map[k] = (s > thr);
        @(negedge clk);
        check(!res_valid, "single-cycle result");
      end
      check(hit_map == exp_map, $sformatf("map %h exp %h", hit_map, exp_map));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
