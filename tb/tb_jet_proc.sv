// tb_jet_proc: random 12 x 16 subregion map held in models of the 32
// regions' subregion RAMs (registered read, region t = side*16 + phi holding
// rows side*6..side*6+5 of column phi). Every result must be the sum of the
// 2x2 subregions of its patch: processor i (even) patch k = rows i,i+1,
// columns 2k,2k+1; processor 11+i (odd) patch k = rows i,i+1, columns
// 2k+1,2k+2. Checks all 165 sums and hits, the hit maps, and done 194 clocks
// after start.
module tb_jet_proc;
  import stu_pkg::*;
  logic clk = 0, rst = 1, start = 0, busy, done;
  logic [17:0] thr_jet;
  logic [2:0]  sr_rd_addr;
  logic [15:0] sr_data [32];
  logic        res_valid [22], res_hit [22];
  logic [3:0]  res_idx [22];
  logic [17:0] res_sum [22];
  logic [7:0]  hit_map [22];
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  jet_proc dut (.*);

  logic [15:0] S [12][16];
  always @(posedge clk)
    for (int t = 0; t < 32; t++) sr_data[t] <= S[(t / 16) * 6 + (sr_rd_addr % 6)][t % 16];

  int nres, ncyc, t_start, t_done;
  logic [7:0] exp_map [22];
  always @(posedge clk) begin
    ncyc++;
    if (done) t_done = ncyc;
    if (!rst) for (int p = 0; p < 22; p++) if (res_valid[p]) begin
      automatic int i = p % 11;
      automatic int j = (p < 11) ? 2 * res_idx[p] : 2 * res_idx[p] + 1;
      automatic int e = S[i][j] + S[i+1][j] + S[i][j+1] + S[i+1][j+1];
      checks++;
      if (res_sum[p] != 18'(e) || res_hit[p] != (e > thr_jet)) begin
        failures++;
        if (failures < 10) $display("proc %0d idx %0d sum %0d exp %0d", p, res_idx[p], res_sum[p], e);
      end
      exp_map[p][res_idx[p]] = (e > thr_jet);
      nres++;
    end
  end

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < 12; r++) for (int c = 0; c < 16; c++)
        S[r][c] = (pass == 2) ? 16'hFFFF : 16'($urandom % 20000);
      thr_jet = (pass == 2) ? 18'h3FFFF : 18'(40000);
      for (int p = 0; p < 22; p++) exp_map[p] = '0;
      nres = 0;
      @(negedge clk); start = 1; t_start = ncyc + 1; @(negedge clk); start = 0;  // t_start: the edge that samples start
      repeat (200) @(negedge clk);
      checks++; if (nres != 165) begin failures++; $display("results %0d", nres); end
      checks++; if (t_done - t_start != 194) begin failures++; $display("done after %0d", t_done - t_start); end
      for (int p = 0; p < 22; p++) begin
        checks++;
        if (hit_map[p] != exp_map[p]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
