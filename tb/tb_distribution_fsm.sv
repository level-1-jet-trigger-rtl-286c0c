// tb_distribution_fsm: checks that the strobes make every patch processor
// load exactly the fastOR of the patches listed for it, in groups of four.
// The testbench records, for each processor, the (region, column, row) of
// every word it is told to load - the own word is the one addressed by
// raddr one clock earlier - and compares each group of four with the patch
// definitions: E<i> rows i,i+1 of columns 2k,2k+1; O<i> columns 2k+1,2k+2,
// column 24 meaning column 0 of region A; row 4 meaning row 0 of region R.
// Also checks 100 reads, the done timing and the data_avail count.
module tb_distribution_fsm;
  import stu_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  logic [6:0] raddr;
  logic busy, above_96, data_avail, done;
  logic [3:0] ld_even, ld_odd;
  src_e src_even [4], src_odd [4];
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  distribution_fsm dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // a loaded word in global coordinates of this region's map:
  // col 0..24 (24 = column 0 of region A), row 0..4 (4 = row 0 of region R)
  typedef struct { int col; int row; } pos_t;
  pos_t loads [8][$];

  logic [6:0] raddr_q;
  logic       busy_q, above_q;
  int         ncyc, n_avail, t_start, t_done;
  // position of the word presented now (pointer issued one clock ago)
  int         p_q;
  int         p_now;

  always @(posedge clk) begin
    if (start) p_now <= 0; else if (busy) p_now <= p_now + 1;
    p_q <= p_now;
    busy_q <= busy;
  end

  function automatic pos_t where(int p, src_e s);
    pos_t r;
    int col, row;
    col = p / 4;
    row = p % 4;
    r.col = col; r.row = row;
    unique case (s)
      SRC_OWN: begin r.col = col; r.row = row; end
      SRC_R:   begin r.col = col; r.row = 4; end
      SRC_A:   begin r.col = 24;  r.row = row; end
      SRC_AR:  begin r.col = 24;  r.row = 4; end
    endcase
    return r;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (data_avail) n_avail++;
    for (int i = 0; i < 4; i++) begin
      if (ld_even[i]) loads[i].push_back(where(p_q, src_even[i]));
      if (ld_odd[i])  loads[4+i].push_back(where(p_q, src_odd[i]));
    end
    if (done) t_done = ncyc;
    ncyc++;
  end

  // own-region words are read from address p (p < 96) or p-96
  always @(posedge clk) if (busy) begin
    checks++;
    if (raddr != 7'(p_now % 96)) failures++;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int j = 0; j < 8; j++) loads[j].delete();
      n_avail = 0; ncyc = 0;
      @(negedge clk); start = 1; t_start = ncyc + 1; @(negedge clk); start = 0;  // t_start: the edge that samples start
      repeat (120) @(negedge clk);
      check(n_avail == 96, "data_avail count");
      check(t_done - t_start == 100, $sformatf("done after %0d clocks", t_done - t_start));
      for (int j = 0; j < 8; j++) begin
        automatic int i = j % 4;
        automatic bit odd = (j >= 4);
        check(loads[j].size() == 48, $sformatf("proc %0d loads %0d", j, loads[j].size()));
        for (int k = 0; k < 12 && 4*k + 3 < loads[j].size(); k++) begin
          // expected 4 positions of patch k
          automatic int c0 = odd ? 2*k + 1 : 2*k;
          for (int n = 0; n < 4; n++) begin
            automatic pos_t got = loads[j][4*k + n];
            automatic bit ok = (got.col == c0 || got.col == c0 + 1) && (got.row == i || got.row == i + 1);
            // the four must be distinct
            for (int m = 0; m < n; m++)
              if (loads[j][4*k + m].col == got.col && loads[j][4*k + m].row == got.row) ok = 0;
            check(ok, $sformatf("proc %0d patch %0d load %0d at col %0d row %0d", j, k, n, got.col, got.row));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
