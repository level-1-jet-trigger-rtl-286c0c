// tb_region_proc: one complete photon patches processor, from the serial
// pairs to the patch results. The link is synchronised against the
// transmitter/eye model, then two frames are sent (the second as an A-side
// link, so mirrored). The three neighbour regions are modelled here as RAMs
// read at the same address as this region's RAM (all regions run in
// lock-step). Every one of the 96 patch results is compared with the sum of
// its four fastOR computed here from the region map (column 24 = column 0
// of region A, row 4 = row 0 of region R), together with the hits, the hit
// maps, the 6 subregion sums, the primitive-data stream and the timing of
// rx_ready and proc_done.
module tb_region_proc;
  import stu_pkg::*;
  logic clk_bit = 0, rst_bit = 1, clk = 0, rst = 1;
  always #1 clk_bit = ~clk_bit;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]  din;
  logic        sync_start = 0, locked, sync_error, mirror = 0;
  logic [5:0]  tap [2];
  logic        prim_valid;
  logic [6:0]  prim_idx;
  logic [11:0] prim_data;
  logic        rx_ready, start_processing = 0, proc_done, sr_done;
  logic [17:0] thr_photon = 0;
  logic [11:0] data_ram, nbr_r, nbr_a, nbr_ar;
  logic        ph_res_valid [8], ph_res_hit [8];
  logic [3:0]  ph_res_idx [8];
  logic [13:0] ph_res_sum [8];
  logic [11:0] ph_hit_map [8];
  logic [2:0]  sr_rd_addr = 0;
  logic [15:0] sr_rd_data;

  tru_link_model #(.EYE_LO0(5), .EYE_HI0(50), .EYE_LO1(30), .EYE_HI1(62), .PHASE(3), .SKEW(2))
    tru (.clk_bit, .tap, .dout(din));

  region_proc dut (.*);

  logic [11:0] own [96], NR [96], NA [96], NAR [96];
  // neighbour RAMs follow the same read sequence as this region's RAM:
  // pointer 0..99 from the edge that samples start_processing, address p or p-96
  int  tp = 0;
  bit  trun = 0;
  always @(posedge clk) begin
    automatic int a = (tp < 96) ? tp : tp - 96;
    if (trun) begin
      nbr_r  <= NR[a];
      nbr_a  <= NA[a];
      nbr_ar <= NAR[a];
    end
    if (start_processing) begin tp <= 0; trun <= 1; end
    else if (trun) begin
      if (tp == 99) trun <= 0; else tp <= tp + 1;
    end
  end

  function automatic int val(int c, int r);
    if (c < 24 && r < 4) return own[4*c + r];
    if (c < 24)          return NR[4*c];
    if (r < 4)           return NA[r];
    return NAR[0];
  endfunction

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int nhit = 0, nmiss = 0;
  int nres, ncyc, t_start, t_done, nprim;
  logic [11:0] exp_map [8];
  always @(posedge clk) begin
    ncyc++;
    if (proc_done) t_done = ncyc;
    if (!rst) for (int j = 0; j < 8; j++) if (ph_res_valid[j]) begin
      automatic int i  = j % 4;
      automatic int c0 = (j < 4) ? 2 * ph_res_idx[j] : 2 * ph_res_idx[j] + 1;
      automatic int e  = val(c0, i) + val(c0, i + 1) + val(c0 + 1, i) + val(c0 + 1, i + 1);
      check(ph_res_sum[j] == 14'(e) && ph_res_hit[j] == (e > thr_photon),
            $sformatf("proc %0d patch %0d sum %0d exp %0d", j, ph_res_idx[j], ph_res_sum[j], e));
      exp_map[j][ph_res_idx[j]] = (e > thr_photon);
      if (e > thr_photon) nhit++; else nmiss++;
      nres++;
    end
  end

  logic [11:0] raw [96];
  always @(posedge clk_bit) if (!rst_bit && prim_valid) begin
    check(prim_data == raw[prim_idx], "primitive data");
    nprim++;
  end

  initial begin
    #400000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (4) @(posedge clk); rst_bit = 0; rst = 0;
    @(negedge clk_bit); sync_start = 1; @(negedge clk_bit); sync_start = 0;
    wait (locked || sync_error);
    check(locked && tap[0] == 27 && tap[1] == 46, $sformatf("lock taps %0d %0d", tap[0], tap[1]));
    for (int pass = 0; pass < 2; pass++) begin
      mirror = (pass == 1);
      for (int a = 0; a < 96; a++) begin
        own[a] = 12'($urandom); NR[a] = 12'($urandom); NA[a] = 12'($urandom); NAR[a] = 12'($urandom);
        if (pass == 0 && a % 9 == 0) own[a] = 12'hFFF;  // hot towers
      end
      // the TRU sends fastOR n; an A-side frame arrives reversed
      for (int n = 0; n < 96; n++) raw[n] = mirror ? own[95 - n] : own[n];
      thr_photon = 18'(pass == 0 ? 9000 : 7000);
      nprim = 0;
      @(negedge clk_bit);
      tru.send_frame(raw);
      wait (rx_ready);
      check(nprim == 96, $sformatf("primitive words %0d", nprim));
      for (int j = 0; j < 8; j++) exp_map[j] = '0;
      nres = 0;
      @(negedge clk); start_processing = 1; t_start = ncyc + 1;
      @(negedge clk); start_processing = 0;
      check(!rx_ready, "rx_ready cleared by start");
      repeat (110) @(negedge clk);
      check(nres == 96, $sformatf("results %0d", nres));
      check(t_done - t_start == 102, $sformatf("proc_done after %0d", t_done - t_start));
      for (int j = 0; j < 8; j++) check(ph_hit_map[j] == exp_map[j], $sformatf("map %0d", j));
      for (int m = 0; m < 6; m++) begin
        automatic int e = 0;
        for (int c = 4*m; c < 4*m + 4; c++) for (int r = 0; r < 4; r++) e += own[4*c + r];
        sr_rd_addr = 3'(m); @(negedge clk);
        check(sr_rd_data == 16'(e), $sformatf("subregion %0d %0d exp %0d", m, sr_rd_data, e));
      end
    end
    check(nhit > 0 && nmiss > 0, $sformatf("hits %0d misses %0d", nhit, nmiss));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
