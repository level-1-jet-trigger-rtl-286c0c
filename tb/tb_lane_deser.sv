// tb_lane_deser: checks the chunking and the bitslip of lane_deser against a
// reference bit stream generated here.
module tb_lane_deser;
  import stu_pkg::*;
  logic clk_bit = 0, rst = 1, din = 0, bitslip = 0;
  logic [5:0] chunk;
  logic chunk_valid;
  int checks = 0, failures = 0;

  lane_deser dut (.clk_bit, .rst, .din, .bitslip, .chunk, .chunk_valid);

  always #1 clk_bit = ~clk_bit;

  bit stream [4096];
  int pos = 0;          // index of the bit driven now
  int boundary;         // stream index of the first bit of the next expected chunk
  int nslip = 0;
  int nvalid = 0, last_valid_cycle = -1, cyc = 0;

  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk_bit) cyc++;

  initial begin
    for (int i = 0; i < 4096; i++) stream[i] = 1'($urandom);
    @(negedge clk_bit); @(negedge clk_bit); rst = 0;
    // first bit after reset is stream[0]; chunks are bits [6n .. 6n+5]
    boundary = 0;
    fork
      begin
        forever begin
          @(posedge clk_bit); #0.1;
          if (chunk_valid) begin
            logic [5:0] exp;
            for (int b = 0; b < 6; b++) exp[5-b] = stream[boundary + b];
            checks++;
            if (chunk !== exp) begin
              failures++;
              if (failures < 5) $display("chunk mismatch at %0d: got %b exp %b", boundary, chunk, exp);
            end
            if (last_valid_cycle >= 0) begin
              checks++;
              if (cyc - last_valid_cycle != 6 + nslip) begin
                failures++; $display("period %0d at boundary %0d", cyc - last_valid_cycle, boundary);
              end
            end
            nslip = 0;
            last_valid_cycle = cyc;
            boundary += 6;
            nvalid++;
          end
          if (bitslip) nslip++;
        end
      end
      begin
        // the bitslip held at bit 1000 and bit 2001 shifts the boundary by one each
        wait (pos == 1001); boundary += 1;
        wait (pos == 2002); boundary += 1;
      end
    join_none
    for (pos = 0; pos < 3000; pos++) begin
      din = stream[pos];
      bitslip = (pos == 1000 || pos == 2001);
      @(negedge clk_bit);
    end
    checks++;
    if (nvalid < 490) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
