// tb_cluster_count_sampler -- self-checking test of the time-stamped
// recording of the cluster multiplicity.
//
// A random count sequence (holding each value a random number of cycles) is
// applied. The testbench predicts one record per change: the new value and
// the reference 5 ns counter of the cycle in which the change is sampled.
// Records are read and compared in order while the FIFO is drained. A second
// phase stops reading and changes the count every cycle until the 64-deep
// FIFO fills: the loss counter must count exactly the changes that did not
// fit, and the first 64 records must still be correct.
//
// Sampling the cluster count comes from the readout description; recording
// only changes, with a stamp, is this design's choice.
`timescale 1ns/1ps
module tb_cluster_count_sampler;
  import cb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] count = '0;
  logic rd_en = 1'b0, rd_valid;
  ccount_word_t rd_data;
  logic [15:0] lost_cnt;
  int checks = 0, failures = 0;

  cluster_count_sampler dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] tcount = '0;
  logic [4:0] prev = '0;
  ccount_word_t expq[$];
  int n_changes = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (count != prev) begin
        expq.push_back('{count: count, ts: tcount});
        n_changes++;
      end
      prev = count;
      tcount = tcount + 1'b1;
    end
  end

  always @(posedge clk) begin
    if (rst_n && rd_en && rd_valid) begin
      ccount_word_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL: unexpected record");
      end else begin
        e = expq.pop_front();
        if (rd_data != e) begin
          failures++;
          if (failures < 10) $display("FAIL: record %0d@%0d expected %0d@%0d", rd_data.count, rd_data.ts, e.count, e.ts);
        end
      end
    end
  end

  initial begin
    int lost_exp;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    rd_en = 1'b1;
    for (int i = 0; i < 500; i++) begin
      repeat ($urandom_range(1, 12)) @(negedge clk);
      count = 5'($urandom_range(0, 16));
    end
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d records missing", expq.size()); end
    // Overflow phase.
    rd_en = 1'b0;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      count = (count == 5'd16) ? 5'd0 : count + 1'b1;
    end
    repeat (3) @(negedge clk);
    lost_exp = 100 - 64;
    checks++;
    if (lost_cnt != 16'(lost_exp)) begin failures++; $display("FAIL: lost_cnt=%0d expected %0d", lost_cnt, lost_exp); end
    // Drop the predictions that were lost (the last ones) and read the rest.
    for (int i = 0; i < lost_exp; i++) void'(expq.pop_back());
    rd_en = 1'b1;
    repeat (80) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d records missing after overflow", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
