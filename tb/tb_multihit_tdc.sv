// tb_multihit_tdc -- self-checking test of the multi-hit TDC of one
// discriminator module (184 comparator inputs).
//
// The testbench keeps its own copy of the free-running 5 ns counter (both
// start at zero when reset is released) and produces random pulses on random
// comparators, several per comparator and several comparators at the same
// time. Every leading and trailing edge is predicted as a (polarity,
// comparator, time stamp) word. The FIFO is read continuously; every word
// read must match a predicted edge, and at the end every predicted edge must
// have been read, with no edge reported lost. A second phase lets a
// comparator toggle every cycle while many others are busy so that a slot is
// still pending when the next edge of the same kind arrives: the loss counter
// must then count up, and every word delivered must still be a true edge.
//
// That all comparators are time-stamped comes from the readout
// description; the 5 ns stamp, the slots and the FIFO are this design's
// choices and are what the expected words assume.
`timescale 1ns/1ps
module tb_multihit_tdc;
  import cb_pkg::*;
  localparam int N = 184;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] in = '0;
  logic rd_en = 1'b0;
  logic rd_valid;
  tdc_word_t rd_data;
  logic [15:0] lost_cnt;
  int checks = 0, failures = 0;

  multihit_tdc dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference counter and edge prediction (inputs change at negedge, are
  // sampled at the next posedge; the stamp is the counter of that cycle).
  logic [15:0] tcount = '0;
  logic [N-1:0] in_prev = '0;
  int pending_edges[string];
  int n_pred = 0, n_read = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (in[i] != in_prev[i]) begin
          string key;
          key = $sformatf("%0d_%0d_%0d", !in[i], i, tcount);
          pending_edges[key] = 1;
          n_pred++;
        end
      end
      in_prev = in;
      tcount  = tcount + 1'b1;
    end
  end

  // Reader.
  logic phase2 = 1'b0;
  always @(posedge clk) begin
    if (rst_n && rd_en && rd_valid) begin
      string key;
      key = $sformatf("%0d_%0d_%0d", rd_data.falling, rd_data.chan, rd_data.ts);
      checks++;
      n_read++;
      if (!pending_edges.exists(key)) begin
        failures++;
        if (failures < 10) $display("FAIL: unexpected word %s", key);
      end else begin
        pending_edges.delete(key);
      end
    end
  end

  int last_change [N];
  initial begin
    foreach (last_change[i]) last_change[i] = -100;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    rd_en = 1'b1;
    // Phase 1: sparse random pulses; a comparator changes at most once in
    // 8 cycles (pulses and gaps of at least 40 ns).
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      for (int k = 0; k < 3; k++) begin
        int c;
        c = $urandom_range(0, N - 1);
        if ($urandom_range(0, 3) == 0 && t - last_change[c] >= 8) begin
          in[c] = ~in[c];
          last_change[c] = t;
        end
      end
    end
    in = '0;
    repeat (600) @(negedge clk);
    checks++;
    if (pending_edges.size() != 0) begin
      failures++;
      $display("FAIL: %0d edges never read", pending_edges.size());
    end
    checks++;
    if (lost_cnt != 0) begin failures++; $display("FAIL: lost_cnt=%0d in sparse phase", lost_cnt); end
    checks++;
    if (n_read < 1000) begin failures++; $display("FAIL: only %0d words read", n_read); end
    // Phase 2: overload. Comparator N-1 (lowest drain priority) toggles every
    // cycle while all others toggle too.
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      in = ~in;
    end
    in = '0;
    repeat (2000) @(negedge clk);
    checks++;
    if (lost_cnt == 0) begin failures++; $display("FAIL: overload lost no edges"); end
    checks++;
    // Every edge was either read or lost.
    if (pending_edges.size() != int'(lost_cnt)) begin
      failures++;
      $display("FAIL: %0d unread edges but lost_cnt=%0d", pending_edges.size(), lost_cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
