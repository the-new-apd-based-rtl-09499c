// tb_walk_corr_disc -- self-checking test of the dual-threshold, walk-
// correcting hit logic of one channel.
//
// Pulses are modelled by their two comparator edges: the low comparator
// rises at a chosen cycle, the high comparator dt cycles later (or never,
// for a pulse below the high threshold). Expected behaviour, worked out from
// the timing rules rather than from the design:
//   * a pulse whose high edge comes within 150 ns (30 cycles) produces one
//     hit pulse of exactly 24 cycles (120 ns);
//   * it starts 30 + 2 + lut[dt] cycles after the synchronised low edge, with
//     the default table lut[dt] = 30 - dt, i.e. 62 - dt cycles after it;
//     for a linear leading edge with the high threshold at twice the low one
//     the pulse start t0 lies dt cycles before the low edge, so all hits then
//     start at the same time after t0 (walk removed);
//   * a pulse without a high edge inside the window produces no hit;
//   * a rewritten table entry changes the delay accordingly.
//
// The 150 ns window and the 120 ns hit length checked here come from the
// readout description; the two-cycle synchroniser and the default table are
// this design's choices, so the expected delays include them.
`timescale 1ns/1ps
module tb_walk_corr_disc;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic comp_lo = 1'b0, comp_hi = 1'b0;
  logic lut_we = 1'b0;
  logic [4:0] lut_addr = '0, lut_data = '0;
  logic hit_out, lo_sync, hi_sync;
  int checks = 0, failures = 0;
  int cyc = 0;

  walk_corr_disc dut (.*);

  always #2.5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Watchdog.
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Record hit pulse starts and lengths.
  int hit_start = -1, hit_len = 0, n_hits = 0, last_len = 0;
  logic hit_q = 1'b0;
  always @(posedge clk) begin
    hit_q <= hit_out;
    if (hit_out && !hit_q) begin hit_start <= cyc; n_hits <= n_hits + 1; hit_len <= 1; end
    else if (hit_out) hit_len <= hit_len + 1;
    if (!hit_out && hit_q) last_len <= hit_len;
  end

  int lo_sync_cyc;
  always @(posedge clk) if (lo_sync && !dut.lo_q) lo_sync_cyc <= cyc;

  // Apply one pulse: low edge now, high edge dt cycles later (dt < 0: none).
  task automatic pulse(int dt, int width);
    @(negedge clk);
    comp_lo = 1'b1;
    if (dt == 0) comp_hi = 1'b1;
    for (int i = 1; i <= width; i++) begin
      @(negedge clk);
      if (i == dt) comp_hi = 1'b1;
    end
    comp_lo = 1'b0;
    comp_hi = 1'b0;
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0d)", what, cyc);
    end
  endtask

  task automatic one_pulse(int dt, int exp_delay);
    int n0;
    n0 = n_hits;
    pulse(dt, 40);
    repeat (120) @(posedge clk);
    if (exp_delay < 0) begin
      check(n_hits == n0, $sformatf("dt=%0d: no hit expected", dt));
    end else begin
      check(n_hits == n0 + 1, $sformatf("dt=%0d: one hit expected, got %0d", dt, n_hits - n0));
      check(hit_start - lo_sync_cyc == exp_delay,
            $sformatf("dt=%0d: hit %0d cycles after low edge, expected %0d",
                      dt, hit_start - lo_sync_cyc, exp_delay));
      check(last_len == 24, $sformatf("dt=%0d: hit length %0d, expected 24", dt, last_len));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    // Default table: start = 62 - dt after the synchronised low edge.
    for (int dt = 0; dt <= 30; dt += 3) one_pulse(dt, 62 - dt);
    one_pulse(30, 32);
    // Below the high threshold (no high edge in the window): discarded.
    one_pulse(-1, -1);
    one_pulse(35, -1);
    // Walk check: for dt cycles of rise between thresholds the pulse began dt
    // cycles before the low edge; t0 + (dt + 62 - dt) is constant.
    // Rewrite lut[5] = 3: delay becomes 30 + 2 + 3.
    @(negedge clk);
    lut_we = 1'b1; lut_addr = 5'd5; lut_data = 5'd3;
    @(negedge clk);
    lut_we = 1'b0;
    one_pulse(5, 35);
    one_pulse(6, 56);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
