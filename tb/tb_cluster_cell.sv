// tb_cluster_cell -- self-checking test of the per-crystal cluster state
// machine with its delayed top-left-corner pattern check.
//
// A reference model written from the rules, not from the design: on the
// leading edge of the own hit at cycle T the pattern
//   hit & !(up | up_left | left | down_left)
// is sampled at T + D; if true, the output is high for exactly P cycles from
// T + D + 1, and it is low at every other time. Scenarios: isolated hit;
// each of the four neighbours set at check time (no output); a neighbour
// that appears after the leading edge but before the check (no output, the
// case the delay exists for); a neighbour that is gone by check time
// (output); own hit gone before the check (no output); D and P changed at
// run time; random stimulus against the reference model.
//
// The pattern and the 60 ns / 130 ns defaults come from the readout
// description; ignoring new edges while delaying or pulsing is this design's
// choice and is part of the reference model.
`timescale 1ns/1ps
module tb_cluster_cell;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] delay_d = 8'd12, pulse_p = 8'd26;
  logic hit = 0, up = 0, up_left = 0, left = 0, down_left = 0;
  logic cluster;
  int checks = 0, failures = 0, cyc = 0;

  cluster_cell dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model, evaluated on the values sampled at each rising edge.
  typedef enum {W, D, C, O} rs_t;
  rs_t rs = W;
  int  rd, rp;
  logic hit_q = 0;
  logic exp_out;
  int n_pulses = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      rs = W; hit_q = 0;
    end else begin
      // Compare the output of the current cycle before advancing.
      checks++;
      exp_out = (rs == O);
      if (cluster !== exp_out) begin
        failures++;
        if (failures < 10) $display("FAIL cyc=%0d cluster=%0b expected %0b", cyc, cluster, exp_out);
      end
      case (rs)
        W: if (hit && !hit_q) begin rs = D; rd = 1; end
        D: begin if (rd + 1 >= delay_d) rs = C; rd++; end
        C: begin
             if (hit && !(up | up_left | left | down_left)) begin rs = O; rp = 0; n_pulses++; end
             else rs = W;
           end
        O: begin if (rp + 1 >= pulse_p) rs = W; rp++; end
      endcase
      hit_q = hit;
    end
    cyc++;
  end

  // Measure pulse positions explicitly for the directed checks.
  int le_cyc, rise_cyc, len;
  logic cl_q = 0, hit_p = 0;
  always @(posedge clk) begin
    hit_p <= hit;
    if (hit && !hit_p) le_cyc <= cyc;
    cl_q <= cluster;
    if (cluster && !cl_q) begin rise_cyc <= cyc; len <= 1; end
    else if (cluster) len <= len + 1;
  end

  task automatic drive_hit(int width, int nb_on, int nb_off, int which);
    // Raise own hit; neighbour 'which' is high from cycle nb_on to nb_off
    // relative to the leading edge (which < 0: none).
    for (int i = 0; i < width + 5; i++) begin
      @(negedge clk);
      hit = (i < width);
      {up, up_left, left, down_left} = '0;
      if (which >= 0 && i >= nb_on && i < nb_off) begin
        case (which)
          0: up = 1; 1: up_left = 1; 2: left = 1; default: down_left = 1;
        endcase
      end
    end
    {up, up_left, left, down_left} = '0;
    hit = 0;
    repeat (40) @(negedge clk);
  endtask

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // Isolated hit of 24 cycles: pulse of 26 cycles starting D + 1 after LE.
    n0 = n_pulses;
    drive_hit(24, 0, 0, -1);
    check(n_pulses == n0 + 1, "isolated hit gives a cluster");
    check(rise_cyc - le_cyc == 13, $sformatf("cluster starts %0d after LE, expected 13", rise_cyc - le_cyc));
    check(len == 26, $sformatf("cluster length %0d, expected 26", len));
    // Each neighbour present at check time suppresses the cluster.
    for (int w = 0; w < 4; w++) begin
      n0 = n_pulses;
      drive_hit(24, 0, 24, w);
      check(n_pulses == n0, $sformatf("neighbour %0d suppresses", w));
      check(len == 26, "no new pulse");
    end
    // Neighbour appears 5 cycles after LE (random order inside a cluster).
    n0 = n_pulses;
    drive_hit(24, 5, 24, 2);
    check(n_pulses == n0, "late neighbour suppresses at delayed check");
    // Neighbour gone before the check: cluster.
    n0 = n_pulses;
    drive_hit(24, 0, 6, 0);
    check(n_pulses == n0 + 1, "early neighbour gone: cluster");
    // Own hit too short: no cluster.
    n0 = n_pulses;
    drive_hit(8, 0, 0, -1);
    check(n_pulses == n0, "own hit gone before check: no cluster");
    // Other D / P.
    @(negedge clk);
    delay_d = 8'd4; pulse_p = 8'd10;
    n0 = n_pulses;
    drive_hit(24, 0, 0, -1);
    check(n_pulses == n0 + 1 && rise_cyc - le_cyc == 5 && len == 10, "D=4, P=10");
    delay_d = 8'd12; pulse_p = 8'd26;
    // Random stimulus against the reference model.
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      hit       = ($urandom_range(0, 9) < 4) ? ~hit : hit;
      up        = ($urandom_range(0, 19) == 0) ? ~up : up;
      up_left   = ($urandom_range(0, 19) == 0) ? ~up_left : up_left;
      left      = ($urandom_range(0, 19) == 0) ? ~left : left;
      down_left = ($urandom_range(0, 19) == 0) ? ~down_left : down_left;
      if (i % 2000 == 0) begin hit = 0; repeat (50) @(negedge clk); end
    end
    check(n_pulses > 20, $sformatf("random run produced %0d clusters", n_pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
