// tb_cb_cluster_finder -- end-to-end, full-size test of the timing branch
// and cluster encoder (all 1380 crystal positions, 16 modules, default
// parameters: 150 ns high-threshold window, 120 ns hits, D = 60 ns,
// P = 130 ns, 256-word TDC FIFOs).
//
// The testbench has its own description of the calorimeter: 26 rings x 60
// phi cells, rings 0..2 and 23..25 with 30 crystals (two cells each), rings
// 24/25 not installed, sections of 4 / 8 / ... / 8 columns, modules m = half
// * 8 + section numbered ring by ring. From it the reference model works on
// the global hit matrix, with the phi wrap (column 59 is left of column 0)
// and no neighbours beyond rings 0 and 25. Every crystal runs the rule
// "leading edge of its hit at T -> at T + D: own hit and none of up,
// up-left, left, down-left -> cluster for P cycles", on hits delayed by the
// one backplane cycle. Checked every cycle: all 1320 cluster flags, and the
// multiplicity (population count of the expected flags 9 cycles earlier,
// saturated at 16) with N>=1/2/3. Also checked: hit start = 64 - dt cycles
// after a comparator low edge (walk correction: constant relative to the
// pulse start), no hit without a high-threshold edge, every TDC word of
// every module equal to a generated comparator edge (comparator, polarity,
// stamp) and every edge read, every sampler record equal to the multiplicity
// at its stamp.
//
// Directed cases exercise isolated clusters, pairs split across modules
// (phi boundary, half boundary, diagonal over the half boundary, phi wrap), a
// neighbour that fires late (delayed check), the >= 16 overflow and pulses
// below the high threshold; then random showers run over the whole
// calorimeter. The number of times each mechanism occurred is printed.
//
// Sizes, pattern, timing values and the 45 ns count latency come from the
// readout description; the section layout is read off its topology
// drawings; synchroniser, backplane and FIFO details are this design's.
`timescale 1ns/1ps
module tb_cb_cluster_finder;
  import cb_pkg::*;
  localparam int NR = 26, NC = 60, NX = 1380, NI = 1320, LAT = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NX-1:0] comp_lo = '0, comp_hi = '0;
  logic lut_we = 1'b0;
  logic [4:0] lut_addr = '0, lut_data = '0;
  logic [7:0] delay_d = 8'd12, pulse_p = 8'd26;
  logic [4:0] cluster_count;
  logic n_ge1, n_ge2, n_ge3;
  logic [NX-1:0] hit;
  logic [NI-1:0] cluster_flag;
  logic tdc_rd_en [16];
  logic tdc_rd_valid [16];
  tdc_word_t tdc_rd_data [16];
  logic [15:0] tdc_lost [16];
  logic cc_rd_en = 1'b1, cc_rd_valid;
  ccount_word_t cc_rd_data;
  logic [15:0] cc_lost;
  int checks = 0, failures = 0;

  cb_cluster_finder dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- Geometry ----------------
  int gidx [NR][NC];     // crystal of each cell
  int iidx [NX];         // installed index or -1
  int xmod [NX], xloc [NX], xring [NX], xcol [NX];

  function automatic bit wide(int r); return r < 3 || r >= 23; endfunction
  function automatic int sect(int c); return c < 4 ? 0 : (c - 4) / 8 + 1; endfunction
  function automatic int scol0(int s); return s == 0 ? 0 : 4 + 8 * (s - 1); endfunction
  function automatic int sncol(int s); return s == 0 ? 4 : 8; endfunction

  initial begin
    int base = 0, ins = 0;
    for (int m = 0; m < 16; m++) begin
      int h, s, n;
      h = m / 8; s = m % 8; n = 0;
      for (int lr = 0; lr < 13; lr++) begin
        int r;
        r = 13 * h + lr;
        for (int lc = 0; lc < sncol(s); lc++) begin
          int c;
          c = scol0(s) + lc;
          if (wide(r) && lc % 2 == 1) begin
            gidx[r][c] = gidx[r][c - 1];
          end else begin
            gidx[r][c] = base + n;
            xmod[base + n] = m; xloc[base + n] = n; xring[base + n] = r; xcol[base + n] = c;
            iidx[base + n] = (r <= 23) ? ins : -1;
            if (r <= 23) ins++;
            n++;
          end
        end
      end
      base += n;
    end
    if (base != NX || ins != NI) $display("FAIL: geometry %0d / %0d", base, ins);
  end

  // ---------------- Reference model ----------------
  logic [NX-1:0] hit_prev = '0;
  bit   cell_q [NX];
  typedef enum {W, D, K, O} rs_t;
  rs_t st [NX];
  int  cnt [NX];
  logic [NI-1:0] exp_flag;
  int   exp_cnt_hist [LAT + 1];
  int   n_flags = 0, n_supp = 0, n_supp_remote = 0, n_ovf = 0, n_ge3_cyc = 0;
  int   tcount = 0;
  int   count_at [int];

  function automatic bit cellv(int r, int c);
    if (r < 0 || r >= NR) return 0;
    return hit_prev[gidx[r][(c + NC) % NC]];
  endfunction
  function automatic bit remote(int x, int r, int c);
    if (r < 0 || r >= NR) return 0;
    return cellv(r, c) && xmod[gidx[r][(c + NC) % NC]] != xmod[x];
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      int e;
      // Compare flags.
      for (int x = 0; x < NX; x++) if (iidx[x] >= 0) exp_flag[iidx[x]] = (st[x] == O);
      checks++;
      if (cluster_flag !== exp_flag) begin
        failures++;
        if (failures < 10)
          for (int x = 0; x < NX; x++)
            if (iidx[x] >= 0 && cluster_flag[iidx[x]] !== exp_flag[iidx[x]])
              $display("FAIL t=%0d crystal %0d (ring %0d col %0d): flag %0b expected %0b",
                       tcount, x, xring[x], xcol[x], cluster_flag[iidx[x]], exp_flag[iidx[x]]);
      end
      // Compare the multiplicity of LAT cycles ago.
      for (int i = LAT; i > 0; i--) exp_cnt_hist[i] = exp_cnt_hist[i-1];
      e = $countones(exp_flag);
      exp_cnt_hist[0] = (e > 16) ? 16 : e;
      if (tcount > LAT) begin
        e = exp_cnt_hist[LAT];
        checks++;
        if (cluster_count !== 5'(e) || n_ge1 !== (e >= 1) || n_ge2 !== (e >= 2) || n_ge3 !== (e >= 3)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d count %0d expected %0d", tcount, cluster_count, e);
        end
        if (e == 16) n_ovf++;
        if (e >= 3) n_ge3_cyc++;
      end
      count_at[tcount] = cluster_count;
      // Advance the model.
      for (int x = 0; x < NX; x++) begin
        int r, c;
        bit h, nb;
        r = xring[x]; c = xcol[x];
        h = hit_prev[x];
        case (st[x])
          W: if (h && !cell_q[x]) begin st[x] = D; cnt[x] = 1; end
          D: begin if (cnt[x] + 1 >= delay_d) st[x] = K; cnt[x]++; end
          K: begin
               nb = cellv(r - 1, c) | cellv(r - 1, c - 1) | cellv(r, c - 1) | cellv(r + 1, c - 1);
               if (h && !nb) begin st[x] = O; cnt[x] = 0; if (iidx[x] >= 0) n_flags++; end
               else begin
                 st[x] = W;
                 if (h) begin
                   n_supp++;
                   if (remote(x, r - 1, c) | remote(x, r - 1, c - 1) | remote(x, r, c - 1) |
                       remote(x, r + 1, c - 1)) n_supp_remote++;
                 end
               end
             end
          O: begin if (cnt[x] + 1 >= pulse_p) st[x] = W; cnt[x]++; end
        endcase
        cell_q[x] = h;
      end
      hit_prev = hit;
      tcount <= tcount + 1;
    end else begin
      foreach (st[x]) begin st[x] = W; cell_q[x] = 0; end
      foreach (exp_cnt_hist[i]) exp_cnt_hist[i] = 0;
    end
  end

  // ---------------- TDC edge prediction and readout ----------------
  // A comparator change applied before the rising edge with tb count X is
  // stamped X + 2 (two synchroniser flops).
  int pend [string];
  int n_edges = 0, n_words = 0, n_cc = 0, n_cc_changes = 0;
  logic [NX-1:0] lo_prev = '0, hi_prev = '0;
  int last_cnt = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int x = 0; x < NX; x++) begin
        if (comp_lo[x] != lo_prev[x]) begin
          pend[$sformatf("%0d_%0d_%0d_%0d", xmod[x], 2 * xloc[x], !comp_lo[x], tcount + 2)] = 1;
          n_edges++;
        end
        if (comp_hi[x] != hi_prev[x]) begin
          pend[$sformatf("%0d_%0d_%0d_%0d", xmod[x], 2 * xloc[x] + 1, !comp_hi[x], tcount + 2)] = 1;
          n_edges++;
        end
      end
      lo_prev = comp_lo; hi_prev = comp_hi;
      for (int m = 0; m < 16; m++) begin
        if (tdc_rd_valid[m]) begin
          string key;
          key = $sformatf("%0d_%0d_%0d_%0d", m, tdc_rd_data[m].chan, tdc_rd_data[m].falling,
                          tdc_rd_data[m].ts);
          checks++;
          n_words++;
          if (!pend.exists(key)) begin
            failures++;
            if (failures < 10) $display("FAIL: unexpected TDC word %s", key);
          end else pend.delete(key);
        end
      end
      if (cc_rd_valid) begin
        checks++;
        n_cc++;
        if (!count_at.exists(int'(cc_rd_data.ts)) || count_at[int'(cc_rd_data.ts)] != int'(cc_rd_data.count)) begin
          failures++;
          if (failures < 10) $display("FAIL: sampler record count %0d ts %0d", cc_rd_data.count, cc_rd_data.ts);
        end
      end
      if (int'(cluster_count) != last_cnt) n_cc_changes++;
      last_cnt = cluster_count;
    end
  end
  initial foreach (tdc_rd_en[m]) tdc_rd_en[m] = 1'b1;

  // ---------------- Pulses ----------------
  bit busy [NX];
  int n_hits = 0, n_trunc = 0, n_walk_ok = 0, n_pulses = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Low comparator for 'width' cycles, high comparator from dt (dt < 0:
  // never). Checks the hit of the crystal.
  task automatic pulse(int x, int dt, int width = 40);
    int rise;
    busy[x] = 1;
    n_pulses++;
    rise = -1;
    @(negedge clk);
    comp_lo[x] = 1'b1;
    if (dt == 0) comp_hi[x] = 1'b1;
    for (int i = 1; i <= 130; i++) begin
      @(negedge clk);
      if (i == dt) comp_hi[x] = 1'b1;
      if (i == width) begin comp_lo[x] = 1'b0; comp_hi[x] = 1'b0; end
      if (hit[x] && rise < 0) rise = i;
    end
    if (dt < 0 || dt > 30) begin
      check(rise < 0, $sformatf("crystal %0d: no hit without high edge", x));
      n_trunc++;
    end else begin
      check(rise + dt == 64, $sformatf("crystal %0d: hit at %0d with dt %0d", x, rise, dt));
      if (rise + dt == 64) n_walk_ok++;
      n_hits++;
    end
    busy[x] = 0;
  endtask

  function automatic int X(int r, int c); return gidx[r][(c + NC) % NC]; endfunction

  initial begin
    int n0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    // Isolated clusters in several modules.
    n0 = n_flags;
    fork
      pulse(X(0, 0), 5); pulse(X(6, 10), 12); pulse(X(12, 30), 0);
      pulse(X(13, 45), 20); pulse(X(23, 58), 30); pulse(X(18, 2), 8);
    join
    check(n_flags == n0 + 6, "six isolated clusters");
    // Pairs split over module borders: one cluster each.
    n0 = n_flags;
    fork
      pulse(X(8, 3), 10);  pulse(X(8, 4), 10);    // phi border, sections 0/1
      pulse(X(12, 20), 10); pulse(X(13, 20), 10); // half border, same column
      pulse(X(12, 27), 10); pulse(X(13, 28), 10); // diagonal over the half border
      pulse(X(10, 59), 10); pulse(X(10, 0), 10);  // phi wrap
      pulse(X(14, 35), 10); pulse(X(13, 36), 10); // up-left over the half border
    join
    check(n_flags == n0 + 5, "five pairs across module borders give five clusters");
    // Late left neighbour over a module border.
    n0 = n_flags;
    fork
      pulse(X(9, 12), 10);
      begin repeat (5) @(negedge clk); pulse(X(9, 11), 10); end
    join
    check(n_flags == n0 + 1, "late neighbour: one cluster");
    // Overflow: 20 isolated clusters at once.
    n0 = n_ovf;
    for (int i = 0; i < 20; i++) begin
      fork automatic int k = i; pulse(X(4 + 10 * (k % 2), 3 * k), 10); join_none
    end
    wait fork;
    check(n_ovf > n0, "multiplicity saturates at 16");
    // Below the high threshold.
    fork pulse(X(7, 7), -1); pulse(X(15, 40), 40, 50); join

    // Random showers over the installed rings.
    for (int t = 0; t < 30000; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 11) == 0) begin
        int r, c, n;
        r = $urandom_range(0, 23); c = $urandom_range(0, NC - 1);
        n = $urandom_range(1, 4);
        for (int j = 0; j < n; j++) begin
          int rr, cc, x;
          rr = r + $urandom_range(0, 1); cc = c + $urandom_range(0, 1);
          if (rr > 23) rr = 23;
          x = X(rr, cc);
          if (!busy[x]) begin
            busy[x] = 1;
            fork
              automatic int xx = x;
              automatic int dt = ($urandom_range(0, 9) == 0) ? -1 : $urandom_range(0, 30);
              pulse(xx, dt, dt + $urandom_range(5, 30));
            join_none
          end
        end
      end
    end
    wait fork;
    repeat (400) @(negedge clk);
    checks++;
    if (pend.size() != 0) begin failures++; $display("FAIL: %0d TDC edges never read", pend.size()); end
    for (int m = 0; m < 16; m++) check(tdc_lost[m] == 0, $sformatf("module %0d lost TDC edges", m));
    check(cc_lost == 0, "sampler lost records");
    check(n_cc == n_cc_changes, $sformatf("sampler records %0d, count changes %0d", n_cc, n_cc_changes));
    $display("MECH pulses=%0d hits=%0d walk_corrected=%0d truncated=%0d", n_pulses, n_hits, n_walk_ok, n_trunc);
    $display("MECH clusters=%0d suppressed_checks=%0d suppressed_by_other_module=%0d",
             n_flags, n_supp, n_supp_remote);
    $display("MECH overflow_cycles=%0d ge3_cycles=%0d tdc_edges=%0d tdc_words=%0d sampler_records=%0d",
             n_ovf, n_ge3_cyc, n_edges, n_words, n_cc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
