// tb_disc_module -- self-checking test of one full discriminator module
// (8 columns, 92 channels, rings 0..2 of 30 crystals per ring).
//
// Stimulus: comparator pulses on random channels (high edge 0..35 cycles
// after the low edge, or none) and slowly changing random halo bits.
// Checks:
//   * cluster flags: a reference model built from the rules, with its own
//     cell-to-channel map (rings 0..2: 4 crystals, 2 cells each; rings 3..12:
//     8 crystals), reads the hit outputs, delays them by the one backplane
//     cycle, adds the halo bits for cells outside the section and runs, per
//     crystal, "leading edge of own hit at T -> at T + D check hit & none of
//     up, up-left, left, down-left -> flag for P cycles from T + D + 1".
//     The flag vector must match every cycle.
//   * border outputs: edge_right / edge_top / edge_bot equal the current hit
//     of the border cells every cycle.
//   * directed pulses: hit start 62 - dt cycles after the synchronised low
//     edge, 24 cycles long; four TDC words (low/high, rising/falling) with the
//     right comparator numbers and stamps dt apart; an isolated crystal
//     gives a flag, the right one of two neighbours does not, a neighbour
//     that fires 5 cycles later still suppresses the earlier crystal.
//
// The 92 channels, the two comparators per channel and the pattern come
// from the readout description; the cell map of the 30-crystal rings and the
// one-cycle alignment delay are this design's choices.
`timescale 1ns/1ps
module tb_disc_module;
  import cb_pkg::*;
  localparam int NCH = 92;
  localparam int R = 13, C = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NCH-1:0] comp_lo = '0, comp_hi = '0;
  logic lut_we = 1'b0;
  logic [4:0] lut_addr = '0, lut_data = '0;
  logic [7:0] delay_d = 8'd12, pulse_p = 8'd26;
  logic [HALF_ROWS+1:0] halo_left = '0;
  logic [SECT_COLS-1:0] halo_top = '0, halo_bot = '0;
  logic [HALF_ROWS-1:0] edge_right;
  logic [SECT_COLS-1:0] edge_top, edge_bot;
  logic [NCH-1:0] hit, cluster_flag;
  logic tdc_rd_en = 1'b1, tdc_rd_valid;
  tdc_word_t tdc_rd_data;
  logic [15:0] tdc_lost;
  int checks = 0, failures = 0, cyc = 0;

  disc_module dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit wide(int r); return r < 3; endfunction
  function automatic int ch(int r, int c);
    if (r < 3) return r * 4 + c / 2;
    return 12 + (r - 3) * 8 + c;
  endfunction

  // ---- Reference model of the cluster flags ----
  logic [NCH-1:0] hit_prev = '0, exp_flag;
  logic cell_q [R][C];
  typedef enum {W, D, K, O} rs_t;
  rs_t st [NCH];
  int  cnt [NCH];
  int  n_flags = 0, n_supp = 0;

  function automatic bit cellv(int r, int c);
    if (c < 0) return halo_left[r + 1];
    if (r < 0) return halo_top[c];
    if (r >= R) return halo_bot[c];
    return hit_prev[ch(r, c)];
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      foreach (st[i]) st[i] = W;
      foreach (cell_q[r, c]) cell_q[r][c] = 0;
      hit_prev = '0;
    end else begin
      cyc++;
      // Compare.
      for (int k = 0; k < NCH; k++) exp_flag[k] = (st[k] == O);
      checks++;
      if (cluster_flag !== exp_flag) begin
        failures++;
        if (failures < 10) $display("FAIL cyc=%0d flags %h expected %h", cyc, cluster_flag, exp_flag);
      end
      checks++;
      for (int r = 0; r < R; r++)
        if (edge_right[r] !== hit[ch(r, C - 1)]) begin failures++; $display("FAIL edge_right[%0d]", r); end
      for (int c = 0; c < C; c++)
        if (edge_top[c] !== hit[ch(0, c)] || edge_bot[c] !== hit[ch(R - 1, c)]) begin
          failures++; $display("FAIL edge_top/bot[%0d]", c);
        end
      // Advance the model (inputs of this edge).
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          int k;
          bit h, nb;
          if (wide(r) && c % 2 == 1) continue;
          k = ch(r, c);
          h = cellv(r, c);
          nb = cellv(r - 1, c) | cellv(r - 1, c - 1) | cellv(r, c - 1) | cellv(r + 1, c - 1);
          case (st[k])
            W: if (h && !cell_q[r][c]) begin st[k] = D; cnt[k] = 1; end
            D: begin if (cnt[k] + 1 >= delay_d) st[k] = K; cnt[k]++; end
            K: begin
                 if (h && !nb) begin st[k] = O; cnt[k] = 0; n_flags++; end
                 else begin st[k] = W; if (h) n_supp++; end
               end
            O: begin if (cnt[k] + 1 >= pulse_p) st[k] = W; cnt[k]++; end
          endcase
          cell_q[r][c] = h;
        end
      hit_prev = hit;
    end
  end

  // ---- Pulse generation ----
  bit busy [NCH];
  task automatic pulse(int k, int dt, int width);
    busy[k] = 1;
    @(negedge clk);
    comp_lo[k] = 1'b1;
    if (dt == 0) comp_hi[k] = 1'b1;
    for (int i = 1; i <= width; i++) begin
      @(negedge clk);
      if (i == dt) comp_hi[k] = 1'b1;
    end
    comp_lo[k] = 1'b0;
    comp_hi[k] = 1'b0;
    repeat (120) @(negedge clk);   // let the channel's hit end
    busy[k] = 0;
  endtask

  // ---- Observation of one channel for directed checks ----
  int obs_k = 0, lo_sync_cyc = 0, hit_rise = -1, hit_len = 0, flag_rise = -1;
  logic obs_lo_q = 0, obs_hit_q = 0, obs_flag_q = 0;
  always @(posedge clk) begin
    if (dut.comp_sync[2 * obs_k] && !obs_lo_q) lo_sync_cyc = cyc;
    if (hit[obs_k] && !obs_hit_q) begin hit_rise = cyc; hit_len = 0; end
    if (hit[obs_k]) hit_len++;
    if (cluster_flag[obs_k] && !obs_flag_q) flag_rise = cyc;
    obs_lo_q = dut.comp_sync[2 * obs_k];
    obs_hit_q = hit[obs_k];
    obs_flag_q = cluster_flag[obs_k];
  end

  // ---- TDC reader ----
  tdc_word_t words [$];
  always @(posedge clk) if (rst_n && tdc_rd_en && tdc_rd_valid) words.push_back(tdc_rd_data);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n0, k, k2;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    // Directed 1: isolated narrow crystal (ring 6, column 3), dt = 10.
    k = ch(6, 3);
    obs_k = k;
    words.delete();
    n0 = n_flags;
    pulse(k, 10, 40);
    check(hit_rise - lo_sync_cyc == 52, $sformatf("hit %0d after low edge, expected 52", hit_rise - lo_sync_cyc));
    check(hit_len == 24, $sformatf("hit length %0d", hit_len));
    check(flag_rise - hit_rise == 14, $sformatf("flag %0d after hit, expected 1 + D + 1 = 14", flag_rise - hit_rise));
    check(n_flags == n0 + 1, "isolated crystal gives one cluster");
    check(words.size() == 4, $sformatf("%0d TDC words, expected 4", words.size()));
    if (words.size() == 4) begin
      check(words[0].chan == 2 * k && !words[0].falling, "first word: low rising");
      check(words[1].chan == 2 * k + 1 && !words[1].falling, "second word: high rising");
      check(words[1].ts - words[0].ts == 10, "stamps 10 cycles apart");
      check(words[2].falling && words[3].falling, "then two falling edges");
    end

    // Directed 2: two crystals side by side in ring 8: only the left flags.
    k = ch(8, 4); k2 = ch(8, 5);
    obs_k = k2;
    n0 = n_flags;
    fork pulse(k, 10, 40); pulse(k2, 10, 40); join
    check(n_flags == n0 + 1, "neighbour pair gives one cluster");
    check(flag_rise < hit_rise, "right crystal of the pair has no flag");

    // Directed 3: left crystal fires 5 cycles after the right one.
    k = ch(9, 2); k2 = ch(9, 3);
    n0 = n_flags;
    fork pulse(k2, 10, 40); begin repeat (5) @(negedge clk); pulse(k, 10, 40); end join
    check(n_flags == n0 + 1, "late neighbour: still one cluster");

    // Directed 4: crystal in column 0 with its left halo neighbour set.
    k = ch(5, 0);
    n0 = n_flags;
    @(negedge clk); halo_left[5 + 1] = 1'b1;
    pulse(k, 10, 40);
    halo_left = '0;
    check(n_flags == n0, "left halo neighbour suppresses column 0 crystal");
    // Same crystal, halo clear: flag.
    pulse(k, 10, 40);
    check(n_flags == n0 + 1, "column 0 crystal without halo neighbour: cluster");

    // Directed 5: wide crystal above a narrow pair (ring 2 / ring 3).
    k = ch(2, 2); k2 = ch(3, 3);
    n0 = n_flags;
    fork pulse(k, 10, 40); pulse(k2, 10, 40); join
    check(n_flags == n0 + 1, "wide crystal over narrow: one cluster");

    // Directed 6: low threshold only -> no hit, no cluster.
    k = ch(7, 7);
    obs_k = k;
    hit_rise = -1;
    pulse(k, -1, 40);
    check(hit_rise == -1, "below high threshold: no hit");

    // Random phase.
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        int kk;
        kk = $urandom_range(0, NCH - 1);
        if (!busy[kk]) fork
          automatic int k3 = kk;
          automatic int dt = ($urandom_range(0, 9) == 0) ? -1 : $urandom_range(0, 35);
          pulse(k3, dt, $urandom_range(30, 50));
        join_none
      end
      if ($urandom_range(0, 15) == 0) halo_left[$urandom_range(0, HALF_ROWS + 1)] ^= 1'b1;
      if ($urandom_range(0, 15) == 0) halo_top[$urandom_range(0, C - 1)] ^= 1'b1;
      if ($urandom_range(0, 15) == 0) halo_bot[$urandom_range(0, C - 1)] ^= 1'b1;
    end
    repeat (300) @(negedge clk);
    check(n_flags > 50 && n_supp > 50, $sformatf("random phase: %0d clusters, %0d suppressed", n_flags, n_supp));
    check(tdc_lost == 0, "no TDC edges lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
