// tb_hit_backplane -- self-checking test of the boundary-hit exchange
// between the 16 discriminator modules.
//
// Random border hits are applied to all modules. The testbench places them
// into a model of the global 26 x 60 hit matrix (module m = h * 8 + s covers
// rings 13h .. 13h + 12 and the columns of section s: 0..3 for s = 0,
// 4 + 8(s - 1) .. 11 + 8(s - 1) otherwise) and reads every module's expected
// halo straight from that matrix: the column left of the section with phi
// wrapping from column 0 to 59, the ring above and the ring below, and zero
// outside rings 0..25. The halo must equal that expectation one cycle (the
// backplane register) after the edges were applied. It also checks the bit
// counts a top-half module sends: 8 down, 13 right, 1 right-below.
//
// The 8 / 13 / 1 bit exchange comes from the readout description; the one-
// cycle register and the port layout are this design's choices.
`timescale 1ns/1ps
module tb_hit_backplane;
  import cb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [HALF_ROWS-1:0] edge_right [N_MODULES];
  logic [SECT_COLS-1:0] edge_top   [N_MODULES];
  logic [SECT_COLS-1:0] edge_bot   [N_MODULES];
  logic [HALF_ROWS+1:0] halo_left  [N_MODULES];
  logic [SECT_COLS-1:0] halo_top   [N_MODULES];
  logic [SECT_COLS-1:0] halo_bot   [N_MODULES];
  int checks = 0, failures = 0;

  hit_backplane dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Global matrix model.
  bit g [CB_ROWS][CB_COLS];

  function automatic int col0(int s); return s == 0 ? 0 : 4 + 8 * (s - 1); endfunction
  function automatic int ncol(int s); return s == 0 ? 4 : 8; endfunction
  function automatic bit at(int r, int c);
    if (r < 0 || r >= CB_ROWS) return 0;
    return g[r][(c + CB_COLS) % CB_COLS];
  endfunction

  initial begin
    logic [HALF_ROWS+1:0] el;
    logic [SECT_COLS-1:0] et, eb;
    int sent_down, sent_right, sent_rb;
    for (int m = 0; m < N_MODULES; m++) begin
      edge_right[m] = '0; edge_top[m] = '0; edge_bot[m] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      foreach (g[r, c]) g[r][c] = 0;
      for (int m = 0; m < N_MODULES; m++) begin
        int h, s, r0, c0, nc;
        h = m / 8; s = m % 8; r0 = 13 * h; c0 = col0(s); nc = ncol(s);
        edge_right[m] = HALF_ROWS'($urandom);
        edge_top[m]   = SECT_COLS'($urandom) & SECT_COLS'((1 << nc) - 1);
        edge_bot[m]   = SECT_COLS'($urandom) & SECT_COLS'((1 << nc) - 1);
        // Make the model consistent: corner cells belong to both edges.
        edge_top[m][nc-1] = edge_right[m][0];
        edge_bot[m][nc-1] = edge_right[m][HALF_ROWS-1];
        for (int r = 0; r < HALF_ROWS; r++) g[r0 + r][c0 + nc - 1] = edge_right[m][r];
        for (int c = 0; c < nc; c++) begin
          g[r0][c0 + c] = edge_top[m][c];
          g[r0 + HALF_ROWS - 1][c0 + c] = edge_bot[m][c];
        end
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < N_MODULES; m++) begin
        int h, s, r0, c0, nc;
        h = m / 8; s = m % 8; r0 = 13 * h; c0 = col0(s); nc = ncol(s);
        for (int i = 0; i < HALF_ROWS + 2; i++) el[i] = at(r0 - 1 + i, c0 - 1);
        et = '0; eb = '0;
        for (int c = 0; c < nc; c++) begin
          et[c] = at(r0 - 1, c0 + c);
          eb[c] = at(r0 + HALF_ROWS, c0 + c);
        end
        checks++;
        if (halo_left[m] != el || halo_top[m] != et || halo_bot[m] != eb) begin
          failures++;
          if (failures < 10)
            $display("FAIL m=%0d left %h/%h top %h/%h bot %h/%h", m, halo_left[m], el,
                     halo_top[m], et, halo_bot[m], eb);
        end
      end
    end
    // Bits a full top-half module (m = 1) sends, counted from the wiring:
    // toggle each of its edge bits alone and see where it shows up.
    sent_down = 0; sent_right = 0; sent_rb = 0;
    for (int b = 0; b < HALF_ROWS + 2 * SECT_COLS; b++) begin
      @(negedge clk);
      for (int m = 0; m < N_MODULES; m++) begin
        edge_right[m] = '0; edge_top[m] = '0; edge_bot[m] = '0;
      end
      if (b < HALF_ROWS) edge_right[1][b] = 1'b1;
      else if (b < HALF_ROWS + SECT_COLS) edge_bot[1][b - HALF_ROWS] = 1'b1;
      else edge_top[1][b - HALF_ROWS - SECT_COLS] = 1'b1;
      @(posedge clk);
      #1;
      if (halo_top[9] != '0) sent_down++;
      if (halo_left[2][HALF_ROWS:1] != '0) sent_right++;
      if (halo_left[10][0]) sent_rb++;
    end
    checks++;
    if (sent_down != 8 || sent_right != 13 || sent_rb != 1) begin
      failures++;
      $display("FAIL: top module sends %0d down, %0d right, %0d right-below", sent_down, sent_right, sent_rb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
