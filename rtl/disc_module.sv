// disc_module -- one high density discriminator module of the timing branch.
//
// A module serves one section of the calorimeter: 13 rings by 8 phi columns
// (92 crystals; the narrow section at columns 0..3 holds 46). Per crystal it
// receives the outputs of two comparators (low and high threshold) and
//   * turns them into a walk-corrected 120 ns hit pulse (walk_corr_disc),
//   * time-stamps every edge of both comparators (multihit_tdc), and
//   * runs the first clustering stage: the delayed top-left-corner pattern
//     check of every crystal of the section (cluster_cell).
// The hits are arranged in a local cell grid of HALF_ROWS x COLS cells. A
// crystal of a 30-crystal ring (bit set in WIDE) covers two cells; its
// pattern is evaluated at its left cell. Neighbour cells outside the section
// come from the backplane (halo_*), which delays them by BP_STAGES cycles;
// the module delays its own hits by the same number of cycles before the
// pattern check. The hits of its border cells are sent out (edge_*) without
// delay. Local channel numbering runs ring by ring from the top, left to
// right (cb_pkg::cell_channel); comparator 2k is channel k's low threshold,
// 2k + 1 its high threshold.
//
// Channel count, the dual comparators, the per-channel walk correction, the
// TDC of all comparators and the section-wise clustering follow the paper.
// Shared configuration ports (one walk table, one D and P for all channels)
// and the halo/edge port layout are this design's choices.
//
// Unused inputs (reported by lint, left as they are): the halo ports have
// the width of a full section so that all 16 modules share one backplane
// format. The pattern only looks left, so the ring below is read for
// columns 0..COLS-2 and halo_bot[COLS-1..7] is never used; a 4-column module
// also leaves halo_top[7:4] unused, and in rings of 2-cell crystals only the
// left cell is evaluated, so some halo_top bits are unused there.
//
// Timing: hit pulses start EVAL + 2 + lut[dt] cycles after the synchronised
// low-threshold edge (walk_corr_disc); the cluster cell sees them BP_STAGES
// cycles later; cluster_flag pulses start D + 1 cycles after that.
module disc_module
  import cb_pkg::*;
#(
  parameter int unsigned        COLS      = 8,
  parameter logic [HALF_ROWS-1:0] WIDE    = 13'b0_0000_0000_0111,
  parameter int unsigned        BP_STAGES = 1,
  parameter int unsigned        NCH       = sect_channels(COLS, WIDE),
  parameter int unsigned        EVAL_CYC  = WALK_EVAL_CYC,
  parameter int unsigned        HIT_LEN   = HIT_LEN_CYC,
  parameter int unsigned        TDC_DEPTH = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // Comparators (asynchronous)
  input  logic [NCH-1:0]       comp_lo,
  input  logic [NCH-1:0]       comp_hi,
  // Configuration
  input  logic                 lut_we,
  input  logic [4:0]           lut_addr,
  input  logic [4:0]           lut_data,
  input  logic [7:0]           delay_d,
  input  logic [7:0]           pulse_p,
  // Backplane
  input  logic [HALF_ROWS+1:0] halo_left,
  input  logic [SECT_COLS-1:0] halo_top,
  input  logic [SECT_COLS-1:0] halo_bot,
  output logic [HALF_ROWS-1:0] edge_right,
  output logic [SECT_COLS-1:0] edge_top,
  output logic [SECT_COLS-1:0] edge_bot,
  // Results
  output logic [NCH-1:0]       hit,
  output logic [NCH-1:0]       cluster_flag,
  // TDC readout
  input  logic                 tdc_rd_en,
  output logic                 tdc_rd_valid,
  output tdc_word_t            tdc_rd_data,
  output logic [15:0]          tdc_lost
);

  localparam int unsigned R = HALF_ROWS;

  // Hit detection and synchronised comparators.
  logic [2*NCH-1:0] comp_sync;
  for (genvar k = 0; k < NCH; k++) begin : g_ch
    walk_corr_disc #(.EVAL_CYC(EVAL_CYC), .HIT_LEN(HIT_LEN)) u_disc (
      .clk, .rst_n,
      .comp_lo  (comp_lo[k]),
      .comp_hi  (comp_hi[k]),
      .lut_we, .lut_addr, .lut_data,
      .hit_out  (hit[k]),
      .lo_sync  (comp_sync[2*k]),
      .hi_sync  (comp_sync[2*k+1])
    );
  end

  // Multi-hit TDC over all comparators.
  multihit_tdc #(.N_CH(2*NCH), .DEPTH(TDC_DEPTH)) u_tdc (
    .clk, .rst_n,
    .in       (comp_sync),
    .rd_en    (tdc_rd_en),
    .rd_valid (tdc_rd_valid),
    .rd_data  (tdc_rd_data),
    .lost_cnt (tdc_lost)
  );

  // Local cell grid and its delayed copy for the pattern check.
  logic [R-1:0][COLS-1:0] grid, gridd;
  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      assign grid[r][c] = hit[cell_channel(r, c, COLS, WIDE)];
    end
  end

  if (BP_STAGES == 0) begin : g_nodly
    assign gridd = grid;
  end else begin : g_dly
    logic [BP_STAGES-1:0][R-1:0][COLS-1:0] pipe;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pipe <= '0;
      end else begin
        pipe[0] <= grid;
        for (int k = 1; k < BP_STAGES; k++) pipe[k] <= pipe[k-1];
      end
    end
    assign gridd = pipe[BP_STAGES-1];
  end

  // Border cells for the neighbours.
  for (genvar r = 0; r < R; r++) begin : g_er
    assign edge_right[r] = grid[r][COLS-1];
  end
  assign edge_top = SECT_COLS'(grid[0]);
  assign edge_bot = SECT_COLS'(grid[R-1]);

  // Cluster cells at the primary cell of every crystal.
  for (genvar r = 0; r < R; r++) begin : g_crow
    for (genvar c = 0; c < COLS; c++) begin : g_ccol
      if (!WIDE[r] || (c % 2 == 0)) begin : g_prim
        localparam int unsigned CH = cell_channel(r, c, COLS, WIDE);
        logic n_up, n_ul, n_l, n_dl;
        if (r > 0) begin : g_up_in
          assign n_up = gridd[r-1][c];
          assign n_ul = (c > 0) ? gridd[r-1][(c > 0) ? c-1 : 0] : halo_left[r];
        end else begin : g_up_halo
          assign n_up = halo_top[c];
          assign n_ul = (c > 0) ? halo_top[(c > 0) ? c-1 : 0] : halo_left[0];
        end
        assign n_l = (c > 0) ? gridd[r][(c > 0) ? c-1 : 0] : halo_left[r+1];
        if (r < R - 1) begin : g_dn_in
          assign n_dl = (c > 0) ? gridd[r+1][(c > 0) ? c-1 : 0] : halo_left[r+2];
        end else begin : g_dn_halo
          assign n_dl = (c > 0) ? halo_bot[(c > 0) ? c-1 : 0] : halo_left[R+1];
        end
        cluster_cell u_cell (
          .clk, .rst_n,
          .delay_d, .pulse_p,
          .hit       (gridd[r][c]),
          .up        (n_up),
          .up_left   (n_ul),
          .left      (n_l),
          .down_left (n_dl),
          .cluster   (cluster_flag[CH])
        );
      end
    end
  end

endmodule
