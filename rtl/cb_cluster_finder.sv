// cb_cluster_finder -- digital timing branch of the Crystal Barrel readout:
// hit detection, TDCs and the ultra-fast cluster encoder for the whole
// calorimeter.
//
// The shaped timing signals of all 1380 crystal positions (1320 installed)
// are compared against two thresholds each, by analog comparators outside
// this design; their outputs enter here as comp_lo / comp_hi, indexed by the
// global crystal number. Sixteen discriminator modules (disc_module), each
// serving one section of 13 rings x 8 (or 4) phi columns, derive walk-
// corrected 120 ns hit pulses, time-stamp all comparator edges and check the
// top-left-corner cluster pattern of every crystal 60 ns after its hit
// appears. Boundary hits travel between the modules over the backplane
// (hit_backplane). The cluster flags of the 1320 installed crystals are
// summed by a pipelined adder tree (cluster_adder_tree) into a saturated
// 5-bit multiplicity, from which the trigger levels N>=1, N>=2 and N>=3 are
// sent to the central trigger. A sampler records every change of the
// multiplicity with a time stamp (cluster_count_sampler). The encoder is
// free running: a new multiplicity leaves every 5 ns cycle.
//
// Crystal numbering: module m = h * 8 + s (half h, section s) owns crystals
// cb_pkg::module_base(m) .. + its channel count - 1, numbered ring by ring
// inside the section. Rings 24 and 25 (bottom half, local rings 11 and 12)
// are not installed; their inputs are processed but excluded from the sum.
//
// Latency from a synchronised low-threshold edge at cycle T with inter-
// threshold delay dt (default walk table): hit at T + 62 - dt, pattern check
// one backplane cycle plus D cycles later, cluster flag from T + 62 - dt + 1
// + D + 1, count 9 cycles after the flag. With D = 12 that is T + 85 - dt.
//
// The cluster flags of the 60 positions in rings 24 and 25 are produced by
// the modules but not summed; lint reports those bits of flag_all as unused.
// They are kept so that every module is the same circuit and a completed
// calorimeter only needs the installed-ring mask in cb_pkg changed.
//
// Configuration (lut_*, delay_d, pulse_p) is broadcast to all modules; the
// VME readout of the TDC FIFOs is represented by plain FIFO read ports.
//
// The block structure, the sizes, the timing values and the summation follow
// the paper; placing all of it in one design (instead of 16 discriminator
// boards, a backplane and a cluster finder board), the shared configuration
// and the readout ports are this design's choices.
module cb_cluster_finder
  import cb_pkg::*;
#(
  parameter int unsigned EVAL_CYC  = WALK_EVAL_CYC,
  parameter int unsigned HIT_LEN   = HIT_LEN_CYC,
  parameter int unsigned TDC_DEPTH = 256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N_CRYSTALS-1:0]  comp_lo,
  input  logic [N_CRYSTALS-1:0]  comp_hi,
  // Configuration
  input  logic                   lut_we,
  input  logic [4:0]             lut_addr,
  input  logic [4:0]             lut_data,
  input  logic [7:0]             delay_d,
  input  logic [7:0]             pulse_p,
  // Trigger outputs
  output logic [4:0]             cluster_count,
  output logic                   n_ge1,
  output logic                   n_ge2,
  output logic                   n_ge3,
  // Per-crystal results (observability)
  output logic [N_CRYSTALS-1:0]  hit,
  output logic [N_INSTALLED-1:0] cluster_flag,
  // TDC readout, one FIFO per module
  input  logic                   tdc_rd_en    [N_MODULES],
  output logic                   tdc_rd_valid [N_MODULES],
  output tdc_word_t              tdc_rd_data  [N_MODULES],
  output logic [15:0]            tdc_lost     [N_MODULES],
  // Cluster count sampler readout
  input  logic                   cc_rd_en,
  output logic                   cc_rd_valid,
  output ccount_word_t           cc_rd_data,
  output logic [15:0]            cc_lost
);

  localparam int unsigned BP_STAGES = 1;

  // Installed channels of a module: the leading ones, rings being in order.
  function automatic int unsigned mod_installed(int unsigned m);
    int unsigned n = 0;
    for (int r = 0; r < HALF_ROWS; r++)
      if (half_installed(m / N_SECT)[r])
        n += half_wide(m / N_SECT)[r] ? sect_ncols(m % N_SECT) / 2 : sect_ncols(m % N_SECT);
    return n;
  endfunction

  function automatic int unsigned installed_base(int unsigned m);
    int unsigned n = 0;
    for (int i = 0; i < N_MODULES; i++) if (i < m) n += mod_installed(i);
    return n;
  endfunction

  logic [HALF_ROWS-1:0] edge_right [N_MODULES];
  logic [SECT_COLS-1:0] edge_top   [N_MODULES];
  logic [SECT_COLS-1:0] edge_bot   [N_MODULES];
  logic [HALF_ROWS+1:0] halo_left  [N_MODULES];
  logic [SECT_COLS-1:0] halo_top   [N_MODULES];
  logic [SECT_COLS-1:0] halo_bot   [N_MODULES];
  logic [N_CRYSTALS-1:0] flag_all;

  for (genvar m = 0; m < N_MODULES; m++) begin : g_mod
    localparam int unsigned COLS = sect_ncols(m % N_SECT);
    localparam logic [HALF_ROWS-1:0] WIDE = half_wide(m / N_SECT);
    localparam int unsigned NCH  = sect_channels(COLS, WIDE);
    localparam int unsigned BASE = module_base(m);
    localparam int unsigned NINS = mod_installed(m);
    localparam int unsigned IBAS = installed_base(m);

    disc_module #(
      .COLS(COLS), .WIDE(WIDE), .BP_STAGES(BP_STAGES), .NCH(NCH),
      .EVAL_CYC(EVAL_CYC), .HIT_LEN(HIT_LEN), .TDC_DEPTH(TDC_DEPTH)
    ) u_disc (
      .clk, .rst_n,
      .comp_lo      (comp_lo[BASE +: NCH]),
      .comp_hi      (comp_hi[BASE +: NCH]),
      .lut_we, .lut_addr, .lut_data, .delay_d, .pulse_p,
      .halo_left    (halo_left[m]),
      .halo_top     (halo_top[m]),
      .halo_bot     (halo_bot[m]),
      .edge_right   (edge_right[m]),
      .edge_top     (edge_top[m]),
      .edge_bot     (edge_bot[m]),
      .hit          (hit[BASE +: NCH]),
      .cluster_flag (flag_all[BASE +: NCH]),
      .tdc_rd_en    (tdc_rd_en[m]),
      .tdc_rd_valid (tdc_rd_valid[m]),
      .tdc_rd_data  (tdc_rd_data[m]),
      .tdc_lost     (tdc_lost[m])
    );

    assign cluster_flag[IBAS +: NINS] = flag_all[BASE +: NINS];
  end

  hit_backplane #(.REG_STAGES(BP_STAGES)) u_bp (
    .clk, .rst_n,
    .edge_right, .edge_top, .edge_bot,
    .halo_left, .halo_top, .halo_bot
  );

  cluster_adder_tree #(.N_IN(N_INSTALLED)) u_sum (
    .clk, .rst_n,
    .flags (cluster_flag),
    .count (cluster_count),
    .n_ge1, .n_ge2, .n_ge3
  );

  cluster_count_sampler u_ccs (
    .clk, .rst_n,
    .count    (cluster_count),
    .rd_en    (cc_rd_en),
    .rd_valid (cc_rd_valid),
    .rd_data  (cc_rd_data),
    .lost_cnt (cc_lost)
  );

endmodule
