// cluster_adder_tree -- pipelined count of the cluster flags of all crystals.
//
// Every installed crystal delivers one yes/no cluster flag. The flags are
// added in a tree, following the paper's structure for 1320 inputs:
//   level 1: 320 adders, each summing a consecutive group of 4 or 5 flags;
//   level 2: 320 -> 256 values: the first 64 pairs are added, the remaining
//            192 values pass unchanged;
//   then:    256 -> 128 -> ... -> 1 by adding pairs (8 levels).
// Registers sit after level 1, after level 2 and after every second pairwise
// level: 6 register positions for the default sizes. A seventh register
// saturates the count to 5 bits (0..15, and 16 meaning "16 or more": the MSB
// is the overflow flag). XFER_STAGES further registers stand for the
// transport of the result between modules. With the defaults the count and
// the trigger levels N>=1, N>=2, N>=3 appear 9 cycles (45 ns at 200 MHz) after
// the flags, and a new result is produced every cycle (free running).
//
// The group counts (320, 256), the six pipeline positions, the 5-bit
// saturated result, the three trigger levels and the 9-cycle total follow the
// paper. How the 9 cycles split into register positions beyond the six tree
// registers (one for saturation, two for transport) is this design's choice.
// G1 must lie in [G2, 2*G2] and G2 must be a power of two.
module cluster_adder_tree #(
  parameter int unsigned N_IN        = 1320,
  parameter int unsigned G1          = 320,
  parameter int unsigned G2          = 256,
  parameter int unsigned XFER_STAGES = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] flags,
  output logic [4:0]      count,     // saturated cluster count, MSB = overflow
  output logic            n_ge1,
  output logic            n_ge2,
  output logic            n_ge3
);

  localparam int unsigned SW      = $clog2(N_IN + 1);  // width of any partial sum
  localparam int unsigned LEVELS  = $clog2(G2);        // pairwise levels
  localparam int unsigned NPAIR2  = G1 - G2;           // pairs added at level 2

  // Level 1: G1 groups of consecutive flags. (Every level is held in one
  // packed vector written by a single register process.)
  logic [G1-1:0][SW-1:0] l1_d, l1;
  for (genvar g = 0; g < G1; g++) begin : g_l1
    localparam int unsigned LO = (g * N_IN) / G1;
    localparam int unsigned HI = ((g + 1) * N_IN) / G1;
    logic [SW-1:0] s;
    always_comb begin
      s = '0;
      for (int i = LO; i < HI; i++) s += SW'(flags[i]);
    end
    assign l1_d[g] = s;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) l1 <= '0;
    else        l1 <= l1_d;

  // Level 2: G1 -> G2.
  logic [G2-1:0][SW-1:0] l2_d, l2;
  for (genvar j = 0; j < G2; j++) begin : g_l2
    if (j < NPAIR2) begin : g_pair
      assign l2_d[j] = l1[2*j] + l1[2*j+1];
    end else begin : g_pass
      assign l2_d[j] = l1[j + NPAIR2];
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) l2 <= '0;
    else        l2 <= l2_d;

  // Pairwise levels. Level k holds G2 >> k values (v); it is registered when
  // k is even or the last level, otherwise combinational.
  for (genvar k = 1; k <= LEVELS; k++) begin : g_lvl
    localparam int unsigned NV  = G2 >> k;
    localparam bit         IS_REG = (k % 2 == 0) || (k == LEVELS);
    logic [NV-1:0][SW-1:0]   d, v;
    logic [2*NV-1:0][SW-1:0] src;
    if (k == 1) begin : g_src0
      assign src = l2;
    end else begin : g_srck
      assign src = g_lvl[k-1].v;
    end
    for (genvar j = 0; j < NV; j++) begin : g_add
      assign d[j] = src[2*j] + src[2*j+1];
    end
    if (IS_REG) begin : g_reg
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) v <= '0;
        else        v <= d;
    end else begin : g_comb
      assign v = d;
    end
  end

  logic [SW-1:0] total;
  assign total = g_lvl[LEVELS].v[0];

  // Saturation to 5 bits, then transport stages.
  logic [4:0] sat;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sat <= '0;
    else        sat <= (total >= SW'(16)) ? 5'd16 : 5'(total);

  logic [4:0] xfer [XFER_STAGES+1];
  assign xfer[0] = sat;
  for (genvar s = 1; s <= XFER_STAGES; s++) begin : g_xfer
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) xfer[s] <= '0;
      else        xfer[s] <= xfer[s-1];
  end

  assign count = xfer[XFER_STAGES];
  assign n_ge1 = (count != 5'd0);
  assign n_ge2 = (count >= 5'd2);
  assign n_ge3 = (count >= 5'd3);

  initial begin
    assert (G1 >= G2 && G1 <= 2 * G2) else $error("cluster_adder_tree: G1 out of range");
    assert ((1 << LEVELS) == G2) else $error("cluster_adder_tree: G2 not a power of two");
    assert (N_IN >= G1) else $error("cluster_adder_tree: fewer inputs than level-1 groups");
  end

endmodule
