// hit_backplane -- exchange of boundary hit bits between the 16 discriminator
// modules of the cluster finder.
//
// Each module evaluates the cluster pattern (up, up-left, left, down-left
// neighbours) for its own section of the hit matrix, so it needs the hits of
// the cells just outside its section: the column to its left (wrapping from
// column 0 to column 59), the row above and the row below, and the two
// corner cells. Module m = h * 8 + s sits in half h (0: rings 0..12, 1: rings
// 13..25) and section s. A module of the top half therefore sends its bottom
// row (8 bits) to the module below, its right column (13 bits) to the module
// on the right and its bottom-right corner (1 bit) to the module right-below;
// bottom-half modules mirror this upwards. Outside the calorimeter (above
// ring 0, below ring 25) the halo reads as "no hit". Every bit crosses the
// backplane through REG_STAGES register stages; the modules delay their own
// hits by the same amount so that the pattern sees one consistent frame.
//
// The section layout, the wrap in phi and the 8/13/1-bit exchange of a
// top-half module follow the paper. What the bottom-half modules send, the
// registered transport and its depth are this design's choices.
//
// Ports: edge_right[m][r]: hit of module m's rightmost cell in local ring r;
// edge_top[m][c] / edge_bot[m][c]: hits of its first / last local ring
// (4-column modules use bits 3..0). halo_left[m][i] is the cell left of the
// section in local ring i - 1 (i = 0: ring above, i = 14: ring below);
// halo_top[m][c] / halo_bot[m][c] the ring above / below at local column c.
module hit_backplane
  import cb_pkg::*;
#(
  parameter int unsigned REG_STAGES = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [HALF_ROWS-1:0]   edge_right [N_MODULES],
  input  logic [SECT_COLS-1:0]   edge_top   [N_MODULES],
  input  logic [SECT_COLS-1:0]   edge_bot   [N_MODULES],
  output logic [HALF_ROWS+1:0]   halo_left  [N_MODULES],
  output logic [SECT_COLS-1:0]   halo_top   [N_MODULES],
  output logic [SECT_COLS-1:0]   halo_bot   [N_MODULES]
);

  logic [HALF_ROWS+1:0] hl [N_MODULES];
  logic [SECT_COLS-1:0] ht [N_MODULES];
  logic [SECT_COLS-1:0] hb [N_MODULES];

  for (genvar m = 0; m < N_MODULES; m++) begin : g_mod
    localparam int unsigned H  = m / N_SECT;
    localparam int unsigned S  = m % N_SECT;
    localparam int unsigned SL = (S + N_SECT - 1) % N_SECT;   // section to the left
    localparam int unsigned ML = H * N_SECT + SL;             // left module, same half
    localparam int unsigned MO = (1 - H) * N_SECT + S;        // other half, same section
    localparam int unsigned MD = (1 - H) * N_SECT + SL;       // other half, left
    // Left column: own half from the left module, the corner from the other half.
    assign hl[m][HALF_ROWS:1]   = edge_right[ML];
    assign hl[m][0]             = (H == 1) ? edge_right[MD][HALF_ROWS-1] : 1'b0;
    assign hl[m][HALF_ROWS+1]   = (H == 0) ? edge_right[MD][0] : 1'b0;
    assign ht[m] = (H == 1) ? edge_bot[MO] : '0;
    assign hb[m] = (H == 0) ? edge_top[MO] : '0;
  end

  // Registered transport.
  logic [HALF_ROWS+1:0] pl [REG_STAGES+1][N_MODULES];
  logic [SECT_COLS-1:0] pt [REG_STAGES+1][N_MODULES];
  logic [SECT_COLS-1:0] pb [REG_STAGES+1][N_MODULES];
  assign pl[0] = hl;
  assign pt[0] = ht;
  assign pb[0] = hb;
  for (genvar k = 1; k <= REG_STAGES; k++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int m = 0; m < N_MODULES; m++) begin
          pl[k][m] <= '0; pt[k][m] <= '0; pb[k][m] <= '0;
        end
      end else begin
        pl[k] <= pl[k-1];
        pt[k] <= pt[k-1];
        pb[k] <= pb[k-1];
      end
    end
  end
  assign halo_left = pl[REG_STAGES];
  assign halo_top  = pt[REG_STAGES];
  assign halo_bot  = pb[REG_STAGES];

endmodule
