// cluster_cell -- per-crystal cluster detection with delayed pattern check.
//
// A crystal is the top-left corner of a cluster when it has a hit and none of
// the four crystals "top-left" of it has one: the crystal above (up), above
// left (up_left), left (left) and below left (down_left), with theta growing
// downwards and phi to the right. Because the hits of one cluster appear in
// random order, the pattern is not tested on the leading edge of the own hit
// but D cycles later, by a small state machine per crystal:
//
//   WAIT   (d = 0)       leading edge of own hit -> DELAY
//   DELAY  (d = d + 1)   d reaches D             -> CHECK
//   CHECK  (p = 0)       pattern fulfilled       -> PULSE, else -> WAIT
//   PULSE  (p = p + 1)   p reaches P             -> WAIT
//
// The pattern (own hit still present, four neighbours clear) and the state
// machine follow the paper's figures; D = 12 (60 ns) and P = 26 (130 ns) are
// the final settings it reports. Both are run-time inputs here, shared by all
// cells of a module. Counting d from the leading-edge cycle is this design's
// reading of the figure.
//
// Timing: leading edge of hit at cycle T (hit high, hit one cycle earlier
// low). The pattern is evaluated at cycle T + D (D >= 2); cluster is high
// from T + D + 1 for exactly P cycles when it was fulfilled.
module cluster_cell #(
  parameter int unsigned CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] delay_d,    // D: pattern-check delay in cycles
  input  logic [CNT_W-1:0] pulse_p,    // P: output pulse length in cycles
  input  logic             hit,        // own walk-corrected hit
  input  logic             up,
  input  logic             up_left,
  input  logic             left,
  input  logic             down_left,
  output logic             cluster     // cluster output pulse
);

  typedef enum logic [1:0] {S_WAIT, S_DELAY, S_CHECK, S_PULSE} state_t;

  state_t           state;
  logic [CNT_W-1:0] d, p;
  logic             hit_q;
  logic             le;
  logic             pattern;

  assign le      = hit & ~hit_q;
  assign pattern = hit & ~(up | up_left | left | down_left);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_WAIT;
      d     <= '0;
      p     <= '0;
      hit_q <= 1'b0;
    end else begin
      hit_q <= hit;
      unique case (state)
        S_WAIT: begin
          d <= '0;
          if (le) begin
            state <= S_DELAY;
            d     <= CNT_W'(1);
          end
        end
        S_DELAY: begin
          if (d + 1'b1 >= delay_d) state <= S_CHECK;
          d <= d + 1'b1;
        end
        S_CHECK: begin
          p     <= '0;
          state <= pattern ? S_PULSE : S_WAIT;
        end
        S_PULSE: begin
          if (p + 1'b1 >= pulse_p) state <= S_WAIT;
          p <= p + 1'b1;
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  assign cluster = (state == S_PULSE);

endmodule
