// walk_corr_disc -- dual-threshold hit detection with online time-walk
// correction for one calorimeter channel.
//
// Each channel of the timing branch is watched by two leading-edge comparators,
// a low and a high threshold. Their outputs arrive asynchronously and are
// first brought into the 200 MHz clock domain by a two-flop synchroniser.
// A rising edge of the low comparator starts a timer. While the timer runs,
// the cycle in which the high comparator rises is captured; this inter-
// threshold delay dt measures the slew rate of the pulse. When the timer
// reaches EVAL_CYC (150 ns) the high comparator is checked: only if it rose
// inside the window is a hit generated ("truncated threshold"), otherwise the
// pulse is discarded as too small. The hit is then held back by an extra delay
// lut[dt] (non-linear extrapolation: a steep pulse, short dt, crossed the low
// threshold late relative to its start less than a slow one and so needs more
// delay) and finally issued as a hit pulse of HIT_LEN cycles (120 ns) for the
// cluster encoder. Edges of the low comparator during evaluation, delay or
// pulse are ignored.
//
// The 150 ns window, the look-up-table principle and the 120 ns pulse follow
// the paper. The table contents, the 5-bit dt / delay widths and the default
// table lut[dt] = DT_REF - dt (exact for a linear leading edge with the high
// threshold at twice the low one) are this design's choices; the table can be
// rewritten through the lut_we/lut_addr/lut_data port, which is shared by all
// channels of a module.
//
// Timing: low edge synchronised at cycle T (lo_s rises). The high comparator
// is checked at T + EVAL_CYC; hit_out is high from T + EVAL_CYC + 2 + lut[dt]
// for HIT_LEN cycles, i.e. from T + 62 - dt with the default table. dt counts
// from 0 (high edge synchronised in the same cycle as the low edge).
module walk_corr_disc #(
  parameter int unsigned EVAL_CYC = 30,  // 150 ns at 200 MHz
  parameter int unsigned HIT_LEN  = 24,  // 120 ns at 200 MHz
  parameter int unsigned DT_W     = 5,   // width of dt and of the table delay
  parameter int unsigned DT_REF   = 30   // default table: delay = DT_REF - dt
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            comp_lo,   // asynchronous low-threshold comparator
  input  logic            comp_hi,   // asynchronous high-threshold comparator
  input  logic            lut_we,    // table write
  input  logic [DT_W-1:0] lut_addr,
  input  logic [DT_W-1:0] lut_data,
  output logic            hit_out,   // walk-corrected hit pulse
  output logic            lo_sync,   // synchronised comparators (for the TDC)
  output logic            hi_sync
);

  localparam int unsigned CNT_W = $clog2(EVAL_CYC + HIT_LEN + (1 << DT_W) + 1);

  typedef enum logic [1:0] {S_IDLE, S_EVAL, S_DELAY, S_PULSE} state_t;

  logic [1:0] lo_meta, hi_meta;
  logic       lo_s, hi_s, lo_q, hi_q;
  logic       lo_rise, hi_rise;
  state_t     state;
  logic [CNT_W-1:0] cnt;
  logic [DT_W-1:0]  dt;
  logic             hi_seen;
  logic [DT_W-1:0]  lut [1 << DT_W];

  // Two-flop synchronisers, then edge detection.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo_meta <= '0; hi_meta <= '0; lo_q <= 1'b0; hi_q <= 1'b0;
    end else begin
      lo_meta <= {lo_meta[0], comp_lo};
      hi_meta <= {hi_meta[0], comp_hi};
      lo_q    <= lo_s;
      hi_q    <= hi_s;
    end
  end
  assign lo_s    = lo_meta[1];
  assign hi_s    = hi_meta[1];
  assign lo_rise = lo_s & ~lo_q;
  assign hi_rise = hi_s & ~hi_q;
  assign lo_sync = lo_s;
  assign hi_sync = hi_s;

  // Walk-correction table, reset to DT_REF - dt (saturating at 0).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < (1 << DT_W); i++)
        lut[i] <= (i < DT_REF) ? DT_W'(DT_REF - i) : '0;
    end else if (lut_we) begin
      lut[lut_addr] <= lut_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      dt      <= '0;
      hi_seen <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (lo_rise) begin
            state   <= S_EVAL;
            cnt     <= CNT_W'(1);
            // High threshold crossed in the same cycle: dt = 0.
            hi_seen <= hi_rise;
            dt      <= '0;
          end
        end
        S_EVAL: begin
          if (hi_rise && !hi_seen) begin
            hi_seen <= 1'b1;
            dt      <= (cnt >= CNT_W'((1 << DT_W) - 1)) ? '1 : DT_W'(cnt);
          end
          if (cnt == CNT_W'(EVAL_CYC)) begin
            // Truncation: only pulses that also crossed the high threshold.
            if (hi_seen || hi_rise) begin
              if (!hi_seen) dt <= (cnt >= CNT_W'((1 << DT_W) - 1)) ? '1 : DT_W'(cnt);
              state <= S_DELAY;
              cnt   <= '0;
            end else begin
              state <= S_IDLE;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DELAY: begin
          if (cnt >= CNT_W'(lut[dt])) begin
            state <= S_PULSE;
            cnt   <= CNT_W'(1);
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_PULSE: begin
          if (cnt == CNT_W'(HIT_LEN)) begin
            state <= S_IDLE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign hit_out = (state == S_PULSE);

endmodule
