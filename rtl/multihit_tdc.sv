// multihit_tdc -- sampling multi-hit TDC for the comparators of one
// discriminator module.
//
// Every comparator output (two per detector channel, 184 per module) is
// sampled with the 200 MHz clock; each leading and each trailing edge is
// stamped with a free-running coarse counter (5 ns steps) and queued for
// readout. Per comparator and edge polarity one pending slot holds the stamp
// until a drain stage moves it into the readout FIFO. The drain takes one
// pending slot per cycle, the lowest-numbered first; since edges of a single
// comparator are at least a few cycles apart in practice, this keeps up with
// the hit rates of the calorimeter. An edge arriving while its slot is still
// full is counted in lost_cnt instead of being stored; a slot that finds the
// FIFO full simply waits. Consumers pop words with rd_en while rd_valid is high
// (first-word fall-through).
//
// The paper gives only the function: a firmware TDC digitising the times of
// all 184 comparators, with multi-hit capability. The clock-sampling
// architecture, the 16-bit stamp, the word format (cb_pkg::tdc_word_t), the
// pending slots and the FIFO depth are this design's choices; a finer TDC
// (e.g. a carry-chain interpolator) could replace the sampling stage.
//
// Timing: an edge of in[i] visible at cycle T (in[i] differs from its value
// at T-1) is stamped with the counter value of cycle T. It reaches the FIFO
// output two cycles later at the earliest.
module multihit_tdc
  import cb_pkg::*;
#(
  parameter int unsigned N_CH   = 184,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned LOST_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_CH-1:0]   in,        // synchronised comparator outputs
  input  logic              rd_en,
  output logic              rd_valid,
  output tdc_word_t         rd_data,
  output logic [LOST_W-1:0] lost_cnt
);

  localparam int unsigned NS  = 2 * N_CH;            // pending slots
  localparam int unsigned SIW = $clog2(NS);
  localparam int unsigned AW  = $clog2(DEPTH);

  logic [TDC_TS_W-1:0] coarse;
  logic [N_CH-1:0]     in_q;
  logic [NS-1:0]       pend;
  logic [NS-1:0][TDC_TS_W-1:0] stamp;
  logic [NS-1:0]       edge_now;

  // Slot 2i: leading edge of comparator i, slot 2i+1: trailing edge.
  for (genvar i = 0; i < N_CH; i++) begin : g_edge
    assign edge_now[2*i]   =  in[i] & ~in_q[i];
    assign edge_now[2*i+1] = ~in[i] &  in_q[i];
  end

  // Drain selection: lowest pending slot, as a one-hot grant (the lowest set
  // bit of pend), its binary index and the stamp it holds (AND-OR select).
  logic [NS-1:0]       grant;
  logic                sel_valid;
  logic [SIW-1:0]      sel;
  logic [TDC_TS_W-1:0] sel_ts;
  assign grant     = pend & (~pend + 1'b1);
  assign sel_valid = |pend;
  always_comb begin
    sel    = '0;
    sel_ts = '0;
    for (int s = 0; s < NS; s++) begin
      sel    = sel    | (grant[s] ? SIW'(s) : '0);
      sel_ts = sel_ts | (grant[s] ? stamp[s] : '0);
    end
  end

  // Readout FIFO.
  tdc_word_t       mem [DEPTH];
  logic [AW:0]     wp, rp;
  logic            full, empty, push, pop;
  assign full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign empty = (wp == rp);
  assign push  = sel_valid && !full;
  assign pop   = rd_en && !empty;

  tdc_word_t wr_word;
  assign wr_word.falling = sel[0];
  assign wr_word.chan    = 8'(sel >> 1);
  assign wr_word.ts      = sel_ts;

  // Slots emptied this cycle, slots taking a new edge, and edges lost: new
  // edges on a full slot that is not being drained.
  logic [NS-1:0]  drained, take, lost_vec;
  logic [SIW:0]   lost_now;
  assign drained  = push ? grant : '0;
  assign take     = edge_now & (~pend | drained);
  assign lost_vec = edge_now & pend & ~drained;
  always_comb begin
    lost_now = '0;
    for (int s = 0; s < NS; s++) lost_now = lost_now + (SIW+1)'(lost_vec[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coarse   <= '0;
      in_q     <= '0;
      pend     <= '0;
      wp       <= '0;
      rp       <= '0;
      lost_cnt <= '0;
    end else begin
      coarse <= coarse + 1'b1;
      in_q   <= in;
      // Drain first, then capture: a slot drained this cycle may be refilled.
      pend <= (pend & ~drained) | take;
      if (push) wp <= wp + 1'b1;
      if (pop) rp <= rp + 1'b1;
      lost_cnt <= lost_cnt + LOST_W'(lost_now);
    end
  end

  // Stamp registers, one per slot.
  logic [NS-1:0][TDC_TS_W-1:0] stamp_d;
  for (genvar g = 0; g < NS; g++) begin : g_slot
    assign stamp_d[g] = take[g] ? coarse : stamp[g];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stamp <= '0;
    else        stamp <= stamp_d;
  end

  always_ff @(posedge clk)
    if (push) mem[wp[AW-1:0]] <= wr_word;

  assign rd_valid = !empty;
  assign rd_data  = mem[rp[AW-1:0]];

endmodule
