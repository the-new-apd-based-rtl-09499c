// cluster_count_sampler -- time-stamped record of the cluster multiplicity.
//
// The cluster finder's output is compared offline with the count that
// software derives from the TDC data. For that, the current cluster count is
// sampled every 5 ns cycle; each time it changes, the new value and the
// coarse time stamp (the same free-running 5 ns counter as in the TDCs, reset
// together with them) are written into a small FIFO for readout. A change
// that meets a full FIFO is dropped and counted in lost_cnt.
//
// The paper states only that the cluster finder firmware holds a TDC sampling
// the number of clusters; recording changes instead of every sample, the
// FIFO depth and the word format (cb_pkg::ccount_word_t) are this design's
// choices.
//
// Timing: a count that differs at cycle T from its value at T-1 is stamped
// with the counter value of cycle T and readable (rd_valid) from T + 1.
module cluster_count_sampler
  import cb_pkg::*;
#(
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned LOST_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        count,
  input  logic              rd_en,
  output logic              rd_valid,
  output ccount_word_t      rd_data,
  output logic [LOST_W-1:0] lost_cnt
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [TDC_TS_W-1:0] coarse;
  logic [4:0]          count_q;
  ccount_word_t        mem [DEPTH];
  logic [AW:0]         wp, rp;
  logic                full, empty, change, push, pop;

  assign full   = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign empty  = (wp == rp);
  assign change = (count != count_q);
  assign push   = change && !full;
  assign pop    = rd_en && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coarse   <= '0;
      count_q  <= '0;
      wp       <= '0;
      rp       <= '0;
      lost_cnt <= '0;
    end else begin
      coarse  <= coarse + 1'b1;
      count_q <= count;
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      if (change && full) lost_cnt <= lost_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wp[AW-1:0]] <= '{count: count, ts: coarse};

  assign rd_valid = !empty;
  assign rd_data  = mem[rp[AW-1:0]];

endmodule
