// histogram: per-pixel time-of-flight histogram, N_BINS bin_cnt of HIST_W bits.
//
// Once per laser cycle the TDC delivers a hit vector with one bit per bin
// (several bits may be set: the TDC is multi-event). On `add` every bin whose
// hit bit is set is incremented. Bins saturate at their maximum instead of
// wrapping; in normal use the L2 limit resets the histogram before that. `clr`
// clears every bin and wins over a simultaneous `add`. `saturated` is high
// while any bin is at its maximum. Saturation and the clear priority are this
// design's choices; the size (128 bin_cnt x 10 bits) follows the published design.
module histogram
  import lidar_pkg::*;
#(
  parameter int NB = N_BINS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              add,
  input  logic [NB-1:0]     hits,
  input  logic              clr,
  output bin_t [NB-1:0]     bin_cnt,
  output logic              saturated
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin_cnt <= '0;
    end else if (clr) begin
      bin_cnt <= '0;
    end else if (add) begin
      for (int i = 0; i < NB; i++)
        if (hits[i] && bin_cnt[i] != '1)
          bin_cnt[i] <= bin_cnt[i] + 1'b1;
    end
  end

  always_comb begin
    saturated = 1'b0;
    for (int i = 0; i < NB; i++)
      if (bin_cnt[i] == '1) saturated = 1'b1;
  end
endmodule
