// dd_filter: dynamic-depth (DD) event encoder.
//
// Turns the stream of peak events into DVS-like events that only report depth
// changes. For every pixel id it keeps the depths of its last three peak
// events. With d_k the depth of the newest event, the three-event moving
// average changes between two consecutive events by
//   avg_k - avg_(k-1) = (d_k - d_(k-3)) / 3,
// so the filter compares d_k - d_(k-3) against +/-THR3, where THR3 is three
// times the threshold, and needs no divider. A change above +THR3 gives a
// positive DD event (object moved away), below -THR3 a negative one. A pixel
// must have four events before it can report.
//
// Depth here is the peak bin (250 ps = 3.75 cm); the default THR3 = 8 bins is
// 3 x 0.1 m / 3.75 cm rounded, matching the published 0.1 m threshold. The
// published design applies this step to interpolated depths on the host; here
// it runs on the bin index in hardware, which is this design's choice.
//
// Interface: `in_valid` with `in_id`/`in_bin` (one clock per peak event);
// one clock later `dd_valid` pulses with `dd_id` and `dd_pos` (1 = depth
// increased) when a DD event is produced.
module dd_filter
  import lidar_pkg::*;
#(
  parameter int N_IDS = 1 << ID_W,
  parameter int THR3  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ID_W-1:0]  in_id,
  input  logic [BIN_W-1:0] in_bin,
  output logic             dd_valid,
  output logic [ID_W-1:0]  dd_id,
  output logic             dd_pos
);
  typedef struct packed {
    logic [1:0]       seen;     // events stored, saturates at 3
    logic [BIN_W-1:0] d1;       // newest stored depth
    logic [BIN_W-1:0] d2;
    logic [BIN_W-1:0] d3;       // oldest stored depth
  } hist3_t;

  hist3_t hist [N_IDS];
  hist3_t cur;
  logic signed [BIN_W+1:0] diff;

  assign cur  = hist[in_id];
  assign diff = $signed({2'b00, in_bin}) - $signed({2'b00, cur.d3});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_IDS; i++) hist[i] <= '0;
      dd_valid <= 1'b0;
      dd_id    <= '0;
      dd_pos   <= 1'b0;
    end else begin
      dd_valid <= 1'b0;
      if (in_valid) begin
        hist[in_id].d1   <= in_bin;
        hist[in_id].d2   <= cur.d1;
        hist[in_id].d3   <= cur.d2;
        hist[in_id].seen <= (cur.seen == 2'd3) ? 2'd3 : cur.seen + 1'b1;
        if (cur.seen == 2'd3 && (diff > (BIN_W+2)'(THR3) || diff < -(BIN_W+2)'(THR3))) begin
          dd_valid <= 1'b1;
          dd_id    <= in_id;
          dd_pos   <= (diff > 0);
        end
      end
    end
  end
endmodule
