// pe_ctrl: processing control and state machine of one PE channel.
//
// Serves four pixels in turn. Every four laser cycles PIX_SEL advances and the
// histogram of the next pixel is scanned by stage 1 of the PE core, while
// stage 2 judges the pixel scanned in the previous four cycles. Inside a
// laser cycle of PERIOD clocks (clock index `lc_stage`, 0 at the laser
// trigger) the commands follow the published schedule, with c the laser cycle
// within the four (0..3) and "first/second half" the TDC stages 0-3 / 4-7:
//   stage 1: group 2c in the first half, group 2c+1 in the second half
//            (two 8-bin compares each, at clocks 0,1 and 4,5); Max All at
//            clock 8 of c = 3 (laser wait time).
//   stage 2: sample at clock 2 of c = 0; sqrt bit5 .. bit0 at clocks 6, 2, 6,
//            2, 6, 2 of c = 0,1,1,2,2,3; threshold at clock 6 of c = 3; peak
//            gen at clock 9 of c = 3; the decision is acted on at clock 10.
//
// Per pixel a counter N counts the laser cycles accumulated since the
// histogram was last reset (`hist_update` pulses once per laser cycle). N is
// captured when the pixel's scan starts and travels with it to the decision,
// which follows the published flow chart:
//   N > L2                    -> forced reset of the histogram, no event;
//   L1 < N <= L2 and h > I_th -> peak event, histogram reset;
//   otherwise                 -> keep accumulating.
// A reset clears the histogram (`hist_clr` pulse) and N.
//
// A peak event raises `req` with `evt` (event pack + peak id) held stable
// until `ack` (four-phase handshake: req falls after ack, a new req waits for
// ack to fall). An event found while the previous one is still in the
// handshake is dropped and flagged on `evt_drop`; the histogram is still
// reset. The drop policy, the 13-bit N in the event pack and the peak id
// (ID_BASE + pixel) are this design's choices.
module pe_ctrl
  import lidar_pkg::*;
#(
  parameter int PERIOD  = 25,     // clocks per laser cycle (10 MHz at 250 MHz)
  parameter int ID_BASE = 0       // peak id of pixel 0 of this channel
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      lc_start,     // first clock of a laser cycle
  input  logic [$clog2(PERIOD)-1:0] lc_stage,     // clock index in the laser cycle
  input  logic                      hist_update,  // histograms added one laser cycle
  input  logic [NCYC_W-1:0]         l1,
  input  logic [NCYC_W-1:0]         l2,
  // PE core
  output pe_cmd_t                   cmd,
  input  logic                      dec_valid,
  input  logic                      dec_pass,
  input  logic [BIN_W-1:0]          dec_bin,
  // pixel side
  output logic [1:0]                pix_sel,
  output logic [N_PIX-1:0]          hist_clr,
  // AER handshake
  output logic                      req,
  input  logic                      ack,
  output event_word_t               evt,
  // activity flags (one clock each)
  output logic                      evt_found,
  output logic                      evt_drop,
  output logic                      forced_reset,
  output logic                      below_l1,
  output logic                      below_thr
);
  localparam int SW = $clog2(PERIOD);

  logic [1:0]                   cyc;          // laser cycle within the 4-cycle slot
  logic                         running;      // first full slot has begun
  logic [N_PIX-1:0][NCYC_W-1:0] n_cnt;
  logic                         live;         // running, or its first clock
  logic [NCYC_W-1:0]            n_s1;         // N captured at scan start
  logic [NCYC_W-1:0]            n_done;       // ... moved on at Max All
  logic [NCYC_W-1:0]            n_s2;         // ... and taken by stage 2
  logic [1:0]                   pix_done, pix_s2;
  logic                         valid_s1, valid_done, valid_s2;

  assign live = running || lc_start;

  function automatic logic at(input logic [1:0] c, input int s);
    return live && cyc == c && lc_stage == SW'(s);
  endfunction

  // ---- command schedule ----
  always_comb begin
    cmd = '0;
    if (live && (lc_stage == SW'(0) || lc_stage == SW'(1) ||
                    lc_stage == SW'(4) || lc_stage == SW'(5))) begin
      cmd.s1_cmp  = 1'b1;
      cmd.s1_grp  = {cyc, lc_stage >= SW'(4)};
      cmd.s1_half = lc_stage[0];
    end
    cmd.s1_all    = at(2'd3, 8);
    cmd.s2_sample = at(2'd0, 2);
    cmd.s2_sqrt   = at(2'd0, 6) || at(2'd1, 2) || at(2'd1, 6) ||
                    at(2'd2, 2) || at(2'd2, 6) || at(2'd3, 2);
    cmd.s2_thr    = at(2'd3, 6);
    cmd.s2_gen    = at(2'd3, 9);
  end

  // ---- slot counters ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc     <= 2'd0;
      pix_sel <= 2'd0;
      running <= 1'b0;
    end else begin
      if (lc_start) running <= 1'b1;
      if (live && lc_stage == SW'(PERIOD - 1)) begin
        cyc <= cyc + 1'b1;
        if (cyc == 2'd3) pix_sel <= pix_sel + 1'b1;   // Pix_SEL + 1
      end
    end
  end

  // ---- per-pixel N, stage bookkeeping, decision ----
  logic act;                 // clock at which the decision is applied
  logic do_reset, do_event;
  assign act      = dec_valid && valid_s2;
  assign do_event = act && (n_s2 > l1) && (n_s2 <= l2) && dec_pass;
  assign do_reset = act && ((n_s2 > l2) || do_event);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cnt    <= '0;
      n_s1       <= '0;
      n_done     <= '0;
      n_s2       <= '0;
      pix_done   <= '0;
      pix_s2     <= '0;
      valid_s1   <= 1'b0;
      valid_done <= 1'b0;
      valid_s2   <= 1'b0;
    end else begin
      for (int p = 0; p < N_PIX; p++) begin
        if (do_reset && pix_s2 == 2'(p))
          n_cnt[p] <= '0;
        else if (hist_update && n_cnt[p] != '1)
          n_cnt[p] <= n_cnt[p] + 1'b1;
      end
      if (at(2'd0, 0)) begin
        n_s1     <= n_cnt[pix_sel];
        valid_s1 <= 1'b1;
      end
      if (cmd.s1_all) begin
        n_done     <= n_s1;
        pix_done   <= pix_sel;
        valid_done <= valid_s1;
      end
      if (cmd.s2_sample) begin
        n_s2     <= n_done;
        pix_s2   <= pix_done;
        valid_s2 <= valid_done;
      end
    end
  end

  always_comb begin
    hist_clr = '0;
    if (do_reset) hist_clr[pix_s2] = 1'b1;
  end

  // ---- event handshake ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req <= 1'b0;
      evt <= '0;
    end else begin
      if (req && ack)
        req <= 1'b0;
      else if (do_event && !req && !ack) begin
        req               <= 1'b1;
        evt.peak_id       <= ID_W'(ID_BASE) + ID_W'(pix_s2);
        evt.pack.n_cycles <= n_s2;
        evt.pack.peak_bin <= dec_bin;
      end
    end
  end

  assign evt_found    = do_event;
  assign evt_drop     = do_event && (req || ack);
  assign forced_reset = act && (n_s2 > l2);
  assign below_l1     = act && (n_s2 <= l1);
  assign below_thr    = act && (n_s2 > l1) && (n_s2 <= l2) && !dec_pass;

  // request stays up, with stable data, until acknowledged
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req && !ack |=> req && $stable(evt));
  initial assert (PERIOD >= 11) else $error("PERIOD must leave room for the schedule");
endmodule
