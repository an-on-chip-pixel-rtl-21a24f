// async_lidar_top: asynchronous peak-event read-out for a SPAD dToF flash LiDAR.
//
// Data path (defaults): 128 SPAD lines, sampled on 16 clock phases, enter the
// TDC, which gives each line a 128-bin hit vector per laser cycle. The line
// multiplexer picks 8 lines (scan position `scan_sel`) for the 8 histograms of
// 128 x 10-bit bin_cnt. Two PE channels each serve four histograms: every pixel is
// scanned for its peak, its background and threshold are computed, and when
// N > L1 and the peak beats BG + alpha*sqrt(BG) a peak event is sent and the
// pixel's histogram restarts; after L2 cycles without an event the histogram is
// reset anyway. The AER arbiter moves events from the channels into a 26-bit
// FIFO that the host reads. Alongside, the dynamic-depth filter watches the
// accepted events and flags pixels whose averaged depth changed (dd_*).
//
// Timing: one laser cycle is PERIOD clocks (25 x 4 ns = 10 MHz); the laser
// trigger comes from `laser_trig_o`. Pixel p of channel c has peak id
// 4*c + p. Activity flags (one bit per channel, one clock each) report events,
// dropped events, forced resets, judgements below L1 or below threshold, and
// AER stalls on a full FIFO, so a host or testbench can observe the mechanisms.
module async_lidar_top
  import lidar_pkg::*;
#(
  parameter int N_LINES    = 128,
  parameter int N_HIST     = 8,
  parameter int PERIOD     = 25,
  parameter int FIFO_DEPTH = 16,
  parameter int SEL_W      = $clog2(N_LINES / N_HIST),
  parameter int N_PE       = N_HIST / N_PIX
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             run,
  input  logic [NCYC_W-1:0]                l1,
  input  logic [NCYC_W-1:0]                l2,
  input  logic [ALPHA_W-1:0]               alpha,
  input  logic [SEL_W-1:0]                 scan_sel,
  input  logic [N_LINES-1:0][N_PHASES-1:0] phase,
  output logic                             laser_trig_o,
  input  logic                             rd_en,
  output event_word_t                      rd_data,
  output logic                             fifo_empty,
  output logic                             dd_valid,
  output logic [ID_W-1:0]                  dd_id,
  output logic                             dd_pos,
  output logic [N_PE-1:0]                  f_event,
  output logic [N_PE-1:0]                  f_drop,
  output logic [N_PE-1:0]                  f_forced,
  output logic [N_PE-1:0]                  f_below_l1,
  output logic [N_PE-1:0]                  f_below_thr,
  output logic [N_HIST-1:0]                f_saturated,
  output logic                             f_stall
);
  localparam int SW = $clog2(PERIOD);

  logic          lc_start, tdc_en, tdc_valid;
  logic [SW-1:0] lc_stage;
  logic [N_LINES-1:0][N_BINS-1:0] hits_all;
  logic [N_HIST-1:0][N_BINS-1:0]  hits_sel;
  bin_t [N_HIST-1:0][N_BINS-1:0]  hist;
  logic [N_HIST-1:0]              hist_clr;
  logic [N_PE-1:0]                req, ack;
  event_word_t [N_PE-1:0]         evt;
  logic                           wr_en, fifo_full;
  event_word_t                    wr_data;
  logic [$clog2(FIFO_DEPTH):0]    fifo_level;

  laser_trig #(.PERIOD(PERIOD)) u_trig (
    .clk(clk), .rst_n(rst_n), .run(run), .trig(laser_trig_o),
    .lc_start(lc_start), .lc_stage(lc_stage), .tdc_en(tdc_en)
  );

  tdc #(.N_LINES(N_LINES)) u_tdc (
    .clk(clk), .rst_n(rst_n), .en(tdc_en), .phase(phase),
    .hits(hits_all), .valid(tdc_valid)
  );

  line_mux #(.N_LINES(N_LINES), .N_HIST(N_HIST)) u_lmux (
    .hits_in(hits_all), .sel(scan_sel), .hits_out(hits_sel)
  );

  for (genvar h = 0; h < N_HIST; h++) begin : g_hist
    histogram u_hist (
      .clk(clk), .rst_n(rst_n), .add(tdc_valid), .hits(hits_sel[h]),
      .clr(hist_clr[h]), .bin_cnt(hist[h]), .saturated(f_saturated[h])
    );
  end

  for (genvar c = 0; c < N_PE; c++) begin : g_pe
    pe_channel #(.PERIOD(PERIOD), .ID_BASE(c * N_PIX)) u_pe (
      .clk(clk), .rst_n(rst_n), .lc_start(lc_start), .lc_stage(lc_stage),
      .hist_update(tdc_valid), .l1(l1), .l2(l2), .alpha(alpha),
      .hist(hist[c*N_PIX +: N_PIX]), .hist_clr(hist_clr[c*N_PIX +: N_PIX]),
      .req(req[c]), .ack(ack[c]), .evt(evt[c]),
      .evt_found(f_event[c]), .evt_drop(f_drop[c]), .forced_reset(f_forced[c]),
      .below_l1(f_below_l1[c]), .below_thr(f_below_thr[c])
    );
  end

  aer #(.N_CH(N_PE)) u_aer (
    .clk(clk), .rst_n(rst_n), .req(req), .evt(evt), .ack(ack),
    .fifo_full(fifo_full), .wr_en(wr_en), .wr_data(wr_data), .stall(f_stall)
  );

  event_fifo #(.WIDTH(OUT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data),
    .rd_en(rd_en), .rd_data(rd_data), .empty(fifo_empty), .full(fifo_full),
    .level(fifo_level)
  );

  // dynamic-depth events from the accepted peak events
  dd_filter u_dd (
    .clk(clk), .rst_n(rst_n), .in_valid(wr_en), .in_id(wr_data.peak_id),
    .in_bin(wr_data.pack.peak_bin), .dd_valid(dd_valid), .dd_id(dd_id), .dd_pos(dd_pos)
  );

  initial assert (N_HIST % N_PIX == 0) else $error("histograms must fill whole PE channels");
endmodule
