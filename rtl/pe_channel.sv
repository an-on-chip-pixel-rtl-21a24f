// pe_channel: one processing element serving four macropixel histograms.
//
// Groups the 4-to-1 pixel multiplexer, the PE core (two-stage peak finding and
// thresholding) and the PE control FSM, as in the published block diagram.
// Inputs are the four live histograms (4 x 1280 bits), the laser-cycle timing
// and the hyperparameters L1, L2 and alpha; outputs are a histogram clear per
// pixel and an event word on a req/ack handshake towards the AER arbiter.
// Each pixel is judged once every 16 laser cycles; the judgement of a pixel
// ends 8 laser cycles after its scan began (see pe_ctrl for the schedule).
module pe_channel
  import lidar_pkg::*;
#(
  parameter int PERIOD  = 25,
  parameter int ID_BASE = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      lc_start,
  input  logic [$clog2(PERIOD)-1:0] lc_stage,
  input  logic                      hist_update,
  input  logic [NCYC_W-1:0]         l1,
  input  logic [NCYC_W-1:0]         l2,
  input  logic [ALPHA_W-1:0]        alpha,
  input  bin_t [N_PIX-1:0][N_BINS-1:0] hist,
  output logic [N_PIX-1:0]          hist_clr,
  output logic                      req,
  input  logic                      ack,
  output event_word_t               evt,
  output logic                      evt_found,
  output logic                      evt_drop,
  output logic                      forced_reset,
  output logic                      below_l1,
  output logic                      below_thr
);
  pe_cmd_t            cmd;
  logic [1:0]         pix_sel;
  bin_t [N_BINS-1:0]  hist_sel;
  logic               dec_valid, dec_pass;
  logic [BIN_W-1:0]   dec_bin;
  bin_t               dec_peak, dec_bg;
  logic [THR_W-1:0]   dec_thr;

  pix_mux u_mux (.hist_in(hist), .pix_sel(pix_sel), .hist_out(hist_sel));

  pe_core u_core (
    .clk(clk), .rst_n(rst_n), .cmd(cmd), .hist(hist_sel), .alpha(alpha),
    .dec_valid(dec_valid), .dec_pass(dec_pass), .dec_bin(dec_bin),
    .dec_peak(dec_peak), .dec_thr(dec_thr), .dec_bg(dec_bg)
  );

  pe_ctrl #(.PERIOD(PERIOD), .ID_BASE(ID_BASE)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .lc_start(lc_start), .lc_stage(lc_stage),
    .hist_update(hist_update), .l1(l1), .l2(l2),
    .cmd(cmd), .dec_valid(dec_valid), .dec_pass(dec_pass), .dec_bin(dec_bin),
    .pix_sel(pix_sel), .hist_clr(hist_clr),
    .req(req), .ack(ack), .evt(evt),
    .evt_found(evt_found), .evt_drop(evt_drop), .forced_reset(forced_reset),
    .below_l1(below_l1), .below_thr(below_thr)
  );
endmodule
