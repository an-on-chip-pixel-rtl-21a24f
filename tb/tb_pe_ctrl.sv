// tb_pe_ctrl: runs the PE controller against a scripted laser timing, a
// stand-in PE core that answers each "peak gen" with a random pass/fail and
// peak bin, and an AER stand-in that acknowledges requests after random
// delays (sometimes long enough to force dropped events). An independent
// model tracks the slot, PIX_SEL, the per-pixel cycle count N and the flow
// chart decision (N > L2: forced reset; L1 < N <= L2 and pass: event and
// reset), and checks the command schedule, histogram clears, event contents
// and the req/ack behaviour clock by clock.
module tb_pe_ctrl;
  import lidar_pkg::*;
  localparam int PERIOD = 25, ID_BASE = 4;
  logic clk = 0, rst_n = 0;
  logic lc_start, hist_update;
  logic [4:0] lc_stage;
  logic [NCYC_W-1:0] l1, l2;
  pe_cmd_t cmd;
  logic dec_valid, dec_pass;
  logic [BIN_W-1:0] dec_bin;
  logic [1:0] pix_sel;
  logic [N_PIX-1:0] hist_clr;
  logic req, ack;
  event_word_t evt;
  logic evt_found, evt_drop, forced_reset, below_l1, below_thr;
  int checks = 0, failures = 0;
  int n_event = 0, n_drop = 0, n_forced = 0, n_l1 = 0, n_thr = 0, n_acked = 0;

  always #2 clk = ~clk;

  pe_ctrl #(.PERIOD(PERIOD), .ID_BASE(ID_BASE)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t FAIL %s", $time, what);
    end
  endtask

  initial begin
    int clk_n, stage, lcyc, m_cyc, m_pix;
    int nm[N_PIX];
    int cur_pix, cur_n, done_pix, done_n, s2_pix, s2_n;
    bit cur_v, done_v, s2_v, gen_prev;
    int ack_wait;
    bit exp_req;
    event_word_t exp_evt;
    l1 = 13'd20; l2 = 13'd100;
    lc_start = 0; hist_update = 0; lc_stage = 0; dec_valid = 0; dec_pass = 0; dec_bin = 0; ack = 0;
    foreach (nm[i]) nm[i] = 0;
    cur_v = 0; done_v = 0; s2_v = 0; gen_prev = 0; ack_wait = 0; exp_req = 0;
    cur_pix = 0; cur_n = 0; done_pix = 0; done_n = 0; s2_pix = 0; s2_n = 0;
    m_cyc = 0; m_pix = 0; lcyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (clk_n = 0; clk_n < PERIOD * 4 * 400; clk_n++) begin
      bit exp_event, exp_reset, busy;
      logic [N_PIX-1:0] exp_clr;
      pe_cmd_t ec;
      @(negedge clk);
      stage = clk_n % PERIOD;
      lc_stage    = 5'(stage);
      lc_start    = (stage == 0);
      hist_update = (stage == 9);
      dec_valid   = gen_prev;
      // a long stretch with no passing peak guarantees forced resets at L2
      dec_pass    = ($urandom_range(0, 2) != 0) && !(clk_n >= PERIOD * 4 * 200 && clk_n < PERIOD * 4 * 260);
      dec_bin     = BIN_W'($urandom);
      // AER stand-in
      if (req && !ack) begin
        if (ack_wait == 0) ack_wait = ($urandom_range(0, 5) == 0) ? $urandom_range(100, 400) : $urandom_range(1, 6);
        ack_wait--;
        if (ack_wait == 0) ack = 1;
      end else if (!req && ack) ack = 0;
      #1;
      // --- expected schedule ---
      ec = '0;
      if (stage == 0 || stage == 1 || stage == 4 || stage == 5) begin
        ec.s1_cmp = 1; ec.s1_grp = 3'(2 * m_cyc + (stage >= 4)); ec.s1_half = stage[0];
      end
      ec.s1_all    = (m_cyc == 3 && stage == 8);
      ec.s2_sample = (m_cyc == 0 && stage == 2);
      ec.s2_sqrt   = (stage == 6 && m_cyc <= 2) || (stage == 2 && m_cyc >= 1);
      ec.s2_thr    = (m_cyc == 3 && stage == 6);
      ec.s2_gen    = (m_cyc == 3 && stage == 9);
      chk(cmd == ec, $sformatf("schedule cyc=%0d stage=%0d", m_cyc, stage));
      chk(int'(pix_sel) == m_pix, "pix_sel");
      // --- expected decision ---
      exp_event = 0; exp_reset = 0; exp_clr = '0;
      busy = req || ack;
      if (dec_valid && s2_v) begin
        if (s2_n > int'(l2)) begin exp_reset = 1; n_forced++; end
        else if (s2_n > int'(l1) && dec_pass) begin exp_event = 1; exp_reset = 1; end
        else if (s2_n <= int'(l1)) n_l1++;
        else n_thr++;
        if (exp_reset) exp_clr[s2_pix] = 1'b1;
      end
      chk(hist_clr == exp_clr, "hist_clr");
      chk(evt_found == exp_event, "evt_found");
      chk(evt_drop == (exp_event && busy), "evt_drop");
      chk(forced_reset == (dec_valid && s2_v && s2_n > int'(l2)), "forced_reset");
      if (exp_event) n_event++;
      if (exp_event && busy) n_drop++;
      // request and event contents
      chk(req == exp_req, "req");
      if (exp_req) chk(evt == exp_evt, "event word");
      if (req && ack) begin exp_req = 0; n_acked++; end
      if (exp_event && !busy) begin
        exp_req = 1;
        exp_evt.peak_id = ID_W'(ID_BASE + s2_pix);
        exp_evt.pack.n_cycles = NCYC_W'(s2_n);
        exp_evt.pack.peak_bin = dec_bin;
      end
      // --- model state for the next clock ---
      gen_prev = ec.s2_gen;
      if (exp_reset) nm[s2_pix] = 0;
      if (ec.s2_sample) begin s2_pix = done_pix; s2_n = done_n; s2_v = done_v; end
      if (ec.s1_all) begin done_pix = cur_pix; done_n = cur_n; done_v = cur_v; end
      if (m_cyc == 0 && stage == 0) begin cur_pix = m_pix; cur_n = nm[m_pix]; cur_v = 1; end
      if (hist_update) foreach (nm[i]) nm[i]++;
      if (stage == PERIOD - 1) begin
        m_cyc = (m_cyc + 1) % 4;
        if (m_cyc == 0) m_pix = (m_pix + 1) % N_PIX;
      end
    end
    $display("events=%0d dropped=%0d forced=%0d belowL1=%0d belowThr=%0d acked=%0d",
             n_event, n_drop, n_forced, n_l1, n_thr, n_acked);
    chk(n_event > 0 && n_drop > 0 && n_forced > 0 && n_l1 > 0 && n_thr > 0, "all outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (PERIOD * 4 * 400 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
