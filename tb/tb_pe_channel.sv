// tb_pe_channel: one PE channel with four stand-in histograms. Each pixel
// holds a random histogram (background, optional peak) that stays fixed until
// the channel clears it, when a new one is drawn. A reference model follows
// the 16-laser-cycle round of the four pixels, the per-pixel count N and the
// full peak / background / square-root / threshold computation, and predicts
// every histogram clear and every event word, which the test compares with
// what the channel produces. The AER side acknowledges after a few clocks.
module tb_pe_channel;
  import lidar_pkg::*;
  localparam int PERIOD = 25;
  logic clk = 0, rst_n = 0;
  logic lc_start, hist_update;
  logic [4:0] lc_stage;
  logic [NCYC_W-1:0] l1, l2;
  logic [ALPHA_W-1:0] alpha;
  bin_t [N_PIX-1:0][N_BINS-1:0] hist;
  logic [N_PIX-1:0] hist_clr;
  logic req, ack;
  event_word_t evt;
  logic evt_found, evt_drop, forced_reset, below_l1, below_thr;
  int checks = 0, failures = 0, n_event = 0, n_forced = 0, n_thr = 0, n_l1 = 0, n_words = 0;
  event_word_t expq[$];

  always #2 clk = ~clk;

  pe_channel #(.PERIOD(PERIOD), .ID_BASE(8)) dut (.*);

  function automatic bit judge(input bin_t [N_BINS-1:0] h, input int a, output int bin);
    int q[4], bg, sq, pk;
    bin = 0;
    for (int i = 1; i < N_BINS; i++) if (h[i] > h[bin]) bin = i;
    pk = int'(h[bin]);
    for (int k = 0; k < 4; k++) begin
      q[k] = 0;
      for (int i = 32 * k; i < 32 * k + 32; i++) if (int'(h[i]) > q[k]) q[k] = int'(h[i]);
    end
    bg = (bin >= 64) ? ((q[0] < q[1]) ? q[0] : q[1]) : ((q[2] < q[3]) ? q[2] : q[3]);
    sq = 0;
    while ((sq + 1) * (sq + 1) <= bg) sq++;
    return pk > bg + a * sq;
  endfunction

  function automatic bin_t [N_BINS-1:0] draw();
    bin_t [N_BINS-1:0] h;
    int base;
    base = $urandom_range(10, 200);
    for (int i = 0; i < N_BINS; i++) h[i] = bin_t'(base + $urandom_range(0, 20));
    if ($urandom_range(0, 1) != 0) h[$urandom_range(0, N_BINS - 1)] = bin_t'(base + $urandom_range(20, 300));
    return h;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t FAIL %s", $time, what); end
  endtask

  always @(posedge clk) begin
    if (!rst_n) ack <= 0;
    else if (req && !ack && $urandom_range(0, 2) == 0) ack <= 1;
    else if (!req) ack <= 0;
  end

  always @(posedge clk) if (rst_n && req && ack) begin
    n_words++;
    checks++;
    if (expq.size() == 0 || evt != expq[0]) begin
      failures++;
      $display("%0t event mismatch got %h", $time, evt);
    end else void'(expq.pop_front());
  end

  initial begin
    int stage, m_cyc, m_pix, nm[N_PIX];
    int cur_pix, cur_n, done_pix, done_n, s2_pix, s2_n;
    bit cur_v, done_v, s2_v, s1_all_prev;
    bin_t [N_BINS-1:0] cur_h, done_h, s2_h;
    l1 = 13'd40; l2 = 13'd150; alpha = 4'd4;
    lc_start = 0; hist_update = 0; lc_stage = 0;
    for (int p = 0; p < N_PIX; p++) hist[p] = draw();
    foreach (nm[i]) nm[i] = 0;
    m_cyc = 0; m_pix = 0; cur_v = 0; done_v = 0; s2_v = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < PERIOD * 4 * 600; c++) begin
      logic [N_PIX-1:0] exp_clr;
      int bin;
      bit pass;
      @(negedge clk);
      stage = c % PERIOD;
      lc_stage = 5'(stage); lc_start = (stage == 0); hist_update = (stage == 9);
      #1;
      exp_clr = '0;
      if (m_cyc == 3 && stage == 10 && s2_v) begin
        pass = judge(s2_h, int'(alpha), bin);
        if (s2_n > int'(l2)) begin exp_clr[s2_pix] = 1; n_forced++; end
        else if (s2_n > int'(l1) && pass) begin
          event_word_t e;
          exp_clr[s2_pix] = 1; n_event++;
          e.peak_id = ID_W'(8 + s2_pix); e.pack.n_cycles = NCYC_W'(s2_n); e.pack.peak_bin = BIN_W'(bin);
          if (!req && !ack) expq.push_back(e);
        end else if (s2_n <= int'(l1)) n_l1++;
        else n_thr++;
      end
      chk(hist_clr == exp_clr, $sformatf("hist_clr got %b exp %b", hist_clr, exp_clr));
      for (int p = 0; p < N_PIX; p++) if (exp_clr[p]) begin nm[p] = 0; hist[p] = draw(); end
      if (m_cyc == 0 && stage == 2) begin s2_pix = done_pix; s2_n = done_n; s2_v = done_v; s2_h = done_h; end
      if (m_cyc == 3 && stage == 8) begin done_pix = cur_pix; done_n = cur_n; done_v = cur_v; done_h = cur_h; end
      if (m_cyc == 0 && stage == 0) begin cur_pix = m_pix; cur_n = nm[m_pix]; cur_v = 1; cur_h = hist[m_pix]; end
      if (hist_update) foreach (nm[i]) nm[i]++;
      if (stage == PERIOD - 1) begin
        m_cyc = (m_cyc + 1) % 4;
        if (m_cyc == 0) m_pix = (m_pix + 1) % N_PIX;
      end
    end
    repeat (20) @(negedge clk);
    $display("events=%0d words=%0d forced=%0d belowThr=%0d belowL1=%0d", n_event, n_words, n_forced, n_thr, n_l1);
    chk(expq.size() == 0, "all expected events seen");
    chk(n_event > 0 && n_forced > 0 && n_thr > 0 && n_l1 > 0, "all outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (PERIOD * 4 * 600 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
