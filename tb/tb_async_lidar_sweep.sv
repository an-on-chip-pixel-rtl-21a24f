// tb_async_lidar_sweep: runs the full-size design (default parameters) through
// a sweep of the two detection settings, the minimum exposure L1 and the
// threshold factor alpha, on one fixed scene, and checks how the event stream
// follows them.
//
// Scene at scan position 0 (lines 0-7): a laser return at a line-specific bin
// with a per-cycle probability of 60 % (lines 0, 5), 30 % (1), 20 % (7),
// 10 % (2) and 5 % (3); lines 4 and 6 see background only. Every bin of every
// line also sees background photons with probability 0.8 % per cycle. L2 is
// 2000 throughout. Each setting starts from reset and runs 1000 laser cycles;
// the host reads every event.
//
// Checks per setting:
//  * every event has L1 < N <= L2;
//  * after a pixel's first event, N is always 8 + 16k: a pixel is scanned
//    every 16 laser cycles (4 pixels x 4 cycles) and the decision and reset
//    come 8 cycles after the scan starts;
//  * the strong pixels report at the first scan with N > L1, i.e. the smallest
//    N is the smallest 8 + 16k above L1 (reset-to-event latency N + 8 cycles).
// Checks across settings:
//  * at alpha = 8 the strong pixels' event count falls strictly as L1 rises
//    (20, 60, 100);
//  * false events (from background-only pixels or at a wrong bin) do not rise
//    as alpha rises (0, 2, 8), occur at alpha = 0 and never at alpha = 8.
module tb_async_lidar_sweep;
  import lidar_pkg::*;
  localparam int N_SET = 5;
  localparam int RUN_CYCLES = 1000;
  logic clk = 0, rst_n = 0, run = 0;
  logic [NCYC_W-1:0] l1, l2;
  logic [ALPHA_W-1:0] alpha;
  logic [3:0] scan_sel;
  logic [127:0][N_PHASES-1:0] phase;
  logic laser_trig_o, rd_en, fifo_empty, dd_valid, dd_pos;
  logic [ID_W-1:0] dd_id;
  event_word_t rd_data;
  logic [1:0] f_event, f_drop, f_forced, f_below_l1, f_below_thr;
  logic [7:0] f_saturated;
  logic f_stall;
  int checks = 0, failures = 0;
  int lc = 0;

  // settings: {L1, alpha}
  int set_l1    [N_SET] = '{20, 60, 100, 60, 60};
  int set_alpha [N_SET] = '{ 8,  8,   8,  0,  2};
  int strong_ev [N_SET];
  int false_ev  [N_SET];
  int total_ev  [N_SET];
  int min_n     [N_SET];
  int cur_set = -1;
  int seen [8];

  always #2 clk = ~clk;

  async_lidar_top dut (.*);

  function automatic int sig_bin(input int line);
    return 10 + (line * 7) % 100;
  endfunction

  // laser return probability in percent, 0 for background only
  function automatic int sig_pct(input int line);
    case (line)
      0, 5:    return 60;
      1:       return 30;
      7:       return 20;
      2:       return 10;
      3:       return 5;
      default: return 0;
    endcase
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t FAIL %s", $time, what); end
  endtask

  // ---------------- photon stimulus ----------------
  logic [127:0][N_BINS-1:0] samples;
  int win = -1;
  always @(negedge clk) begin
    if (laser_trig_o) begin
      lc++;
      for (int l = 0; l < 128; l++) begin
        samples[l] = '0;
        for (int b = 0; b < N_BINS; b++)
          if ($urandom_range(0, 999) < 8) samples[l][b] = 1'b1;
        if ($urandom_range(0, 99) < sig_pct(l)) samples[l][sig_bin(l)] = 1'b1;
      end
      win = 0;
    end
    if (win >= 0 && win < N_STAGES) begin
      for (int l = 0; l < 128; l++) phase[l] = samples[l][win*N_PHASES +: N_PHASES];
      win++;
    end else begin
      phase = '0;
      win = -1;
    end
  end

  // ---------------- host side ----------------
  always @(negedge clk) rd_en = !fifo_empty;

  always @(posedge clk) if (rst_n && rd_en && !fifo_empty && cur_set >= 0) begin
    int id, n;
    id = int'(rd_data.peak_id);
    n  = int'(rd_data.pack.n_cycles);
    chk(id < 8, "peak id in range");
    chk(n > int'(l1) && n <= int'(l2), $sformatf("L1 < N <= L2 (N=%0d)", n));
    if (id < 8) begin
      total_ev[cur_set]++;
      if (sig_pct(id) == 0 || int'(rd_data.pack.peak_bin) != sig_bin(id)) false_ev[cur_set]++;
      if (seen[id] > 0) begin
        chk(n % 16 == 8, $sformatf("pixel %0d N=%0d is 8 + 16k", id, n));
        if (sig_pct(id) == 60 && n < min_n[cur_set]) min_n[cur_set] = n;
      end
      if (sig_pct(id) == 60) strong_ev[cur_set]++;
      seen[id]++;
    end
  end

  initial begin
    phase = '0; rd_en = 0;
    l2 = 13'd2000; scan_sel = 4'd0;
    for (int s = 0; s < N_SET; s++) begin
      int first_n;
      // stop, drain, reset, set up the next setting
      run = 0;
      repeat (60) @(negedge clk);
      rst_n = 0;
      l1 = NCYC_W'(set_l1[s]);
      alpha = ALPHA_W'(set_alpha[s]);
      foreach (seen[i]) seen[i] = 0;
      strong_ev[s] = 0; false_ev[s] = 0; total_ev[s] = 0; min_n[s] = 1 << 20;
      cur_set = s;
      repeat (3) @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      run = 1;
      lc = 0;
      wait (lc == RUN_CYCLES);
      run = 0;
      repeat (100) @(negedge clk);
      first_n = 8;
      while (first_n <= set_l1[s]) first_n += 16;
      $display("L1=%0d alpha=%0d: events=%0d strong=%0d false=%0d min N strong=%0d (expected %0d)",
               set_l1[s], set_alpha[s], total_ev[s], strong_ev[s], false_ev[s], min_n[s], first_n);
      chk(min_n[s] == first_n, "strong pixel reports at the first scan above L1");
    end
    chk(strong_ev[0] > strong_ev[1] && strong_ev[1] > strong_ev[2], "event rate falls as L1 rises");
    chk(false_ev[3] >= false_ev[4] && false_ev[4] >= false_ev[1], "false events fall as alpha rises");
    chk(false_ev[3] > 0, "false events at alpha = 0");
    chk(false_ev[1] == 0, "no false events at alpha = 8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_SET * (25 * RUN_CYCLES + 500) + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
