// tb_async_lidar_top: end-to-end test of the full-size design (128 lines, 8
// histograms, two PE channels, default parameters).
//
// The testbench plays the SPAD front ends: for every laser cycle it draws
// photons for each of the 128 lines (random background in every bin, plus a
// laser return at a line-specific bin with a given probability) and presents
// them as 16-phase samples during the 8-clock TDC window. Scene, scan position
// 0 (lines 0-7): six strong pixels, one background-only pixel and one flooded
// pixel whose samples toggle every phase (64 hits per cycle, no peak), which
// saturates its bins. The host reads the FIFO, except for a stretch where it
// stops, so that the FIFO fills, the AER stalls and events are dropped. Then
// the scan moves to position 3 (lines 24-31) with a shorter L2.
//
// Checks: every event word has a valid pixel id, L1 < N <= L2, and the peak
// bin of the line it came from; the background-only and flooded pixels never
// report; every strong pixel reports. Each mechanism (event, forced reset at
// L2, judgement before L1, threshold miss, FIFO stall, dropped event, bin
// saturation, scan switch, dynamic-depth event) is counted and must happen at
// least once; the static first scene must give no dynamic-depth event, the
// scan switch (every pixel's depth changes) must give some.
module tb_async_lidar_top;
  import lidar_pkg::*;
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
  int c_event = 0, c_drop = 0, c_forced = 0, c_l1 = 0, c_thr = 0, c_stall = 0, c_sat = 0, c_words = 0;
  int c_scan_b = 0, c_dd_a = 0, c_dd_b = 0;
  int per_pix [8];
  int lc = 0;              // laser cycles since run
  bit reading = 1;
  int phase_b_start = 1 << 30;

  always #2 clk = ~clk;     // 4 ns TDC stage clock

  async_lidar_top dut (.*);

  function automatic int sig_bin(input int line);
    return 10 + (line * 7) % 100;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t FAIL %s", $time, what); end
  endtask

  // pixel role at scan position 0: 0-4,7 strong, 5 background only, 6 flooded
  function automatic int role(input int line);
    if (line == 5) return 1;
    if (line == 6) return 2;
    return 0;
  endfunction

  // ---------------- photon stimulus ----------------
  logic [127:0][N_BINS-1:0] samples;   // this laser cycle's sample stream per line
  int win = -1;
  always @(negedge clk) begin
    if (laser_trig_o) begin
      lc++;
      for (int l = 0; l < 128; l++) begin
        samples[l] = '0;
        if (l == 6) begin
          for (int b = 0; b < N_BINS; b++) samples[l][b] = b[0];
        end else begin
          for (int b = 0; b < N_BINS; b++)
            if ($urandom_range(0, 999) < 8) samples[l][b] = 1'b1;
          if (role(l) == 0 && $urandom_range(0, 99) < 60) samples[l][sig_bin(l)] = 1'b1;
        end
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
  always @(negedge clk) rd_en = reading && !fifo_empty;

  always @(posedge clk) if (rst_n) begin
    c_event  += $countones(f_event);
    c_drop   += $countones(f_drop);
    c_forced += $countones(f_forced);
    c_l1     += $countones(f_below_l1);
    c_thr    += $countones(f_below_thr);
    if (f_stall) c_stall++;
    if (dd_valid) begin
      if (scan_sel == 0) c_dd_a++; else c_dd_b++;
    end
    if (f_saturated[6]) c_sat++;
    if (rd_en && !fifo_empty) begin
      int id, line;
      id = int'(rd_data.peak_id);
      c_words++;
      chk(id < 8, "peak id in range");
      chk(rd_data.pack.n_cycles > l1 && rd_data.pack.n_cycles <= 13'd1100, "L1 < N <= L2");
      if (id < 8) begin
        line = int'(scan_sel) * 8 + id;
        per_pix[id]++;
        if (scan_sel == 0) chk(role(line) == 0, $sformatf("no event from pixel %0d", id));
        if (scan_sel == 0 || lc > phase_b_start + 330) begin
          chk(int'(rd_data.pack.peak_bin) == sig_bin(line),
              $sformatf("pixel %0d bin %0d exp %0d", id, rd_data.pack.peak_bin, sig_bin(line)));
          if (scan_sel == 3) c_scan_b++;
        end
      end
    end
  end

  initial begin
    phase = '0; rd_en = 0;
    l1 = 13'd40; l2 = 13'd1100; alpha = 4'd8; scan_sel = 4'd0;
    foreach (per_pix[i]) per_pix[i] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;
    wait (lc == 300);
    reading = 0;                     // host pauses: FIFO fills, AER stalls
    wait (lc == 600);
    reading = 1;
    wait (lc == 1250);
    for (int p = 0; p < 8; p++)
      if (role(p) == 0) chk(per_pix[p] > 0, $sformatf("strong pixel %0d reported", p));
    // move the scan to lines 24..31 with a shorter L2
    @(negedge clk);
    l2 = 13'd300;
    scan_sel = 4'd3;
    phase_b_start = lc;
    wait (lc == 2000);
    reading = 1;
    repeat (200) @(negedge clk);
    $display("words=%0d events=%0d dropped=%0d forced=%0d belowL1=%0d belowThr=%0d stall=%0d saturated=%0d scanB=%0d dd=%0d/%0d",
             c_words, c_event, c_drop, c_forced, c_l1, c_thr, c_stall, c_sat, c_scan_b, c_dd_a, c_dd_b);
    chk(c_event > 0, "event");
    chk(c_forced > 0, "forced reset at L2");
    chk(c_l1 > 0, "judgement before L1");
    chk(c_thr > 0, "threshold miss");
    chk(c_stall > 0, "AER stall on full FIFO");
    chk(c_drop > 0, "dropped event");
    chk(c_sat > 0, "bin saturation");
    chk(c_scan_b > 0, "events after scan switch");
    chk(c_dd_a == 0, "no dynamic-depth event in the static scene");
    chk(c_dd_b > 0, "dynamic-depth events when the depths change");
    chk(c_words == c_event - c_drop, "every accepted event read once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (25 * 2100 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
