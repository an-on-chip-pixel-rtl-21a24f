// tb_async_lidar_motion: radial-motion workload on the full-size design
// (default parameters), aimed at the dynamic-depth output.
//
// Scene at scan position 0 (lines 0-7), L1 = 40, alpha = 8, L2 = 2000: lines
// 0-2 see a target moving away (return bin grows by one every 16 laser
// cycles, from bin 15), lines 3-5 a target coming closer (from bin 115,
// shrinking by one every 16 cycles), lines 6-7 a static target. Each return
// arrives with 90 % probability per cycle; every bin also sees 0.8 %
// background. A strong pixel reports every 64 laser cycles, so a moving
// target's depth changes by about 4 bins (15 cm) per event and by about 12
// bins over three events, above the 8-bin (3 x 0.1 m) threshold.
//
// Checks: every event word has L1 < N <= L2 and a peak bin within the span
// the target covered since the histogram's last reset; every moving pixel
// gives dynamic-depth events, the receding ones only "farther" (dd_pos = 1),
// the approaching ones only "nearer"; the static pixels give none.
module tb_async_lidar_motion;
  import lidar_pkg::*;
  localparam int RUN_CYCLES = 1500;
  localparam int STEP = 16;              // laser cycles per bin of motion
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
  int n_words = 0;
  int dd_far [8], dd_near [8];

  always #2 clk = ~clk;

  async_lidar_top dut (.*);

  // -1: moving away, +1: coming closer, 0: static
  function automatic int motion(input int line);
    if (line <= 2) return -1;
    if (line <= 5) return 1;
    return 0;
  endfunction

  // return bin of a line at laser cycle c
  function automatic int ret_bin(input int line, input int c);
    case (motion(line))
      -1:      return 15 + c / STEP;
      1:       return 115 - c / STEP;
      default: return 40 + 9 * line;
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
        if (l < 8 && $urandom_range(0, 99) < 90) samples[l][ret_bin(l, lc)] = 1'b1;
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

  always @(posedge clk) if (rst_n) begin
    if (rd_en && !fifo_empty) begin
      int id, n, b, lo, hi;
      id = int'(rd_data.peak_id);
      n  = int'(rd_data.pack.n_cycles);
      b  = int'(rd_data.pack.peak_bin);
      n_words++;
      chk(id < 8, "peak id in range");
      chk(n > int'(l1) && n <= int'(l2), $sformatf("L1 < N <= L2 (N=%0d)", n));
      if (id < 8) begin
        // the histogram covers roughly the last N + 8 laser cycles
        lo = ret_bin(id, lc - n - 10);
        hi = ret_bin(id, lc);
        if (lo > hi) begin int t; t = lo; lo = hi; hi = t; end
        chk(b >= lo && b <= hi, $sformatf("pixel %0d bin %0d outside %0d..%0d", id, b, lo, hi));
      end
    end
    if (dd_valid) begin
      chk(dd_id < 8, "dd id in range");
      if (dd_id < 8) begin
        if (dd_pos) dd_far[int'(dd_id)]++; else dd_near[int'(dd_id)]++;
      end
    end
  end

  initial begin
    phase = '0; rd_en = 0;
    l1 = 13'd40; l2 = 13'd2000; alpha = 4'd8; scan_sel = 4'd0;
    foreach (dd_far[i]) begin dd_far[i] = 0; dd_near[i] = 0; end
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;
    wait (lc == RUN_CYCLES);
    run = 0;
    repeat (200) @(negedge clk);
    for (int p = 0; p < 8; p++) begin
      $display("pixel %0d motion %0d: dd farther=%0d nearer=%0d", p, motion(p), dd_far[p], dd_near[p]);
      case (motion(p))
        -1: begin
          chk(dd_far[p] > 0, $sformatf("pixel %0d reports moving away", p));
          chk(dd_near[p] == 0, $sformatf("pixel %0d never reports nearer", p));
        end
        1: begin
          chk(dd_near[p] > 0, $sformatf("pixel %0d reports coming closer", p));
          chk(dd_far[p] == 0, $sformatf("pixel %0d never reports farther", p));
        end
        default: chk(dd_far[p] == 0 && dd_near[p] == 0, $sformatf("static pixel %0d quiet", p));
      endcase
    end
    chk(n_words > 100, "events read");
    $display("words=%0d", n_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (25 * (RUN_CYCLES + 100)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
