// tb_pe_core: drives the PE core with the stage-1/stage-2 command sequence
// and random histograms (background plus an optional peak, sometimes ties),
// keeping the two stages overlapped as in operation: stage 2 judges the
// previous histogram while stage 1 scans the next. Each decision is compared
// with a reference that computes the first maximum, the background as the
// smaller quadrant maximum of the non-peak half, floor(sqrt(BG)) and the
// threshold BG + alpha*sqrt(BG).
module tb_pe_core;
  import lidar_pkg::*;
  logic clk = 0, rst_n = 0;
  pe_cmd_t cmd;
  bin_t [N_BINS-1:0] hist;
  logic [ALPHA_W-1:0] alpha;
  logic dec_valid, dec_pass;
  logic [BIN_W-1:0] dec_bin;
  bin_t dec_peak, dec_bg;
  logic [THR_W-1:0] dec_thr;
  int checks = 0, failures = 0, n_pass = 0, n_fail = 0;

  always #5 clk = ~clk;

  pe_core dut (.*);

  typedef struct { int peak; int bin; int bg; int thr; bit pass; } ref_t;

  function automatic ref_t model(input bin_t [N_BINS-1:0] h, input int a);
    ref_t r;
    int q[4];
    int sq;
    r.bin = 0;
    for (int i = 1; i < N_BINS; i++) if (h[i] > h[r.bin]) r.bin = i;
    r.peak = int'(h[r.bin]);
    for (int k = 0; k < 4; k++) begin
      q[k] = 0;
      for (int i = 32 * k; i < 32 * k + 32; i++) if (int'(h[i]) > q[k]) q[k] = int'(h[i]);
    end
    if (r.bin >= 64) r.bg = (q[0] < q[1]) ? q[0] : q[1];
    else             r.bg = (q[2] < q[3]) ? q[2] : q[3];
    sq = 0;
    while ((sq + 1) * (sq + 1) <= r.bg) sq++;
    r.thr  = r.bg + a * sq;
    r.pass = r.peak > r.thr;
    return r;
  endfunction

  function automatic bin_t [N_BINS-1:0] make_hist(input int t);
    bin_t [N_BINS-1:0] h;
    int base, spread;
    base   = $urandom_range(0, 600);
    spread = (t % 5 == 0) ? 0 : $urandom_range(1, 40);
    for (int i = 0; i < N_BINS; i++) h[i] = bin_t'(base + $urandom_range(0, spread));
    if (t % 3 != 0) begin
      int p, amp;
      p   = $urandom_range(0, N_BINS - 1);
      amp = $urandom_range(0, 300);
      h[p] = bin_t'((base + spread + amp > 1023) ? 1023 : base + spread + amp);
      if (p > 0 && t % 7 == 0) h[p-1] = h[p];     // tie: the lower bin must win
    end
    return h;
  endfunction

  task automatic tick();
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic scan(input bin_t [N_BINS-1:0] h);
    hist = h;
    for (int g = 0; g < N_GROUPS; g++)
      for (int hf = 0; hf < 2; hf++) begin
        cmd.s1_cmp = 1; cmd.s1_grp = 3'(g); cmd.s1_half = hf[0];
        tick();
      end
    // the live histogram changes after the scan; it must not matter
    hist = make_hist(1);
    cmd.s1_all = 0;
    tick();
    hist = h;
    cmd.s1_all = 1;
    tick();
  endtask

  initial begin
    bin_t [N_BINS-1:0] prev, next;
    ref_t r;
    cmd = '0; hist = '0; alpha = 4'd8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev = make_hist(2);
    scan(prev);
    for (int t = 0; t < 400; t++) begin
      alpha = ALPHA_W'($urandom);
      cmd.s2_sample = 1; tick();
      next = make_hist(t);
      scan(next);
      for (int s = 0; s < SQRT_W; s++) begin cmd.s2_sqrt = 1; tick(); tick(); end
      cmd.s2_thr = 1; tick();
      cmd.s2_gen = 1; tick();
      r = model(prev, int'(alpha));
      checks++;
      if (!dec_valid || dec_pass != r.pass || int'(dec_bin) != r.bin || int'(dec_peak) != r.peak ||
          int'(dec_bg) != r.bg || int'(dec_thr) != r.thr) begin
        failures++;
        if (failures < 5)
          $display("t=%0d got pass=%0d bin=%0d peak=%0d bg=%0d thr=%0d exp %0d %0d %0d %0d %0d",
                   t, dec_pass, dec_bin, dec_peak, dec_bg, dec_thr, r.pass, r.bin, r.peak, r.bg, r.thr);
      end
      if (r.pass) n_pass++; else n_fail++;
      tick();
      checks++;
      if (dec_valid) failures++;          // one-clock pulse
      prev = next;
    end
    checks++;
    if (n_pass == 0 || n_fail == 0) failures++;
    $display("pass=%0d fail=%0d", n_pass, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
