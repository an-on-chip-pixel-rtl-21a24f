// tb_laser_trig: checks the 25-clock laser period (10 MHz at a 4 ns clock),
// the trigger pulse, the 8-clock TDC window at the start of each cycle, the
// stage count, and that dropping `run` stops the cycles.
module tb_laser_trig;
  localparam int PERIOD = 25;
  logic clk = 0, rst_n = 0, run = 0;
  logic trig, lc_start, tdc_en;
  logic [4:0] lc_stage;
  int checks = 0, failures = 0;
  int cyc = 0, last_start = -1, n_start = 0, en_len = 0, trig_len = 0;

  always #2 clk = ~clk;

  laser_trig #(.PERIOD(PERIOD)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (lc_start) begin
      if (last_start >= 0) begin
        checks++;
        if (cyc - last_start != PERIOD) begin failures++; $display("period %0d", cyc - last_start); end
      end
      last_start = cyc;
      n_start++;
      checks++;
      if (!trig || !tdc_en || lc_stage != 0) failures++;
    end
    if (tdc_en) en_len++;
    if (trig) trig_len++;
    if (!tdc_en && en_len != 0) begin
      checks++;
      if (en_len != 8) begin failures++; $display("window %0d", en_len); end
      en_len = 0;
    end
    if (!trig && trig_len != 0) begin
      checks++;
      if (trig_len != 1) failures++;
      trig_len = 0;
    end
    if (lc_start === 1'b0 && tdc_en) begin
      checks++;
      if (int'(lc_stage) >= 8) failures++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    checks++;
    if (n_start != 0 || trig) failures++;          // idle before run
    run <= 1;
    repeat (PERIOD * 40) @(posedge clk);
    run <= 0;
    repeat (PERIOD * 3) @(posedge clk);
    checks++;
    if (n_start != 40 && n_start != 41) begin failures++; $display("cycles %0d", n_start); end
    n_start = 0;
    repeat (PERIOD * 3) @(posedge clk);
    checks++;
    if (n_start != 0) failures++;                  // stopped
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
