// tb_histogram: random multi-hit vectors are added to the histogram and
// compared with a software count; covers saturation at 1023 and clear
// priority over a simultaneous add.
module tb_histogram;
  import lidar_pkg::*;
  localparam int NB = 128;
  logic clk = 0, rst_n = 0, add = 0, clr = 0;
  logic [NB-1:0] hits;
  bin_t [NB-1:0] bin_cnt;
  logic saturated;
  int model [NB];
  int checks = 0, failures = 0, sat_seen = 0;

  always #5 clk = ~clk;

  histogram #(.NB(NB)) dut (.*);

  task automatic compare();
    bit any_sat = 0;
    for (int i = 0; i < NB; i++) begin
      checks++;
      if (int'(bin_cnt[i]) != model[i]) begin
        failures++;
        if (failures < 5) $display("bin %0d got %0d exp %0d", i, bin_cnt[i], model[i]);
      end
      if (model[i] == 1023) any_sat = 1;
    end
    checks++;
    if (saturated != any_sat) failures++;
    if (saturated) sat_seen++;
  endtask

  initial begin
    hits = '0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      compare();
      // bin 5 fires every time, so it saturates after 1023 adds
      for (int i = 0; i < NB; i++) hits[i] = ($urandom_range(0, 9) == 0) || (i == 5);
      add = ($urandom_range(0, 3) != 0) || (t == 1500);
      clr = (t == 1500) || (t == 2900);
      if (clr) foreach (model[i]) model[i] = 0;
      else if (add) foreach (model[i]) if (hits[i] && model[i] < 1023) model[i]++;
    end
    @(negedge clk);
    compare();
    checks++;
    if (sat_seen == 0) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
