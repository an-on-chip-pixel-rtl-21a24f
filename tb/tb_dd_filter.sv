// tb_dd_filter: random event streams over 64 pixel ids, each pixel's depth
// either static (with +/-1 bin jitter) or stepping by several bins. A model
// keeps each pixel's event history and computes the three-event moving
// averages directly (as real numbers); every DD event and its polarity must
// match the model's comparison of consecutive averages with the threshold
// (averages kept as exact sums of three).
module tb_dd_filter;
  import lidar_pkg::*;
  localparam int THR3 = 8;             // 3 x threshold: 0.1 m = 8/3 bins of 3.75 cm
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [ID_W-1:0] in_id;
  logic [BIN_W-1:0] in_bin;
  logic dd_valid, dd_pos;
  logic [ID_W-1:0] dd_id;
  int hist [64][$];
  int depth [64];
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0;

  always #5 clk = ~clk;

  dd_filter dut (.*);

  initial begin
    for (int i = 0; i < 64; i++) depth[i] = $urandom_range(20, 100);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      bit exp_v, exp_p;
      int id, d, n;
      @(negedge clk);
      id = $urandom_range(0, 63);
      in_valid = ($urandom_range(0, 2) != 0);
      if (id >= 32 && $urandom_range(0, 9) == 0) depth[id] = $urandom_range(10, 117);   // moving pixels
      d = depth[id] + $urandom_range(0, 2) - 1;
      in_id = ID_W'(id); in_bin = BIN_W'(d);
      exp_v = 0; exp_p = 0;
      if (in_valid) begin
        hist[id].push_back(d);
        n = hist[id].size();
        if (n >= 4) begin
          // averages kept as sums of three to stay exact: avg = sum / 3
          int s_new, s_old;
          s_new = hist[id][n-1] + hist[id][n-2] + hist[id][n-3];
          s_old = hist[id][n-2] + hist[id][n-3] + hist[id][n-4];
          if (s_new - s_old > THR3) begin exp_v = 1; exp_p = 1; end
          if (s_old - s_new > THR3) begin exp_v = 1; exp_p = 0; end
        end
        if (n > 4) void'(hist[id].pop_front());
      end
      @(negedge clk);
      checks++;
      if (dd_valid != exp_v || (exp_v && (dd_pos != exp_p || dd_id != ID_W'(id)))) begin
        failures++;
        if (failures < 5) $display("t=%0d id=%0d got %0d/%0d exp %0d/%0d", t, id, dd_valid, dd_pos, exp_v, exp_p);
      end
      if (exp_v && exp_p) n_pos++;
      if (exp_v && !exp_p) n_neg++;
      in_valid = 0;
    end
    checks++;
    if (n_pos == 0 || n_neg == 0) failures++;
    $display("pos=%0d neg=%0d", n_pos, n_neg);
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
