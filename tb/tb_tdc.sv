// tb_tdc: feeds random 16-phase samples on 8 lines through repeated 8-stage
// windows and checks the 128-bin hit vectors against a reference that marks
// every 0->1 transition of the concatenated sample stream (the first sample
// of a window never counts). Also checks that `valid` comes once per window.
module tb_tdc;
  import lidar_pkg::*;
  localparam int N_LINES = 8;
  logic clk = 0, rst_n = 0, en = 0;
  logic [N_LINES-1:0][N_PHASES-1:0] phase;
  logic [N_LINES-1:0][N_BINS-1:0]   hits;
  logic valid;
  logic [N_LINES-1:0][N_BINS-1:0]   stream, expect_h;
  int checks = 0, failures = 0, n_valid = 0, multi = 0;

  always #2 clk = ~clk;

  tdc #(.N_LINES(N_LINES)) dut (.*);

  always @(posedge clk) if (rst_n && valid) n_valid++;

  initial begin
    phase = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int w = 0; w < 300; w++) begin
      for (int s = 0; s < N_STAGES; s++) begin
        @(negedge clk);
        en = 1;
        for (int l = 0; l < N_LINES; l++)
          for (int k = 0; k < N_PHASES; k++) begin
            // short random pulses; line 0 is dense to get several hits per window
            phase[l][k] = (l == 0) ? 1'($urandom_range(0, 1)) : ($urandom_range(0, 15) == 0);
            stream[l][s*N_PHASES + k] = phase[l][k];
          end
      end
      @(negedge clk);
      en = 0;
      phase = '0;
      for (int l = 0; l < N_LINES; l++) begin
        expect_h[l][0] = 1'b0;
        for (int b = 1; b < N_BINS; b++) expect_h[l][b] = stream[l][b] & ~stream[l][b-1];
      end
      @(negedge clk);
      checks++;
      if (!valid) failures++;
      for (int l = 0; l < N_LINES; l++) begin
        checks++;
        if (hits[l] !== expect_h[l]) begin
          failures++;
          if (failures < 4) $display("window %0d line %0d: got %h exp %h", w, l, hits[l], expect_h[l]);
        end
        if ($countones(expect_h[l]) > 1) multi++;
      end
      repeat (w % 4) @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (n_valid != 300) begin failures++; $display("valid count %0d", n_valid); end
    checks++;
    if (multi == 0) failures++;
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
