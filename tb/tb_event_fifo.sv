// tb_event_fifo: random reads and writes against a queue model; checks data
// order, empty/full flags, level, and that writes to a full FIFO are ignored.
module tb_event_fifo;
  localparam int WIDTH = 26, DEPTH = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic empty, full;
  logic [4:0] level;
  logic [WIDTH-1:0] q[$];
  int checks = 0, failures = 0, full_seen = 0;

  always #5 clk = ~clk;

  event_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(level) != q.size()) begin
        failures++;
        if (failures < 5) $display("flags t=%0d empty=%0d full=%0d level=%0d model=%0d", t, empty, full, level, q.size());
      end
      if (q.size() != 0) begin
        checks++;
        if (rd_data !== q[0]) failures++;
      end
      if (full) full_seen++;
      // phases that favour writing, then reading
      wr_en   = ($urandom_range(0, 9) < ((t / 500) % 2 != 0 ? 3 : 8));
      rd_en   = ($urandom_range(0, 9) < ((t / 500) % 2 != 0 ? 8 : 3));
      wr_data = WIDTH'($urandom);
      begin
        bit was_full;
        was_full = (q.size() == DEPTH);
        if (rd_en && q.size() != 0) void'(q.pop_front());
        if (wr_en && !was_full) q.push_back(wr_data);
      end
    end
    checks++;
    if (full_seen == 0) failures++;
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
