// tb_aer: two channel models raise requests with random events and follow
// the four-phase handshake; the FIFO is modelled as a queue that is randomly
// held full. Checks that every event reaches the FIFO exactly once and in
// per-channel order, that acks are one-hot, that nothing is written while
// full, and that simultaneous requests are served alternately.
module tb_aer;
  import lidar_pkg::*;
  localparam int N_CH = 2;
  logic clk = 0, rst_n = 0;
  logic [N_CH-1:0] req, ack;
  event_word_t [N_CH-1:0] evt;
  logic fifo_full, wr_en, stall;
  event_word_t wr_data;
  event_word_t sent [N_CH][$];
  int checks = 0, failures = 0, n_written = 0, n_sent = 0, stalls = 0, both = 0, alternations = 0;
  int last_served = -1;

  always #5 clk = ~clk;

  aer #(.N_CH(N_CH)) dut (.*);

  // channel models
  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    always @(posedge clk) begin
      if (!rst_n) begin
        req[c] <= 1'b0;
      end else if (req[c] && ack[c]) begin
        req[c] <= 1'b0;
      end else if (!req[c] && !ack[c] && $urandom_range(0, 3) == 0 && n_sent < 2000) begin
        event_word_t e;
        e.peak_id = ID_W'(c);
        e.pack    = EVT_W'($urandom);
        evt[c]   <= e;
        req[c]   <= 1'b1;
        sent[c].push_back(e);
        n_sent++;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    fifo_full <= ($urandom_range(0, 4) == 0);
    checks++;
    if (!$onehot0(ack)) failures++;
    if (stall) stalls++;
    if (&req && ack == '0 && !fifo_full) both++;
    if (wr_en) begin
      int c;
      c = int'(wr_data.peak_id);
      n_written++;
      checks++;
      if (fifo_full || c >= N_CH || sent[c].size() == 0 || wr_data !== sent[c][0]) failures++;
      else void'(sent[c].pop_front());
      if (&req && last_served >= 0) begin
        checks++;
        if (c == last_served) failures++; else alternations++;
      end
      last_served = c;
    end
  end

  initial begin
    fifo_full = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (n_sent >= 2000);
    repeat (50) @(posedge clk);
    checks++;
    if (n_written != n_sent) begin failures++; $display("written %0d sent %0d", n_written, n_sent); end
    checks++;
    if (stalls == 0 || alternations == 0) failures++;
    $display("stalls=%0d alternations=%0d", stalls, alternations);
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
