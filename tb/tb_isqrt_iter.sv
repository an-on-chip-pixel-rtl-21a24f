// tb_isqrt_iter: runs the bit-serial square root on every 10-bit background
// value and compares with floor(sqrt(bg)) computed by search; also checks
// that `done` rises after exactly six steps and that the error is below one.
module tb_isqrt_iter;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [9:0] bg;
  logic [5:0] root;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  isqrt_iter #(.IN_W(10), .OUT_W(6)) dut (.*);

  function automatic int ref_sqrt(input int x);
    int r = 0;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  initial begin
    bg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int x = 0; x < 1024; x++) begin
      @(negedge clk);
      bg = 10'(x); load = 1;
      @(negedge clk);
      load = 0;
      for (int s = 0; s < 6; s++) begin
        checks++;
        if (done) begin failures++; $display("done early x=%0d step %0d", x, s); end
        step = 1;
        @(negedge clk);
        step = 0;
        // leave idle clocks between steps, as the PE schedule does
        repeat (x % 3) @(negedge clk);
      end
      checks++;
      if (!done || int'(root) != ref_sqrt(x)) begin
        failures++;
        if (failures < 5) $display("x=%0d root=%0d exp=%0d done=%0d", x, root, ref_sqrt(x), done);
      end
      // error below one count: root^2 <= x < (root+1)^2
      checks++;
      if (!(int'(root) * int'(root) <= x && x < (int'(root) + 1) * (int'(root) + 1))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
