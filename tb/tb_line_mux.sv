// tb_line_mux: random TDC hit vectors on all 128 lines; for every scan
// position the 8 selected lines must be lines sel*8 .. sel*8+7.
module tb_line_mux;
  import lidar_pkg::*;
  localparam int N_LINES = 128, N_HIST = 8;
  logic [N_LINES-1:0][N_BINS-1:0] hits_in;
  logic [3:0]                     sel;
  logic [N_HIST-1:0][N_BINS-1:0]  hits_out;
  int checks = 0, failures = 0;

  line_mux #(.N_LINES(N_LINES), .N_HIST(N_HIST)) dut (.*);

  initial begin
    for (int t = 0; t < 64; t++) begin
      for (int l = 0; l < N_LINES; l++)
        for (int w = 0; w < N_BINS / 32; w++) hits_in[l][w*32 +: 32] = $urandom;
      sel = 4'(t);
      #1;
      for (int h = 0; h < N_HIST; h++) begin
        checks++;
        if (hits_out[h] !== hits_in[int'(sel) * N_HIST + h]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
