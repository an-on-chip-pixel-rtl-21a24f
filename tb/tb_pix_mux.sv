// tb_pix_mux: fills four histograms with random counts and checks that every
// select value routes the right one to the output.
module tb_pix_mux;
  import lidar_pkg::*;
  bin_t [N_PIX-1:0][N_BINS-1:0] hist_in;
  logic [1:0]                   pix_sel;
  bin_t [N_BINS-1:0]            hist_out;
  int checks = 0, failures = 0;

  pix_mux dut (.*);

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int p = 0; p < N_PIX; p++)
        for (int i = 0; i < N_BINS; i++) hist_in[p][i] = bin_t'($urandom);
      pix_sel = 2'($urandom);
      #1;
      for (int i = 0; i < N_BINS; i++) begin
        checks++;
        if (hist_out[i] !== hist_in[pix_sel][i]) failures++;
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
