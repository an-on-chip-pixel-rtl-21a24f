// line_mux: 16-to-1 selection of TDC lines for histogramming.
//
// The TDC decodes all N_LINES lines, but only N_HIST histograms exist. With
// `sel` = s the histograms take lines s*N_HIST .. s*N_HIST + N_HIST-1 (the
// electronic scan position). At the defaults this is 16384 bits in and
// 8 x 128 = 1024 bits out. The grouping of lines per scan position is this
// design's choice; the widths follow the published block diagram.
module line_mux
  import lidar_pkg::*;
#(
  parameter int N_LINES = 128,
  parameter int N_HIST  = 8,
  parameter int SEL_W   = $clog2(N_LINES / N_HIST)
) (
  input  logic [N_LINES-1:0][N_BINS-1:0] hits_in,
  input  logic [SEL_W-1:0]               sel,
  output logic [N_HIST-1:0][N_BINS-1:0]  hits_out
);
  localparam int N_POS = N_LINES / N_HIST;
  always_comb begin
    hits_out = '0;
    for (int s = 0; s < N_POS; s++)
      if (sel == SEL_W'(s))
        for (int h = 0; h < N_HIST; h++)
          hits_out[h] = hits_in[s*N_HIST + h];
  end
endmodule
