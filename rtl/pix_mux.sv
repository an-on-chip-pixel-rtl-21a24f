// pix_mux: 4-to-1 histogram multiplexer in front of the PE core.
//
// Passes the histogram of pixel `pix_sel` (one of the N_PIX pixels sharing a
// processing element) to the PE core: 4 x 1280 bits in, 1280 bits out at the
// default sizes. Combinational; the controller changes `pix_sel` only at the
// start of a four-laser-cycle slot.
module pix_mux
  import lidar_pkg::*;
#(
  parameter int NB = N_BINS
) (
  input  bin_t [N_PIX-1:0][NB-1:0] hist_in,
  input  logic [1:0]               pix_sel,
  output bin_t [NB-1:0]            hist_out
);
  always_comb begin
    hist_out = '0;
    for (int p = 0; p < N_PIX; p++)
      if (pix_sel == 2'(p)) hist_out = hist_in[p];
  end
endmodule
