// tdc: multi-line, multi-event phase-sampling time-to-digital converter.
//
// Each of N_LINES SPAD lines is sampled on N_PHASES equally spaced clock
// phases (250 ps apart at a 250 MHz stage clock); the samples of one clock
// arrive together as one N_PHASES-bit word per line (bit k = phase k). The TDC
// counts N_STAGES coarse stages while `en` is high, so sample k of stage s is
// time bin s*N_PHASES + k (128 bins). A photon is registered in the bin where
// the line goes from 0 to 1; a line already high at the start of the window is
// not counted. Every rising edge in the window sets its bit, so one line can
// report several photons per laser cycle (multi-event).
//
// At the end of the window (`en` falls) `valid` pulses for one clock with the
// N_LINES x N_BINS hit vectors (128 x 128 = 16384 bits by default) on `hits`;
// they stay until the next window starts. The phase sampling flops themselves
// sit on the multi-phase clocks outside this module; this module is the
// synchronous part that decodes their samples.
module tdc
  import lidar_pkg::*;
#(
  parameter int N_LINES = 128
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic [N_LINES-1:0][N_PHASES-1:0]    phase,
  output logic [N_LINES-1:0][N_BINS-1:0]      hits,
  output logic                                valid
);
  localparam int STG_W = $clog2(N_STAGES);
  logic [STG_W-1:0]   stage;
  logic               en_q;
  logic [N_LINES-1:0] last;    // last phase sample of the previous stage

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= '0;
      en_q  <= 1'b0;
      last  <= '0;
      for (int l = 0; l < N_LINES; l++) hits[l] <= '0;
      valid <= 1'b0;
    end else begin
      en_q  <= en;
      valid <= en_q && !en;
      if (en) begin
        stage <= stage + 1'b1;
        for (int l = 0; l < N_LINES; l++) begin
          for (int k = 0; k < N_PHASES; k++) begin
            if (k == 0)
              hits[l][int'(stage)*N_PHASES + k] <= phase[l][0] & ~(en_q ? last[l] : phase[l][0]);
            else
              hits[l][int'(stage)*N_PHASES + k] <= phase[l][k] & ~phase[l][k-1];
          end
          last[l] <= phase[l][N_PHASES-1];
        end
      end else begin
        stage <= '0;
      end
    end
  end

  initial assert (N_STAGES * N_PHASES == N_BINS) else $error("TDC range must match histogram");
endmodule
