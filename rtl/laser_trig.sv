// laser_trig: laser trigger and TDC window generator.
//
// A free-running counter of PERIOD clocks defines one laser cycle (25 clocks
// of 4 ns = 100 ns, the 10 MHz repetition rate of the prototype). While `run`
// is high, each cycle begins with a trigger pulse of TRIG_W clocks to the
// laser, `lc_start` marks the first clock, `lc_stage` gives the clock index in
// the cycle, and `tdc_en` is high for the first N_STAGES clocks: the TDC
// measurement window of 8 stages x 16 phases = 128 bins of 250 ps. The rest of
// the cycle is the wait for the next laser pulse. Dropping `run` stops the
// counter at the end of the current cycle. Trigger width and window position
// are this design's choices.
module laser_trig
  import lidar_pkg::*;
#(
  parameter int PERIOD = 25,
  parameter int TRIG_W = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      run,
  output logic                      trig,
  output logic                      lc_start,
  output logic [$clog2(PERIOD)-1:0] lc_stage,
  output logic                      tdc_en
);
  localparam int SW = $clog2(PERIOD);
  logic active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lc_stage <= '0;
      active   <= 1'b0;
    end else if (!active) begin
      if (run) active <= 1'b1;
    end else if (lc_stage == SW'(PERIOD - 1)) begin
      lc_stage <= '0;
      active   <= run;
    end else begin
      lc_stage <= lc_stage + 1'b1;
    end
  end

  assign lc_start = active && lc_stage == '0;
  assign trig     = active && lc_stage < SW'(TRIG_W);
  assign tdc_en   = active && lc_stage < SW'(N_STAGES);

  initial assert (PERIOD > N_STAGES + 3) else $error("laser period too short for the TDC window");
endmodule
