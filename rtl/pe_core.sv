// pe_core: two-stage pipelined peak finder and threshold unit of one PE channel.
//
// Stage 1 scans the selected pixel's 128-bin histogram (from the 4:1 pixel
// mux) as eight groups of 16 bins. Each group goes through the shared 8-to-1
// comparator tree in two halves of 8 bins, keeping the group maximum and its
// position. "Max All" then passes the eight group maxima through the same tree
// to find the peak bin i_max and its count h_imax. As a by-product, the
// background BG is taken as the smaller of the two quadrant maxima (32 bins
// each) in the half of the histogram that does not hold the peak.
//
// Stage 2 works on the result of the previous pixel while stage 1 scans the
// next one: it samples the stage-1 result, runs the 6-step square root of BG,
// forms the threshold I_th = BG + alpha*sqrt(BG) and at "peak gen" decides
// h_imax > I_th. `dec_valid` pulses one clock after s2_gen with `dec_pass`,
// `dec_bin`, `dec_peak` and `dec_thr`.
//
// All timing comes from the one-clock commands on `cmd` (see pe_ctrl). The
// algorithm and its split into two stages follow the published design; the
// tie rule (lowest bin wins) and the command encoding are this design's.
module pe_core
  import lidar_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  pe_cmd_t             cmd,
  input  bin_t [N_BINS-1:0]   hist,      // histogram of the selected pixel
  input  logic [ALPHA_W-1:0]  alpha,
  output logic                dec_valid,
  output logic                dec_pass,
  output logic [BIN_W-1:0]    dec_bin,
  output bin_t                dec_peak,
  output logic [THR_W-1:0]    dec_thr,
  output bin_t                dec_bg
);
  // ---------------- stage 1 ----------------
  bin_t [7:0]        tree_in;
  bin_t              tree_max;
  logic [2:0]        tree_idx;
  bin_t [N_GROUPS-1:0]       grp_max;
  logic [N_GROUPS-1:0][3:0]  grp_idx;
  bin_t              half_max;     // maximum of the first 8 bins of a group
  logic [2:0]        half_idx;

  // stage-1 result registers
  bin_t              s1_peak;
  logic [BIN_W-1:0]  s1_bin;
  bin_t              s1_bg;

  cmp_tree8 #(.W(HIST_W)) u_tree (.val(tree_in), .max_val(tree_max), .max_idx(tree_idx));

  always_comb begin
    tree_in = '0;
    if (cmd.s1_all) begin
      tree_in = grp_max;
    end else begin
      for (int k = 0; k < 8; k++)
        tree_in[k] = hist[int'(cmd.s1_grp) * GROUP_BINS + int'(cmd.s1_half) * 8 + k];
    end
  end

  // background: smaller quadrant maximum of the non-peak half
  bin_t q_lo, q_hi, bg_sel;
  logic [BIN_W-1:0] peak_bin_c;
  always_comb begin
    peak_bin_c = {tree_idx, grp_idx[tree_idx]};
    if (peak_bin_c[BIN_W-1]) begin          // peak in bins 64..127
      q_lo = (grp_max[1] > grp_max[0]) ? grp_max[1] : grp_max[0];
      q_hi = (grp_max[3] > grp_max[2]) ? grp_max[3] : grp_max[2];
    end else begin                          // peak in bins 0..63
      q_lo = (grp_max[5] > grp_max[4]) ? grp_max[5] : grp_max[4];
      q_hi = (grp_max[7] > grp_max[6]) ? grp_max[7] : grp_max[6];
    end
    bg_sel = (q_hi < q_lo) ? q_hi : q_lo;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_max  <= '0;
      grp_idx  <= '0;
      half_max <= '0;
      half_idx <= '0;
      s1_peak  <= '0;
      s1_bin   <= '0;
      s1_bg    <= '0;
    end else begin
      if (cmd.s1_cmp && !cmd.s1_half) begin
        half_max <= tree_max;
        half_idx <= tree_idx;
      end
      if (cmd.s1_cmp && cmd.s1_half) begin
        if (tree_max > half_max) begin
          grp_max[cmd.s1_grp] <= tree_max;
          grp_idx[cmd.s1_grp] <= {1'b1, tree_idx};
        end else begin
          grp_max[cmd.s1_grp] <= half_max;
          grp_idx[cmd.s1_grp] <= {1'b0, half_idx};
        end
      end
      if (cmd.s1_all) begin
        s1_peak <= tree_max;
        s1_bin  <= peak_bin_c;
        s1_bg   <= bg_sel;
      end
    end
  end

  // ---------------- stage 2 ----------------
  bin_t              s2_peak;
  logic [BIN_W-1:0]  s2_bin;
  bin_t              s2_bg;
  logic [SQRT_W-1:0] sqrt_bg;
  logic              sqrt_done;
  logic [THR_W-1:0]  thr;

  isqrt_iter #(.IN_W(HIST_W), .OUT_W(SQRT_W)) u_sqrt (
    .clk(clk), .rst_n(rst_n),
    .load(cmd.s2_sample), .bg(s1_bg), .step(cmd.s2_sqrt),
    .root(sqrt_bg), .done(sqrt_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_peak   <= '0;
      s2_bin    <= '0;
      s2_bg     <= '0;
      thr       <= '0;
      dec_valid <= 1'b0;
      dec_pass  <= 1'b0;
    end else begin
      dec_valid <= 1'b0;
      if (cmd.s2_sample) begin
        s2_peak <= s1_peak;
        s2_bin  <= s1_bin;
        s2_bg   <= s1_bg;
      end
      if (cmd.s2_thr)
        thr <= THR_W'(s2_bg) + THR_W'(alpha) * THR_W'(sqrt_bg);
      if (cmd.s2_gen) begin
        dec_valid <= 1'b1;
        dec_pass  <= sqrt_done && (THR_W'(s2_peak) > thr);
      end
    end
  end

  assign dec_bin  = s2_bin;
  assign dec_peak = s2_peak;
  assign dec_thr  = thr;
  assign dec_bg   = s2_bg;
endmodule
