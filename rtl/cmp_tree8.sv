// cmp_tree8: combinational 8-to-1 comparator tree.
//
// Returns the largest of eight unsigned values and its position (0..7). The
// tree has three levels of two-input compare-select; on a tie the lower index
// wins, so the result is the first maximum. The PE core uses one tree both for
// the bins of a group and, after all groups are seen, for the eight group
// maxima, as the architecture describes ("8-to-1 comparator tree").
// Purely combinational; no clock.
module cmp_tree8 #(
  parameter int W = 10
) (
  input  logic [7:0][W-1:0] val,
  output logic [W-1:0]      max_val,
  output logic [2:0]        max_idx
);
  logic [3:0][W-1:0] l1_v;
  logic [3:0][2:0]   l1_i;
  logic [1:0][W-1:0] l2_v;
  logic [1:0][2:0]   l2_i;

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      if (val[2*k+1] > val[2*k]) begin
        l1_v[k] = val[2*k+1];
        l1_i[k] = 3'(2*k+1);
      end else begin
        l1_v[k] = val[2*k];
        l1_i[k] = 3'(2*k);
      end
    end
    for (int k = 0; k < 2; k++) begin
      if (l1_v[2*k+1] > l1_v[2*k]) begin
        l2_v[k] = l1_v[2*k+1];
        l2_i[k] = l1_i[2*k+1];
      end else begin
        l2_v[k] = l1_v[2*k];
        l2_i[k] = l1_i[2*k];
      end
    end
    if (l2_v[1] > l2_v[0]) begin
      max_val = l2_v[1];
      max_idx = l2_i[1];
    end else begin
      max_val = l2_v[0];
      max_idx = l2_i[0];
    end
  end
endmodule
