// tb_cmp_tree8: checks the 8-to-1 comparator tree against a linear scan
// (first maximum wins) on random vectors, including many ties.
module tb_cmp_tree8;
  localparam int W = 10;
  logic [7:0][W-1:0] val;
  logic [W-1:0]      max_val;
  logic [2:0]        max_idx;
  int checks = 0, failures = 0;

  cmp_tree8 #(.W(W)) dut (.val(val), .max_val(max_val), .max_idx(max_idx));

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int ref_i;
      for (int k = 0; k < 8; k++)
        val[k] = (t % 2 != 0) ? W'($urandom_range(0, 3)) : W'($urandom);
      #1;
      ref_i = 0;
      for (int k = 1; k < 8; k++) if (val[k] > val[ref_i]) ref_i = k;
      checks++;
      if (max_val !== val[ref_i] || max_idx !== 3'(ref_i)) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d got %0d@%0d exp %0d@%0d", t, max_val, max_idx, val[ref_i], ref_i);
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
