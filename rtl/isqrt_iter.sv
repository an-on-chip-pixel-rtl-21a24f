// isqrt_iter: bit-serial integer square root of the background count.
//
// Implements the published iterative algorithm: with n the partial root and
// b = 2^v the trial bit (b = 32, 16, ..., 1), each step forms
// temp = ((n << 1) + b) << v, which equals (n+b)^2 - n^2, and if the remainder
// is at least temp it adds b to n and subtracts temp from the remainder. After
// OUT_W steps n = floor(sqrt(bg)), so the error is always below one count.
//
// Interface: `load` copies `bg` into the remainder and clears n, each `step`
// runs one iteration (most significant bit first); `root` holds n and `done`
// rises after the last step. The controller issues one step per half laser
// cycle; the unit itself needs only one clock per step.
module isqrt_iter #(
  parameter int IN_W  = 10,
  parameter int OUT_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [IN_W-1:0]  bg,
  input  logic             step,
  output logic [OUT_W-1:0] root,
  output logic             done
);
  localparam int REM_W = 2 * OUT_W + 2;
  localparam int CNT_W = $clog2(OUT_W + 1);

  logic [REM_W-1:0] rem;
  logic [OUT_W-1:0] n;
  logic [CNT_W-1:0] v_bit;    // exponent of the trial bit b
  logic             active;
  logic [OUT_W-1:0] b;
  logic [REM_W-1:0] temp;

  always_comb begin
    b    = OUT_W'(1) << v_bit;
    temp = ((REM_W'(n) << 1) + REM_W'(b)) << v_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem    <= '0;
      n      <= '0;
      v_bit  <= '0;
      active <= 1'b0;
      done   <= 1'b0;
    end else if (load) begin
      rem    <= REM_W'(bg);
      n      <= '0;
      v_bit  <= CNT_W'(OUT_W - 1);
      active <= 1'b1;
      done   <= 1'b0;
    end else if (step && active) begin
      if (rem >= temp) begin
        n   <= n + b;
        rem <= rem - temp;
      end
      if (v_bit == 0) begin
        active <= 1'b0;
        done   <= 1'b1;
      end else begin
        v_bit <= v_bit - 1'b1;
      end
    end
  end

  assign root = n;
endmodule
