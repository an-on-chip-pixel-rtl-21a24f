// event_fifo: synchronous FIFO buffering peak events for the host.
//
// WIDTH-bit words (26 = 20-bit event pack + 6-bit peak id), DEPTH entries
// (a power of two). Write with `wr_en` when not `full`; `rd_data` shows the
// oldest word whenever `empty` is low and `rd_en` removes it. A write to a full
// FIFO or a read from an empty one is ignored. The depth is this design's
// choice; the published design gives only the word width.
module event_fifo #(
  parameter int WIDTH = 26,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH):0] level
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic             do_wr, do_rd;

  assign empty = (wp == rp);
  assign full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign level = wp - rp;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $error("DEPTH must be a power of two");
endmodule
