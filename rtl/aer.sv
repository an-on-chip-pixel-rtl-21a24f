// aer: address-event arbiter between the PE channels and the event FIFO.
//
// Each PE channel raises `req[c]` with its event word (the peak id is the
// address). When no acknowledge is outstanding and the FIFO is not full, the
// arbiter grants the next requesting channel in round-robin order after the
// last one served: in that clock it writes the channel's event into the FIFO
// (`wr_en`, the "en" of the block diagram) and raises `ack[c]`. `ack[c]`
// stays high until the channel drops `req[c]` (four-phase handshake). While
// the FIFO is full, requests wait. Round-robin order and the four-phase
// protocol are this design's choices.
module aer
  import lidar_pkg::*;
#(
  parameter int N_CH = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N_CH-1:0]        req,
  input  event_word_t [N_CH-1:0] evt,
  output logic [N_CH-1:0]        ack,
  input  logic                   fifo_full,
  output logic                   wr_en,
  output event_word_t            wr_data,
  output logic                   stall        // a request waits for FIFO space
);
  localparam int CW = (N_CH > 1) ? $clog2(N_CH) : 1;
  logic [CW-1:0] last;
  logic          pick_ok;
  logic [CW-1:0] pick;

  // next requesting channel after `last`
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int i = N_CH; i >= 1; i--) begin
      if (req[(int'(last) + i) % N_CH]) begin
        pick_ok = 1'b1;
        pick    = CW'((int'(last) + i) % N_CH);
      end
    end
  end

  logic grant;
  assign grant   = pick_ok && (ack == '0) && !fifo_full;
  assign wr_en   = grant;
  assign wr_data = evt[pick];
  assign stall   = pick_ok && (ack == '0) && fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack  <= '0;
      last <= CW'(N_CH - 1);
    end else begin
      for (int c = 0; c < N_CH; c++)
        if (ack[c] && !req[c]) ack[c] <= 1'b0;
      if (grant) begin
        ack[pick] <= 1'b1;
        last      <= pick;
      end
    end
  end

  a_ack_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ack));
  a_ack_has_req: assert property (@(posedge clk) disable iff (!rst_n)
    grant |-> req[pick]);
endmodule
