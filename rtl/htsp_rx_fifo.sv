// htsp_rx_fifo -- per-VC inbound FIFO that raises the VC's local pause.
//
// The received payload of one virtual channel is written here and read by the
// application. The write side has no ready: the Ethernet MAC cannot be stalled, so
// flow control is done with "pause": whenever the fill level is at or above
// PAUSE_THRESH, `pause` is high, TX HTSP publishes it in its next header, and the far
// end's AXIS MUX stops starting new segments for this VC. The words between the
// threshold and the full depth absorb what is still in flight. A beat that arrives
// when the FIFO is full is dropped and `overflow` pulses for one cycle; that only
// happens if the headroom was too small.
//
// Read side: first-word-fall-through, valid/ready, on htsp_fwft_fifo (a word reaches
// the output two cycles after its write edge). `pause` is registered and follows the
// fill level by one cycle.
//
// The threshold scheme follows the published description ("pause" threshold set to a
// fraction of the FIFO depth). The 4096-word depth (eight 4K x 72 UltraRAMs hold
// 4096 x 512 bits) and the half-depth threshold are this design's choices.
module htsp_rx_fifo
  import htsp_pkg::*;
#(
  parameter int unsigned DEPTH        = 4096,
  parameter int unsigned PAUSE_THRESH = DEPTH / 2
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  s_valid,
  input  beat_t s_beat,
  output logic  m_valid,
  input  logic  m_ready,
  output beat_t m_beat,
  output logic  pause,
  output logic  overflow
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic          full;
  logic [CW-1:0] count;

  htsp_fwft_fifo #(.DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .push(s_valid && !full), .in_data(s_beat), .full,
    .pop(m_valid && m_ready), .out_valid(m_valid), .out_data(m_beat), .count
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      pause    <= 1'b0;
      overflow <= 1'b0;
    end else begin
      pause    <= (count >= CW'(PAUSE_THRESH));
      overflow <= s_valid && full;
    end
  end

  initial assert (PAUSE_THRESH < DEPTH) else $error("PAUSE_THRESH must leave headroom");
endmodule
