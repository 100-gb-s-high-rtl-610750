// htsp_tx_fifo -- per-VC outbound AXI4-Stream FIFO, the first stage of the TX path.
//
// Each virtual channel's application stream is buffered here before the AXIS MUX
// picks it up. The FIFO is first-word-fall-through: m_valid is high and m_beat shows
// the oldest word whenever the FIFO is not empty. Write and read both use a
// valid/ready handshake; a beat moves on a clock edge where valid and ready are high.
// Storage is htsp_fwft_fifo (synchronous-read RAM plus output register): a word
// written into an empty FIFO is at the output two cycles after its write edge, and one
// word per cycle can flow through.
//
// The per-VC TX FIFO is in the published block diagram; its depth is not given. The
// 32-word default is this design's choice: the published resource figures keep the
// block RAM count the same from 1 to 16 VCs, which points to a shallow TX FIFO per VC
// (distributed RAM) rather than a deep one. Any depth of 2 or more keeps one word per
// cycle flowing.
module htsp_tx_fifo
  import htsp_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  s_valid,
  output logic  s_ready,
  input  beat_t s_beat,
  output logic  m_valid,
  input  logic  m_ready,
  output beat_t m_beat
);
  logic full;
  logic [$clog2(DEPTH+1)-1:0] count;

  assign s_ready = !full;

  htsp_fwft_fifo #(.DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .push(s_valid && s_ready), .in_data(s_beat), .full,
    .pop(m_valid && m_ready), .out_valid(m_valid), .out_data(m_beat), .count
  );
endmodule
