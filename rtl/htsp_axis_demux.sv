// htsp_axis_demux -- steers received payload words to the RX FIFO of their VC.
//
// RX HTSP tags every word with the VC index from the frame header (the role AXIS TDEST
// plays in the application streams). This block decodes that index into one valid
// strobe per VC and registers word and strobes once. There is no ready: the RX FIFOs
// accept every word, with the pause mechanism keeping them from filling.
//
// Latency: one cycle. The demultiplexer and its use of the VC index come from the
// published design; the single register stage is this design's choice.
module htsp_axis_demux
  import htsp_pkg::*;
#(
  parameter int unsigned NUM_VC = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              s_valid,
  input  beat_t             s_beat,
  input  logic [VC_W-1:0]   s_vc,
  output logic [NUM_VC-1:0] m_valid,
  output beat_t             m_beat
);
  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid <= '0;
      m_beat  <= '0;
    end else begin
      for (int v = 0; v < NUM_VC; v++)
        m_valid[v] <= s_valid && (32'(s_vc) == v);
      if (s_valid) m_beat <= s_beat;
    end
  end
endmodule
