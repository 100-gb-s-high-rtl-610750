// htsp_axis_mux -- merges the per-VC outbound streams into one segmented stream.
//
// Frames from the NUM_VC TX FIFOs are sent interleaved: a VC holds the output for at
// most one burst, then the arbiter moves on. The burst limit is set at run time by
// burst_words (in 64-byte words); 0, or any value above MAX_PAYLOAD_BYTES / 64, means
// the compile-time maximum MAX_PAYLOAD_BYTES, which also sizes the downstream FIFOs. The piece of a frame
// sent in one turn is a segment; its last beat has seg_last set, and b.last keeps the
// application's TLAST so the far end can rebuild the frame. Each segment becomes one
// HTSP frame in TX HTSP.
//
// Arbitration is round-robin, starting after the VC served last. A VC takes part only
// while its remote pause bit is low; the pause is sampled when a segment starts, and a
// started segment always runs to its end. Idle cycles are not needed between segments:
// when no segment is active, the next winner is chosen combinationally and its first
// beat is offered in the same cycle.
//
// Interface: valid/ready per input, valid/ready on the output (seg_beat_t with the VC
// in `vc`, which plays the role of AXIS TDEST).
//
// Interleaving with a burst limit and per-VC pause come from the published design; the
// round-robin order and the encoding of the limit are this design's choices.
module htsp_axis_mux
  import htsp_pkg::*;
#(
  parameter int unsigned NUM_VC            = 16,
  parameter int unsigned MAX_PAYLOAD_BYTES = 8192
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [NUM_VC-1:0] s_valid,
  output logic [NUM_VC-1:0] s_ready,
  input  beat_t             s_beat [NUM_VC],
  input  logic [MAX_VC-1:0] remote_pause,
  input  logic [15:0]       burst_words,
  output logic              m_valid,
  input  logic              m_ready,
  output seg_beat_t         m_seg
);
  localparam int unsigned BURST_WORDS = MAX_PAYLOAD_BYTES / BYTES;
  localparam int unsigned CW          = $clog2(BURST_WORDS + 1);
  localparam int unsigned SW          = (NUM_VC > 1) ? $clog2(NUM_VC) : 1;

  logic          active;          // a segment is in progress
  logic [SW-1:0] cur;             // VC of the segment in progress
  logic [SW-1:0] last_vc;         // VC served last (round-robin pointer)
  logic [CW-1:0] words;           // beats sent in the current segment
  logic [SW-1:0] pick, sel;
  logic          pick_ok;
  logic          seg_end;
  logic [CW-1:0] limit;           // burst limit in words, 1..BURST_WORDS

  // Round-robin choice among VCs with data and no remote pause.
  always_comb begin
    pick    = last_vc;
    pick_ok = 1'b0;
    for (int k = 1; k <= NUM_VC; k++) begin
      automatic int unsigned v = (int'(last_vc) + k) % NUM_VC;
      if (!pick_ok && s_valid[v] && !remote_pause[v]) begin
        pick    = SW'(v);
        pick_ok = 1'b1;
      end
    end
  end

  assign sel     = active ? cur : pick;
  assign m_valid = active ? s_valid[cur] : pick_ok;
  assign limit   = (burst_words == '0 || 32'(burst_words) > BURST_WORDS) ?
                   CW'(BURST_WORDS) : CW'(burst_words);
  assign seg_end = m_seg.b.last || (words >= limit - 1'b1);

  always_comb begin
    m_seg.b        = s_beat[sel];
    m_seg.vc       = VC_W'(sel);
    m_seg.seg_last = seg_end;
    s_ready        = '0;
    s_ready[sel]   = m_ready && m_valid;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active  <= 1'b0;
      cur     <= '0;
      last_vc <= SW'(NUM_VC - 1);
      words   <= '0;
    end else if (m_valid && m_ready) begin
      if (seg_end) begin
        active  <= 1'b0;
        last_vc <= sel;
        words   <= '0;
      end else begin
        active  <= 1'b1;
        cur     <= sel;
        words   <= words + 1'b1;
      end
    end
  end

  a_seg_len: assert property (@(posedge clk) disable iff (rst)
    words < CW'(BURST_WORDS));
endmodule
