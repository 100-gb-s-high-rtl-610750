// htsp_rx -- RX HTSP: checks HTSP frames from the Ethernet MAC and restores the segments.
//
// The first word of each frame is the header. It is accepted when its version is 0x01,
// its EtherType matches, its 16-bit checksum is good and its VC index is below NUM_VC.
// A good header updates the remote pause bits (the far end's RX FIFO state), the
// received user data, and, with OpCodeEn set, presents the op-code for one cycle. A
// bad header drops the whole frame. A header-only frame ends there.
//
// In a data frame, the words after the header are payload until the word with TLAST,
// which is the footer. Since the last payload word is only known when the footer
// arrives, one payload word is held back: each new payload word releases the previous
// one, and the footer releases the held word with its true keep (from the byte count
// in the footer), the segment's TLAST and its upper TUSER bits. The first payload word
// of a segment gets the header's TUserFirst byte as TUSER. The frame is in error when
// the MAC flags an FCS error (TUSER bit 0 of its last word), when the footer's payload
// size does not match the bytes received, or when there is no payload; the held word
// then leaves with TLAST and TUSER bit 1 (end-of-frame error) set, so the application
// does not wait for the rest of a broken frame.
//
// The link is up once a good header arrived and goes down after LINK_TIMEOUT cycles
// without one; while it is down every remote pause bit reads as set, so nothing is
// sent to a far end that is not known to be there.
//
// Interface: the MAC side has valid only (a MAC RX cannot be stalled), and so has the
// output (m_valid, m_beat, m_vc). Outputs are registered; a payload word leaves two
// cycles after the next word of its frame arrives.
//
// Field layout and the checks on version, checksum, payload size and FCS flag follow
// the published protocol; the error marking, link timeout and pause-when-down rule are
// this design's choices.
module htsp_rx
  import htsp_pkg::*;
#(
  parameter int unsigned NUM_VC       = 16,
  parameter int unsigned LINK_TIMEOUT = 1024,
  parameter logic [15:0] ETHER_TYPE   = 16'hB588
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              s_valid,
  input  beat_t             s_beat,
  output logic              m_valid,
  output beat_t             m_beat,
  output logic [VC_W-1:0]   m_vc,
  output logic [MAX_VC-1:0] remote_pause,
  output logic              link_up,
  output logic [127:0]      user_data,
  output logic              op_valid,
  output logic [127:0]      op_data,
  output logic [7:0]        rem_tid,
  output logic              hdr_err,    // pulse: bad header, frame dropped
  output logic              frame_err,  // pulse: FCS or size error in a data frame
  output logic              hdr_only_rcvd
);
  localparam int unsigned LW = $clog2(LINK_TIMEOUT + 1);

  typedef enum logic [1:0] {S_HDR, S_PAY, S_DROP} state_t;
  state_t state;

  logic [MAX_VC-1:0] pause_q;
  logic [LW-1:0]     link_cnt;
  logic [VC_W-1:0]   vc;
  logic [7:0]        tuser_first;
  logic              first;        // held word is the segment's first
  logic              held_v;
  logic [DATA_W-1:0] held;
  logic [15:0]       words;        // payload words received
  hdr_t              h;
  ftr_t              f;
  logic              h_good, fcs_bad, size_bad, ferr;
  logic [15:0]       exp_size;

  assign h        = unpack_hdr(s_beat.data);
  assign f        = unpack_ftr(s_beat.data);
  assign h_good   = hdr_ok(s_beat.data, ETHER_TYPE) && (32'(h.vc) < NUM_VC);
  assign fcs_bad  = s_beat.last && s_beat.user[USER_FCS_ERR];
  assign exp_size = 16'((32'(words) - 1) * BYTES + 32'(f.keep_bytes));
  assign size_bad = !held_v || (f.keep_bytes == 0) || (f.keep_bytes > 8'(BYTES)) ||
                    (f.size != exp_size);
  assign ferr     = fcs_bad || size_bad;

  assign remote_pause = link_up ? pause_q : '1;

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= S_HDR;
      pause_q       <= '0;
      link_up       <= 1'b0;
      link_cnt      <= '0;
      vc            <= '0;
      tuser_first   <= '0;
      first         <= 1'b0;
      held_v        <= 1'b0;
      held          <= '0;
      words         <= '0;
      user_data     <= '0;
      op_valid      <= 1'b0;
      op_data       <= '0;
      rem_tid       <= '0;
      m_valid       <= 1'b0;
      m_beat        <= '0;
      m_vc          <= '0;
      hdr_err       <= 1'b0;
      frame_err     <= 1'b0;
      hdr_only_rcvd <= 1'b0;
    end else begin
      m_valid       <= 1'b0;
      op_valid      <= 1'b0;
      hdr_err       <= 1'b0;
      frame_err     <= 1'b0;
      hdr_only_rcvd <= 1'b0;

      if (link_cnt >= LW'(LINK_TIMEOUT)) link_up <= 1'b0;
      else                               link_cnt <= link_cnt + 1'b1;

      if (s_valid) begin
        unique case (state)
          S_HDR: begin
            if (h_good && !fcs_bad) begin
              link_up     <= 1'b1;
              link_cnt    <= '0;
              pause_q     <= h.pause;
              user_data   <= h.user_data;
              op_valid    <= h.op_en;
              op_data     <= h.op_data;
              rem_tid     <= h.tid;
              vc          <= VC_W'(h.vc);
              tuser_first <= h.tuser_first;
              first       <= 1'b1;
              held_v      <= 1'b0;
              words       <= '0;
              if (s_beat.last) hdr_only_rcvd <= 1'b1;
              else             state <= S_PAY;
            end else begin
              hdr_err <= 1'b1;
              if (!s_beat.last) state <= S_DROP;
            end
          end
          S_PAY: begin
            if (!s_beat.last) begin
              // a new payload word releases the held one
              if (held_v) begin
                m_valid     <= 1'b1;
                m_vc        <= vc;
                m_beat.data <= held;
                m_beat.keep <= '1;
                m_beat.last <= 1'b0;
                m_beat.user <= first ? tuser_first : '0;
                first       <= 1'b0;
              end
              held   <= s_beat.data;
              held_v <= 1'b1;
              words  <= words + 1'b1;
            end else begin
              // footer: release the held word as the segment's last
              if (held_v) begin
                m_valid     <= 1'b1;
                m_vc        <= vc;
                m_beat.data <= held;
                m_beat.keep <= ferr ? '1 : keep_from_count(f.keep_bytes);
                m_beat.last <= ferr || f.tlast;
                m_beat.user <= {f.tuser_last, first ? tuser_first[0] : 1'b0} |
                               (ferr ? USER_W'(1 << USER_EOFE) : '0);
              end
              if (ferr) frame_err <= 1'b1;
              else      pause_q   <= f.pause;
              held_v <= 1'b0;
              state  <= S_HDR;
            end
          end
          S_DROP: if (s_beat.last) state <= S_HDR;
          default: state <= S_HDR;
        endcase
      end
    end
  end

  a_vc_range: assert property (@(posedge clk) disable iff (rst)
    m_valid |-> (32'(m_vc) < NUM_VC));
endmodule
