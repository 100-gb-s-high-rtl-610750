// htsp_tx -- TX HTSP: turns each segment from the AXIS MUX into one HTSP frame.
//
// An HTSP frame is either a single header word (header-only frame) or a header word,
// the segment's payload words and a footer word. The header (one 64-byte word) holds
// the destination/source MAC and EtherType, so that the frame is a raw Ethernet frame,
// then version 0x01, an 8-bit transaction ID (TID, +1 per frame), the 16 local pause
// bits, the VC index, the first TUSER byte of the segment, an op-code valid flag with
// 128 bits of op-code data, 128 bits of user data, and a 16-bit header checksum. The
// footer (6 bytes) holds the number of valid bytes in the last payload word, the
// segment's TLAST and upper 7 TUSER bits, the pause bits latched over the frame and
// the payload byte count. The MAC adds and checks the FCS, so HTSP has no CRC.
//
// The MAC needs every word but the last of a frame to be full, so payload words go out
// with all 64 keep bits set; the true keep of the last word travels in the footer.
//
// Header-only frames are sent by a keep-alive timer: when no frame has been sent for
// KEEPALIVE_CYCLES cycles. They bring the link up and carry pause changes when there
// is no data. Data always has priority over the timer.
//
// Timing: header, payload and footer go out on consecutive cycles when m_ready stays
// high, so a segment of N words takes N+2 cycles. s_ready follows m_ready
// combinationally during the payload. op_ready pulses in the cycle a header that
// carries op_data is accepted.
//
// Frame formats follow the published header and footer tables; byte order, checksum
// algorithm, EtherType value, the encoding of TKeepLast as a byte count, and the
// keep-alive period are this design's choices.
module htsp_tx
  import htsp_pkg::*;
#(
  parameter int unsigned KEEPALIVE_CYCLES = 256,
  parameter logic [15:0] ETHER_TYPE       = 16'hB588  // bytes 0x88,0xB5 on the wire
) (
  input  logic              clk,
  input  logic              rst,
  // segments from the AXIS MUX
  input  logic              s_valid,
  output logic              s_ready,
  input  seg_beat_t         s_seg,
  // frames towards the store-and-forward FIFO and the MAC
  output logic              m_valid,
  input  logic              m_ready,
  output beat_t             m_beat,
  // link metadata
  input  logic [47:0]       loc_mac,
  input  logic [47:0]       rem_mac,
  input  logic [MAX_VC-1:0] local_pause,
  input  logic [127:0]      user_data,
  input  logic              op_valid,
  output logic              op_ready,
  input  logic [127:0]      op_data,
  // status
  output logic              hdr_only_sent,   // pulse: a header-only frame left
  output logic              frame_sent       // pulse: a full frame (footer) left
);
  localparam int unsigned TW = $clog2(KEEPALIVE_CYCLES + 1);

  typedef enum logic [1:0] {S_HDR, S_PAY, S_FTR} state_t;
  state_t state;

  logic [7:0]        tid;
  logic [TW-1:0]     timer;
  logic              ka_due;
  logic [MAX_VC-1:0] pause_lat;
  logic [15:0]       size;
  logic [7:0]        keep_bytes;
  logic [6:0]        tuser_last;
  logic              tlast;
  hdr_t              hdr;
  ftr_t              ftr;
  logic              acc;

  assign ka_due = (timer >= TW'(KEEPALIVE_CYCLES - 1));
  assign acc    = m_valid && m_ready;

  always_comb begin
    hdr             = '0;
    hdr.dmac        = rem_mac;
    hdr.smac        = loc_mac;
    hdr.etype       = ETHER_TYPE;
    hdr.tid         = tid;
    hdr.pause       = local_pause;
    hdr.vc          = 8'(s_seg.vc);
    hdr.tuser_first = s_valid ? s_seg.b.user : '0;
    hdr.op_en       = op_valid;
    hdr.op_data     = op_valid ? op_data : '0;
    hdr.user_data   = user_data;

    ftr.keep_bytes  = keep_bytes;
    ftr.tuser_last  = tuser_last;
    ftr.tlast       = tlast;
    ftr.pause       = pause_lat;
    ftr.size        = size;
  end

  always_comb begin
    m_valid = 1'b0;
    s_ready = 1'b0;
    m_beat  = '0;
    unique case (state)
      S_HDR: begin
        m_valid     = s_valid || ka_due;
        m_beat.data = pack_hdr(hdr);
        m_beat.keep = '1;
        m_beat.last = !s_valid;           // header-only frame
      end
      S_PAY: begin
        m_valid     = s_valid;
        s_ready     = m_ready;
        m_beat.data = s_seg.b.data;
        m_beat.keep = '1;
      end
      S_FTR: begin
        m_valid     = 1'b1;
        m_beat.data = pack_ftr(ftr);
        m_beat.keep = BYTES'(6'h3F);
        m_beat.last = 1'b1;
      end
      default: ;
    endcase
  end

  assign op_ready      = (state == S_HDR) && acc && op_valid;
  assign hdr_only_sent = (state == S_HDR) && acc && m_beat.last;
  assign frame_sent    = (state == S_FTR) && acc;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_HDR;
      tid        <= '0;
      timer      <= '0;
      pause_lat  <= '0;
      size       <= '0;
      keep_bytes <= '0;
      tuser_last <= '0;
      tlast      <= 1'b0;
    end else begin
      if (!ka_due) timer <= timer + 1'b1;
      unique case (state)
        S_HDR: if (acc) begin
          tid       <= tid + 1'b1;
          pause_lat <= local_pause;
          size      <= '0;
          if (m_beat.last) timer <= '0;
          else             state <= S_PAY;
        end
        S_PAY: begin
          pause_lat <= pause_lat | local_pause;
          if (acc) begin
            size <= size + (s_seg.seg_last ? 16'(keep_count(s_seg.b.keep)) : 16'(BYTES));
            if (s_seg.seg_last) begin
              keep_bytes <= keep_count(s_seg.b.keep);
              tuser_last <= s_seg.b.user[7:1];
              tlast      <= s_seg.b.last;
              state      <= S_FTR;
            end
          end
        end
        S_FTR: if (acc) begin
          state <= S_HDR;
          timer <= '0;
        end
        default: state <= S_HDR;
      endcase
    end
  end

  // The MUX never ends a segment with an empty last word.
  a_keep_nonzero: assert property (@(posedge clk) disable iff (rst)
    (state == S_PAY && acc && s_seg.seg_last) |-> (s_seg.b.keep != '0));
endmodule
