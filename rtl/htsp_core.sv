// htsp_core -- HTSP firmware core: up to 16 interleaved AXI4-Stream virtual channels
// over one 100 Gb/s Ethernet MAC (CAUI-4 with RS-FEC, outside this module).
//
// TX path: app_tx[v] -> htsp_tx_fifo[v] -> htsp_axis_mux -> htsp_tx -> htsp_saf_fifo
//          -> mac_tx (the MAC adds the FCS).
// RX path: mac_rx (FCS checked by the MAC, error in TUSER bit 0) -> htsp_rx
//          -> htsp_axis_demux -> htsp_rx_fifo[v] -> app_rx[v].
// Pause paths: the RX FIFOs' pause bits ("local pauses") go into every TX header; the
// pause bits received from the far end ("remote pauses") tell the MUX which VCs it
// may not start a segment for. Back-pressure on one VC therefore leaves the others
// running.
//
// All of it runs in one clock domain, the MAC's AXIS clock (195.66 MHz for 100 Gb/s
// with a 512-bit bus). With the MAC adding one idle cycle between frames, a segment of
// N payload words costs N+3 cycles on the link (header, footer, gap).
//
// Ports: per-VC valid/ready streams of beat_t on the application side, one beat_t
// stream each way on the MAC side, the MAC addresses, a 128-bit user-data word that is
// sent with every header and the one last received, a 128-bit op-code channel each
// way, and status (link up, remote pause, error pulses, FIFO overflow).
//
// The block structure and the pause scheme follow the published design; the store-
// and-forward FIFO sits on the TX side, and all FIFO depths are this design's choices.
module htsp_core
  import htsp_pkg::*;
#(
  parameter int unsigned NUM_VC            = 16,
  parameter int unsigned MAX_PAYLOAD_BYTES = 8192,
  parameter int unsigned TX_FIFO_DEPTH     = 32,
  parameter int unsigned RX_FIFO_DEPTH     = 4096,
  parameter int unsigned RX_PAUSE_THRESH   = RX_FIFO_DEPTH / 2,
  parameter int unsigned SAF_DEPTH         = 512,
  parameter int unsigned KEEPALIVE_CYCLES  = 256,
  parameter int unsigned LINK_TIMEOUT      = 4 * KEEPALIVE_CYCLES,
  parameter logic [15:0] ETHER_TYPE        = 16'hB588
) (
  input  logic              clk,
  input  logic              rst,
  // application outbound streams
  input  logic [NUM_VC-1:0] app_tx_valid,
  output logic [NUM_VC-1:0] app_tx_ready,
  input  beat_t             app_tx_beat [NUM_VC],
  // application inbound streams
  output logic [NUM_VC-1:0] app_rx_valid,
  input  logic [NUM_VC-1:0] app_rx_ready,
  output beat_t             app_rx_beat [NUM_VC],
  // MAC (CAUI hard IP) transmit and receive streams
  output logic              mac_tx_valid,
  input  logic              mac_tx_ready,
  output beat_t             mac_tx_beat,
  input  logic              mac_rx_valid,
  input  beat_t             mac_rx_beat,
  // link configuration and side channels
  input  logic [15:0]       tx_burst_words,     // burst limit in words, 0 = maximum
  input  logic [47:0]       loc_mac,
  input  logic [47:0]       rem_mac,
  input  logic [127:0]      tx_user_data,
  output logic [127:0]      rx_user_data,
  input  logic              tx_op_valid,
  output logic              tx_op_ready,
  input  logic [127:0]      tx_op_data,
  output logic              rx_op_valid,
  output logic [127:0]      rx_op_data,
  // status
  output logic              link_up,
  output logic [MAX_VC-1:0] local_pause,
  output logic [MAX_VC-1:0] remote_pause,
  output logic [NUM_VC-1:0] rx_overflow,
  output logic              rx_hdr_err,
  output logic              rx_frame_err,
  output logic              tx_hdr_only_sent,   // pulse per header-only frame sent
  output logic              tx_frame_sent,      // pulse per data frame sent
  output logic              rx_hdr_only_rcvd,   // pulse per good header-only frame
  output logic [7:0]        rx_tid              // TID of the last good header
);
  // ---------------- TX path ----------------
  logic [NUM_VC-1:0] fifo_valid, fifo_ready;
  beat_t             fifo_beat [NUM_VC];
  logic              seg_valid, seg_ready;
  seg_beat_t         seg;
  logic              frm_valid, frm_ready;
  beat_t             frm_beat;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_tx_fifo
    htsp_tx_fifo #(.DEPTH(TX_FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .s_valid(app_tx_valid[v]), .s_ready(app_tx_ready[v]), .s_beat(app_tx_beat[v]),
      .m_valid(fifo_valid[v]),   .m_ready(fifo_ready[v]),   .m_beat(fifo_beat[v])
    );
  end

  htsp_axis_mux #(.NUM_VC(NUM_VC), .MAX_PAYLOAD_BYTES(MAX_PAYLOAD_BYTES)) u_mux (
    .clk, .rst,
    .s_valid(fifo_valid), .s_ready(fifo_ready), .s_beat(fifo_beat),
    .remote_pause, .burst_words(tx_burst_words),
    .m_valid(seg_valid), .m_ready(seg_ready), .m_seg(seg)
  );

  htsp_tx #(.KEEPALIVE_CYCLES(KEEPALIVE_CYCLES), .ETHER_TYPE(ETHER_TYPE)) u_tx (
    .clk, .rst,
    .s_valid(seg_valid), .s_ready(seg_ready), .s_seg(seg),
    .m_valid(frm_valid), .m_ready(frm_ready), .m_beat(frm_beat),
    .loc_mac, .rem_mac, .local_pause, .user_data(tx_user_data),
    .op_valid(tx_op_valid), .op_ready(tx_op_ready), .op_data(tx_op_data),
    .hdr_only_sent(tx_hdr_only_sent), .frame_sent(tx_frame_sent)
  );

  htsp_saf_fifo #(.DEPTH(SAF_DEPTH)) u_saf (
    .clk, .rst,
    .s_valid(frm_valid), .s_ready(frm_ready), .s_beat(frm_beat),
    .m_valid(mac_tx_valid), .m_ready(mac_tx_ready), .m_beat(mac_tx_beat)
  );

  // ---------------- RX path ----------------
  logic              pl_valid;
  beat_t             pl_beat;
  logic [VC_W-1:0]   pl_vc;
  logic [NUM_VC-1:0] dmx_valid;
  beat_t             dmx_beat;

  htsp_rx #(.NUM_VC(NUM_VC), .LINK_TIMEOUT(LINK_TIMEOUT), .ETHER_TYPE(ETHER_TYPE)) u_rx (
    .clk, .rst,
    .s_valid(mac_rx_valid), .s_beat(mac_rx_beat),
    .m_valid(pl_valid), .m_beat(pl_beat), .m_vc(pl_vc),
    .remote_pause, .link_up, .user_data(rx_user_data),
    .op_valid(rx_op_valid), .op_data(rx_op_data), .rem_tid(rx_tid),
    .hdr_err(rx_hdr_err), .frame_err(rx_frame_err), .hdr_only_rcvd(rx_hdr_only_rcvd)
  );

  htsp_axis_demux #(.NUM_VC(NUM_VC)) u_demux (
    .clk, .rst,
    .s_valid(pl_valid), .s_beat(pl_beat), .s_vc(pl_vc),
    .m_valid(dmx_valid), .m_beat(dmx_beat)
  );

  logic [NUM_VC-1:0] vc_pause;
  for (genvar v = 0; v < NUM_VC; v++) begin : g_rx_fifo
    htsp_rx_fifo #(.DEPTH(RX_FIFO_DEPTH), .PAUSE_THRESH(RX_PAUSE_THRESH)) u_fifo (
      .clk, .rst,
      .s_valid(dmx_valid[v]), .s_beat(dmx_beat),
      .m_valid(app_rx_valid[v]), .m_ready(app_rx_ready[v]), .m_beat(app_rx_beat[v]),
      .pause(vc_pause[v]), .overflow(rx_overflow[v])
    );
  end

  initial begin
    assert (NUM_VC >= 1 && NUM_VC <= MAX_VC) else $error("NUM_VC must be 1..16");
    assert (MAX_PAYLOAD_BYTES % BYTES == 0) else $error("burst must be whole words");
    assert (SAF_DEPTH >= MAX_PAYLOAD_BYTES / BYTES + 2)
      else $error("store-and-forward FIFO must hold a whole frame");
  end

  always_comb begin
    local_pause             = '0;
    local_pause[NUM_VC-1:0] = vc_pause;
  end
endmodule
