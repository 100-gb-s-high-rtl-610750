// caui_loopback_model -- behavioural stand-in for the 100G Ethernet MAC/PCS, RS-FEC,
// transceivers and a loopback fiber, for simulation only.
//
// It takes frames from the core's MAC TX stream and returns them on the MAC RX stream
// LATENCY cycles later. After each frame's last word tx_ready is low for one cycle,
// standing for the inter-packet gap, so a frame of W words occupies W+1 cycles. When
// corrupt_next is high as a frame starts, that frame gets one data bit flipped and
// the FCS error flag (TUSER bit 0 on its last word), as a real MAC would report a
// frame damaged on the line. No FCS is computed; the flag is set directly. While cut is
// high every word is accepted and lost, as on a broken fibre; cut should only change
// between frames.
module caui_loopback_model
  import htsp_pkg::*;
#(
  parameter int unsigned LATENCY = 20
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  tx_valid,
  output logic  tx_ready,
  input  beat_t tx_beat,
  output logic  rx_valid,
  output beat_t rx_beat,
  input  logic  corrupt_next,
  input  logic  cut,
  output int    frames
);
  logic  gap, sof, bad;
  logic  dv [LATENCY];
  beat_t db [LATENCY];

  assign tx_ready = !gap;
  assign rx_valid = dv[LATENCY-1];
  assign rx_beat  = db[LATENCY-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      gap    <= 1'b0;
      sof    <= 1'b1;
      bad    <= 1'b0;
      frames <= 0;
      for (int i = 0; i < LATENCY; i++) begin dv[i] <= 1'b0; db[i] <= '0; end
    end else begin
      beat_t b;
      logic  corrupt;
      b       = tx_beat;
      corrupt = sof ? corrupt_next : bad;
      if (corrupt) begin
        if (!sof) b.data[7] = ~b.data[7];
        if (b.last) b.user[USER_FCS_ERR] = 1'b1;
      end
      dv[0] <= tx_valid && tx_ready && !cut;
      db[0] <= b;
      for (int i = 1; i < LATENCY; i++) begin dv[i] <= dv[i-1]; db[i] <= db[i-1]; end
      gap <= tx_valid && tx_ready && tx_beat.last;
      if (tx_valid && tx_ready) begin
        sof <= tx_beat.last;
        bad <= corrupt && !tx_beat.last;
        if (tx_beat.last) frames <= frames + 1;
      end
    end
  end
endmodule
