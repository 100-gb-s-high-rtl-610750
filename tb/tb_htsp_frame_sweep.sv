// tb_htsp_frame_sweep -- bandwidth and frame rate against frame size, default core.
//
// For each frame size (64 B to 16 kB, and one 1 MB frame) frames are sent back to back
// on one VC through the looped-back core, and the link cycles they occupy on the MAC
// TX stream are counted. A frame of S bytes is cut into ceil(S / 8192) segments; each
// segment of N words costs N + 3 cycles (header, footer, one idle cycle of gap), so the
// expected count is the sum of those. The printed bandwidth and frame rate assume the
// 195.66 MHz, 512-bit MAC clock. Every received word is also compared with what was
// sent. A last run repeats the 8 kB frames with a run-time burst limit of 2 kB.
module tb_htsp_frame_sweep;
  import htsp_pkg::*;
  import htsp_tb_pkg::*;
  localparam int NV = 16, LAT = 20, BW = 128;
  logic clk = 0, rst = 1;
  logic [NV-1:0] app_tx_valid, app_tx_ready, app_rx_valid, app_rx_ready;
  beat_t app_tx_beat [NV], app_rx_beat [NV];
  logic mac_tx_valid, mac_tx_ready, mac_rx_valid;
  beat_t mac_tx_beat, mac_rx_beat;
  logic [47:0] loc_mac = 48'h1, rem_mac = 48'h2;
  logic [127:0] tx_user_data = '0, rx_user_data, tx_op_data = '0, rx_op_data;
  logic tx_op_valid = 0, tx_op_ready, rx_op_valid, link_up;
  logic [MAX_VC-1:0] local_pause, remote_pause;
  logic [NV-1:0] rx_overflow;
  logic rx_hdr_err, rx_frame_err, tx_hdr_only_sent, tx_frame_sent, rx_hdr_only_rcvd;
  logic [7:0] rx_tid;
  int lb_frames;
  logic [15:0] tx_burst_words = '0;
  int checks = 0, failures = 0;

  htsp_core dut (.*);
  caui_loopback_model #(.LATENCY(LAT)) u_lb (
    .clk, .rst, .tx_valid(mac_tx_valid), .tx_ready(mac_tx_ready), .tx_beat(mac_tx_beat),
    .rx_valid(mac_rx_valid), .rx_beat(mac_rx_beat), .corrupt_next(1'b0), .cut(1'b0), .frames(lb_frames)
  );

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #10000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one source on VC 2, generating words on the fly
  int tx_left = 0, tx_word = 0, tx_frame = 0, frame_words = 1;
  assign app_tx_valid = (tx_left > 0) ? NV'(1 << 2) : '0;
  always_comb begin
    for (int v = 0; v < NV; v++) app_tx_beat[v] = '0;
    app_tx_beat[2].data = pat_word(2, tx_frame, tx_word);
    app_tx_beat[2].keep = '1;
    app_tx_beat[2].last = (tx_word == frame_words - 1);
  end
  always @(posedge clk) if (!rst && app_tx_valid[2] && app_tx_ready[2]) begin
    tx_left--;
    if (tx_word == frame_words - 1) begin tx_word = 0; tx_frame++; end else tx_word++;
  end

  // checker on VC 2
  int rx_word = 0, rx_frame = 0, rx_total = 0;
  assign app_rx_ready = '1;
  always @(posedge clk) if (!rst && app_rx_valid[2]) begin
    chk(app_rx_beat[2].data == pat_word(2, rx_frame, rx_word) &&
        app_rx_beat[2].last == (rx_word == frame_words - 1), "received word");
    rx_total++;
    if (rx_word == frame_words - 1) begin rx_word = 0; rx_frame++; end else rx_word++;
  end

  // count MAC TX cycles from the first accepted word to the last
  // (header-only keep-alive frames, one word with TLAST, are not counted)
  int first_c = -1, last_c = 0, cyc = 0;
  bit mac_in_frame = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && mac_tx_valid && mac_tx_ready) mac_in_frame <= !mac_tx_beat.last;
    if (!rst && mac_tx_valid && mac_tx_ready && (mac_in_frame || !mac_tx_beat.last)) begin
      if (first_c < 0) first_c = cyc;
      last_c = cyc;
    end
  end

  task automatic run(input int bytes, input int nframes, input int burst = BW);
    int n, segs, exp_c, got, f0;
    n = bytes / 64;
    segs = (n + burst - 1) / burst;
    tx_burst_words = (burst == BW) ? 16'd0 : 16'(burst);
    exp_c = nframes * (n + 3 * segs) - 1;    // last gap not counted
    @(negedge clk);
    frame_words = n; tx_word = 0; tx_frame = 0; rx_word = 0; rx_frame = 0; rx_total = 0;
    first_c = -1;
    tx_left = n * nframes;
    while (rx_total < n * nframes) @(posedge clk);
    got = last_c - first_c + 1;
    chk(got == exp_c, $sformatf("%0d x %0d B: %0d link cycles, expected %0d", nframes, bytes, got, exp_c));
    $display("%8d B, burst %0d B: %5d cycles/frame, bandwidth %0d.%02d Gb/s, frame rate %0d Hz",
             bytes, burst * 64, (got + 1) / nframes,
             (64'(bytes) * 8 * nframes * 19566 / (got + 1)) / 100000,
             ((64'(bytes) * 8 * nframes * 19566 / (got + 1)) / 1000) % 100,
             64'(195660000) * nframes / (got + 1));
    repeat (300) @(posedge clk);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    #1 rst = 0;
    while (!link_up) @(posedge clk);
    run(64, 64);
    run(256, 64);
    run(512, 32);
    run(1024, 32);
    run(2048, 16);
    run(4096, 16);
    run(8192, 16);
    run(16384, 8);
    run(1048576, 1);
    run(8192, 16, 32);     // run-time burst limit of 2 kB: four segments per frame
    chk(rx_overflow == '0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
