// tb_htsp_core -- end-to-end test of the HTSP core at its default size (16 VCs,
// 512-bit words, 8 kB bursts, 4096-word RX FIFOs), with the MAC side looped back
// through caui_loopback_model (20-cycle latency, one idle cycle between frames).
//
// Phases:
//   1. link-up by keep-alive header-only frames;
//   2. one-shot latency: single frames of 1, 64, 128 and 256 words on VC 0, first word
//      in to first word out, expected min(N,128) + 10 + 20 cycles;
//   3. bandwidth: 16 back-to-back 8 kB frames on one VC must use 131 link cycles each
//      (128 payload + header + footer + gap, i.e. 97.7 % of the line rate);
//   4. traffic on all 16 VCs, frames of 1..300 words with partial last words, while VC 3
//      is not read for a long time so that its RX FIFO pauses it; other VCs must keep
//      moving while it is paused; an op-code and user data cross the link;
//   5. one frame damaged on the line: it must end in the error bit;
//   6. link loss: with the fibre cut the link must drop after LINK_TIMEOUT cycles with
//      no good header, all remote pauses must read set and a queued frame must wait;
//      once the fibre is restored the link comes back and the frame is delivered.
// Every received word is compared with what was sent on its VC (data, keep, last,
// user). The mechanisms are counted and each must occur: header-only frames, frames
// split at the burst limit, interleaved segments, local pause, remote pause holding a
// VC with data, partial last words, op-code, FCS error, link loss. An RX FIFO overflow
// fails.
module tb_htsp_core;
  import htsp_pkg::*;
  import htsp_tb_pkg::*;
  localparam int NV = 16, LAT = 20, BW = 128;
  logic clk = 0, rst = 1;
  logic [NV-1:0] app_tx_valid, app_tx_ready, app_rx_valid, app_rx_ready;
  beat_t app_tx_beat [NV], app_rx_beat [NV];
  logic mac_tx_valid, mac_tx_ready, mac_rx_valid;
  beat_t mac_tx_beat, mac_rx_beat;
  logic [47:0] loc_mac = 48'h02_00_00_00_00_01, rem_mac = 48'h02_00_00_00_00_02;
  logic [127:0] tx_user_data, rx_user_data, tx_op_data, rx_op_data;
  logic tx_op_valid, tx_op_ready, rx_op_valid, link_up;
  logic [MAX_VC-1:0] local_pause, remote_pause;
  logic [NV-1:0] rx_overflow;
  logic rx_hdr_err, rx_frame_err, tx_hdr_only_sent, tx_frame_sent, rx_hdr_only_rcvd;
  logic [7:0] rx_tid;
  logic corrupt_next, cut;
  int n_link_down = 0;
  logic [15:0] tx_burst_words = '0;
  int lb_frames;
  int checks = 0, failures = 0;

  htsp_core dut (.*);

  caui_loopback_model #(.LATENCY(LAT)) u_lb (
    .clk, .rst, .tx_valid(mac_tx_valid), .tx_ready(mac_tx_ready), .tx_beat(mac_tx_beat),
    .rx_valid(mac_rx_valid), .rx_beat(mac_rx_beat), .corrupt_next, .cut, .frames(lb_frames)
  );

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #3000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- sources ----------------
  beat_t txq [NV][$];    // words still to be offered
  beat_t expq [NV][$];   // words expected on the RX side
  int frame_no [NV];
  int n_partial = 0;

  task automatic queue_frame(input int vc, input int n);
    int kb;
    kb = 1 + $urandom % 64;
    if (kb < 64) n_partial++;
    for (int i = 0; i < n; i++) begin
      beat_t b;
      b.data = pat_word(vc, frame_no[vc], i);
      b.keep = '1; b.last = (i == n - 1); b.user = '0;
      if (i == 0) b.user = 8'($urandom);
      if (i == n - 1) begin
        b.keep = '0; for (int k = 0; k < kb; k++) b.keep[k] = 1'b1;
        if (n > 1) b.user = {7'($urandom), 1'b0};
      end
      txq[vc].push_back(b);
      expq[vc].push_back(b);
    end
    frame_no[vc]++;
  endtask

  for (genvar g = 0; g < NV; g++) begin : g_src
    always @(negedge clk) begin
      if (rst) begin
        app_tx_valid[g] <= 1'b0; app_tx_beat[g] <= '0;
      end else if (txq[g].size() > 0) begin
        app_tx_valid[g] <= 1'b1; app_tx_beat[g] <= txq[g][0];
      end else begin
        app_tx_valid[g] <= 1'b0;
      end
    end
    always @(posedge clk) if (!rst && app_tx_valid[g] && app_tx_ready[g]) void'(txq[g].pop_front());
  end

  // ---------------- sinks and checker ----------------
  int rx_words [NV];
  int first_in_cyc = -1, first_out_cyc = -1;
  int n_eofe = 0;
  bit expect_eofe = 0;
  always @(posedge clk) if (!rst) begin
    for (int v = 0; v < NV; v++) if (app_rx_valid[v] && app_rx_ready[v]) begin
      rx_words[v]++;
      if (first_out_cyc < 0) first_out_cyc = cyc;
      if (expect_eofe && v == 5) begin
        // the damaged frame: its data is corrupt, only its end is checked
        if (app_rx_beat[v].last) begin
          chk(app_rx_beat[v].user[USER_EOFE] == 1'b1, "damaged frame ends with the error bit");
          n_eofe++;
          while (expq[v].size() > 0) void'(expq[v].pop_front());
        end else void'(expq[v].pop_front());
      end else if (expq[v].size() == 0) chk(0, $sformatf("unexpected word on VC %0d", v));
      else begin
        chk(app_rx_beat[v] == expq[v][0], $sformatf("VC %0d word %0d", v, rx_words[v]));
        void'(expq[v].pop_front());
      end
    end
    if (first_in_cyc < 0 && app_tx_valid[0] && app_tx_ready[0]) first_in_cyc = cyc;
    if (rx_overflow != '0) chk(0, "RX FIFO overflow");
  end

  // ---------------- mechanism counters (watching the MAC TX stream) ----------------
  int n_hdr_only = 0, n_split = 0, n_interleave = 0, n_lpause = 0, n_rpause_hold = 0;
  int n_op = 0, n_frame_err = 0, n_frames = 0;
  bit open_vc [NV];
  int mac_words = 0, cur_vc = 0;
  bit in_frame = 0;
  logic [MAX_VC-1:0] lp_q = '0;
  always @(posedge clk) if (!rst) begin
    if (tx_hdr_only_sent) n_hdr_only++;
    if (rx_op_valid) begin n_op++; chk(rx_op_data == tx_op_data, "op-code data"); end
    if (rx_frame_err) n_frame_err++;
    n_lpause += $countones(local_pause & ~lp_q);
    lp_q <= local_pause;
    for (int v = 0; v < NV; v++)
      if (remote_pause[v] && link_up && dut.fifo_valid[v]) begin n_rpause_hold++; break; end
    if (mac_tx_valid && mac_tx_ready) begin
      if (!in_frame && !mac_tx_beat.last) begin
        hdr_t h; h = unpack_hdr(mac_tx_beat.data);
        cur_vc = int'(h.vc);
        for (int v = 0; v < NV; v++) if (v != cur_vc && open_vc[v]) begin n_interleave++; break; end
      end
      if (in_frame && mac_tx_beat.last) begin
        n_frames++;
        open_vc[cur_vc] = !mac_tx_beat.data[8];
        if (!mac_tx_beat.data[8]) n_split++;
      end
      in_frame = !mac_tx_beat.last;
    end
  end

  task automatic wait_drain(input int max_cycles);
    int c; bit busy;
    c = 0;
    do begin
      @(posedge clk); c++;
      busy = 0;
      for (int v = 0; v < NV; v++) if (expq[v].size() > 0) busy = 1;
    end while (busy && c < max_cycles);
    chk(!busy, "all queued words received");
  endtask

  initial begin
    int t0, lat, exp_lat, f0;
    int sizes [4] = '{1, 64, 128, 256};
    app_rx_ready = '1; tx_user_data = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;
    tx_op_valid = 0; tx_op_data = '0; corrupt_next = 0; cut = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    // 1. link-up
    t0 = 0;
    while (!link_up && t0 < 2000) begin @(posedge clk); t0++; end
    chk(link_up, $sformatf("link up after %0d cycles", t0));
    repeat (5) @(posedge clk);
    chk(rx_user_data == tx_user_data, "user data crossed the link");
    chk(remote_pause == '0, "no remote pause at start");
    // 2. latency
    foreach (sizes[i]) begin
      @(negedge clk);
      first_in_cyc = -1; first_out_cyc = -1;
      queue_frame(0, sizes[i]);
      wait_drain(5000);
      lat = first_out_cyc - first_in_cyc;
      exp_lat = (sizes[i] < BW ? sizes[i] : BW) + 10 + LAT;
      chk(lat == exp_lat, $sformatf("latency of a %0d-byte frame: %0d cycles, expected %0d",
                                    sizes[i] * 64, lat, exp_lat));
      $display("latency %0d bytes: %0d cycles = %0d ns at 195.66 MHz", sizes[i] * 64, lat,
               lat * 1000 / 196);
    end
    // 3. bandwidth: 16 frames of 8 kB on VC 1
    @(negedge clk);
    for (int k = 0; k < 16; k++) queue_frame(1, BW);
    mac_words = 0;
    while (!(mac_tx_valid && mac_tx_ready)) @(posedge clk);
    t0 = cyc; f0 = lb_frames;
    while (lb_frames < f0 + 16) @(posedge clk);
    t0 = cyc - t0;
    chk(t0 == 16 * (BW + 3) - 1, $sformatf("16 x 8 kB frames in %0d link cycles, expected %0d",
                                           t0, 16 * (BW + 3) - 1));
    $display("bandwidth: %0d payload bytes in %0d cycles = %0d.%0d %% of line rate",
             16 * BW * 64, t0 + 1, 100 * 16 * BW / (t0 + 1), (1000 * 16 * BW / (t0 + 1)) % 10);
    wait_drain(10000);
    // 4. all VCs, VC 3 not read until it has been paused for a while
    app_rx_ready[3] = 0;
    for (int k = 0; k < 14; k++) queue_frame(3, 256);
    for (int r = 0; r < 4; r++)
      for (int v = 0; v < NV; v++) if (v != 3) queue_frame(v, 1 + $urandom % 300);
    fork
      begin
        t0 = 0;
        while (!local_pause[3] && t0 < 20000) begin @(posedge clk); t0++; end
        chk(local_pause[3], "VC 3 paused by its RX FIFO");
        f0 = rx_words[7];
        @(negedge clk);
        for (int k = 0; k < 4; k++) queue_frame(7, 100);
        repeat (2000) @(posedge clk);
        chk(rx_words[7] > f0, "VC 7 keeps moving while VC 3 is paused");
        chk(local_pause[3] && remote_pause[3], "VC 3 still paused on both ends");
        @(negedge clk); app_rx_ready[3] = 1;
      end
      begin
        repeat (300) @(posedge clk);
        @(negedge clk); tx_op_valid = 1; tx_op_data = {4{$urandom}};
        while (!tx_op_ready) @(posedge clk);
        @(negedge clk); tx_op_valid = 0;
      end
      begin
        for (int c = 0; c < 30000; c++) begin
          @(negedge clk);
          for (int v = 0; v < NV; v++) if (v != 3) app_rx_ready[v] = ($urandom % 8) != 0;
        end
      end
    join
    app_rx_ready = '1;
    wait_drain(30000);
    // 5. a frame damaged on the line
    @(negedge clk);
    corrupt_next = 1;
    expect_eofe = 1;
    queue_frame(5, 3);
    while (!(mac_tx_valid && mac_tx_ready && !mac_tx_beat.last)) @(posedge clk);
    @(negedge clk); corrupt_next = 0;
    wait_drain(2000);
    expect_eofe = 0;
    chk(n_eofe == 1, $sformatf("%0d damaged frames ended in error", n_eofe));
    repeat (50) @(posedge clk);
    // 6. link loss and recovery
    @(negedge clk); cut = 1;
    t0 = 0;
    while (link_up && t0 < 3000) begin @(posedge clk); t0++; end
    chk(!link_up, $sformatf("link down %0d cycles after the fibre was cut", t0));
    chk(t0 > 1024 - 256 && t0 <= 1024 + 50, "link time-out within its window");
    if (!link_up) n_link_down++;
    chk(remote_pause == '1, "all remote pauses set while the link is down");
    f0 = n_frames;
    @(negedge clk); queue_frame(2, 20);
    repeat (500) @(posedge clk);
    chk(n_frames == f0, "no data frame sent while the link is down");
    chk(link_up == 1'b0, "link stays down while cut");
    @(negedge clk); cut = 0;
    t0 = 0;
    while (!link_up && t0 < 2000) begin @(posedge clk); t0++; end
    chk(link_up, $sformatf("link back up %0d cycles after the fibre was restored", t0));
    wait_drain(2000);
    chk(n_frames == f0 + 1, "queued frame sent once the link is back");

    $display("mechanisms: header-only=%0d split=%0d interleave=%0d local-pause=%0d remote-pause-hold=%0d partial-keep=%0d op-code=%0d frame-error=%0d link-down=%0d frames=%0d",
             n_hdr_only, n_split, n_interleave, n_lpause, n_rpause_hold, n_partial, n_op,
             n_frame_err, n_link_down, n_frames);
    chk(n_hdr_only > 0, "header-only frames happened");
    chk(n_split > 0, "frames split at the burst limit");
    chk(n_interleave > 0, "segments interleaved");
    chk(n_lpause > 0, "local pause happened");
    chk(n_rpause_hold > 0, "remote pause held back a VC");
    chk(n_partial > 0, "partial last words");
    chk(n_op == 1, "op-code delivered once");
    chk(n_frame_err == 1, "FCS error detected");
    chk(n_link_down == 1, "link loss detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
