// tb_htsp_vc_count -- the HTSP core built with fewer virtual channels.
//
// The number of VCs is a build-time parameter (1 to 16). This testbench builds the
// core twice, with NUM_VC = 1 and NUM_VC = 3, each looped back through
// caui_loopback_model (20-cycle latency), and all other parameters at their defaults.
// On every VC it sends frames of 1..400 words with a random partial last word and a
// random TUSER on the first and last words, so frames longer than the 128-word burst
// are split into segments and, with 3 VCs, interleaved. Every received word is
// compared with the word sent (data, keep, last, user), and every queued word must
// arrive. The 8 kB bandwidth check of the full-size testbench is repeated for each
// build: 16 back-to-back 128-word frames on VC 0 must take 16 x 131 - 1 cycles at the
// MAC.
module tb_htsp_vc_count;
  import htsp_pkg::*;
  import htsp_tb_pkg::*;
  localparam int BW = 128;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  int done_cnt = 0;

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    #1 rst = 0;
    wait (done_cnt == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NVS [2] = '{1, 3};

  for (genvar c = 0; c < 2; c++) begin : g_cfg
    localparam int NV = NVS[c];
    logic [NV-1:0] app_tx_valid, app_tx_ready, app_rx_valid, app_rx_ready;
    beat_t app_tx_beat [NV], app_rx_beat [NV];
    logic mac_tx_valid, mac_tx_ready, mac_rx_valid;
    beat_t mac_tx_beat, mac_rx_beat;
    logic [127:0] rx_user_data, rx_op_data, tx_op_data;
    logic tx_op_ready, rx_op_valid, link_up;
    logic [MAX_VC-1:0] local_pause, remote_pause;
    logic [NV-1:0] rx_overflow;
    logic rx_hdr_err, rx_frame_err, tx_hdr_only_sent, tx_frame_sent, rx_hdr_only_rcvd;
    logic [7:0] rx_tid;
    int lb_frames;

    assign tx_op_data = '0;

    htsp_core #(.NUM_VC(NV)) dut (
      .clk, .rst,
      .app_tx_valid, .app_tx_ready, .app_tx_beat,
      .app_rx_valid, .app_rx_ready, .app_rx_beat,
      .mac_tx_valid, .mac_tx_ready, .mac_tx_beat, .mac_rx_valid, .mac_rx_beat,
      .tx_burst_words(16'd0), .loc_mac(48'h02_00_00_00_00_0A), .rem_mac(48'h02_00_00_00_00_0A),
      .tx_user_data(128'(c + 1)), .rx_user_data,
      .tx_op_valid(1'b0), .tx_op_ready, .tx_op_data, .rx_op_valid, .rx_op_data,
      .link_up, .local_pause, .remote_pause, .rx_overflow, .rx_hdr_err, .rx_frame_err,
      .tx_hdr_only_sent, .tx_frame_sent, .rx_hdr_only_rcvd, .rx_tid
    );

    caui_loopback_model #(.LATENCY(20)) u_lb (
      .clk, .rst, .tx_valid(mac_tx_valid), .tx_ready(mac_tx_ready), .tx_beat(mac_tx_beat),
      .rx_valid(mac_rx_valid), .rx_beat(mac_rx_beat), .corrupt_next(1'b0), .cut(1'b0),
      .frames(lb_frames)
    );

    beat_t txq [NV][$];
    beat_t expq [NV][$];
    int frame_no [NV];
    int rx_words [NV];

    task automatic queue_frame(input int vc, input int n, input bit full_keep);
      int kb;
      kb = full_keep ? 64 : 1 + $urandom % 64;
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

    always @(posedge clk) if (!rst) begin
      for (int v = 0; v < NV; v++) if (app_rx_valid[v] && app_rx_ready[v]) begin
        rx_words[v]++;
        if (expq[v].size() == 0) chk(0, $sformatf("NUM_VC=%0d: unexpected word on VC %0d", NV, v));
        else begin
          chk(app_rx_beat[v] == expq[v][0],
              $sformatf("NUM_VC=%0d: VC %0d word %0d", NV, v, rx_words[v]));
          void'(expq[v].pop_front());
        end
      end
      if (rx_overflow != '0) chk(0, $sformatf("NUM_VC=%0d: RX FIFO overflow", NV));
      if (rx_hdr_err || rx_frame_err) chk(0, $sformatf("NUM_VC=%0d: receive error", NV));
    end

    function automatic bit busy();
      for (int v = 0; v < NV; v++) if (expq[v].size() > 0) return 1;
      return 0;
    endfunction

    initial begin
      int t0, f0, c0;
      app_rx_ready = '1;
      @(negedge rst);
      t0 = 0;
      while (!link_up && t0 < 2000) begin @(posedge clk); t0++; end
      chk(link_up, $sformatf("NUM_VC=%0d: link up", NV));
      chk(rx_user_data == 128'(c + 1), $sformatf("NUM_VC=%0d: user data", NV));
      // bandwidth: 16 x 8 kB on VC 0
      @(negedge clk);
      for (int k = 0; k < 16; k++) queue_frame(0, BW, 1);
      while (!(mac_tx_valid && mac_tx_ready)) @(posedge clk);
      c0 = 0; f0 = lb_frames;
      while (lb_frames < f0 + 16) begin @(posedge clk); c0++; end
      chk(c0 == 16 * (BW + 3) - 1, $sformatf("NUM_VC=%0d: 16 x 8 kB in %0d cycles, expected %0d",
                                             NV, c0, 16 * (BW + 3) - 1));
      t0 = 0;
      while (busy() && t0 < 5000) begin @(posedge clk); t0++; end
      // mixed traffic on every VC, receivers randomly stalled
      @(negedge clk);
      for (int r = 0; r < 12; r++)
        for (int v = 0; v < NV; v++) queue_frame(v, 1 + $urandom % 400, 0);
      t0 = 0;
      while (busy() && t0 < 100000) begin
        @(negedge clk); t0++;
        for (int v = 0; v < NV; v++) app_rx_ready[v] = ($urandom % 4) != 0;
      end
      app_rx_ready = '1;
      chk(!busy(), $sformatf("NUM_VC=%0d: all words received", NV));
      for (int v = 0; v < NV; v++)
        chk(frame_no[v] == (v == 0 ? 28 : 12), $sformatf("NUM_VC=%0d: frames queued on VC %0d", NV, v));
      $display("NUM_VC=%0d: %0d MAC frames, received words per VC:", NV, lb_frames);
      for (int v = 0; v < NV; v++) $display("  VC %0d: %0d", v, rx_words[v]);
      done_cnt++;
    end
  end
endmodule
