// tb_htsp_axis_mux -- self-checking test of the interleaving AXIS MUX.
// Three VCs with a 256-byte burst limit (4 words). Each VC source sends frames of
// random length (1..11 words) with random gaps, the sink has random ready, and the
// remote pause bits change at random. Checked on every accepted word: it is the next
// word of its VC; a segment never changes VC and ends at TLAST or at 4 words; a
// segment only starts for a VC whose pause is low; the VC that starts is the
// round-robin next among those that are eligible. The run-time burst limit is
// changed every 2000 cycles (0 = maximum, 1..4, and 9, which is clamped to 4). Counted: interleaved segments and
// segments started while some VC was held back by its pause.
module tb_htsp_axis_mux;
  import htsp_pkg::*;
  localparam int NV = 3, BURST = 256, BW = BURST / 64;
  logic clk = 0, rst = 1;
  logic [NV-1:0] s_valid, s_ready;
  beat_t s_beat [NV];
  logic [MAX_VC-1:0] remote_pause;
  logic [15:0] burst_words;
  int lim_hist [5];
  int lims [6] = '{0, 1, 2, 3, 4, 9};
  logic m_valid, m_ready;
  seg_beat_t m_seg;
  int checks = 0, failures = 0;
  beat_t exp_q [NV][$];
  int sent [NV];
  bit in_seg = 0; int seg_vc = 0, seg_words = 0, last_vc = NV - 1;
  bit open_frame [NV];
  int interleaves = 0, pause_skips = 0, splits = 0, total = 0;

  htsp_axis_mux #(.NUM_VC(NV), .MAX_PAYLOAD_BYTES(BURST)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker, sampling the values before each edge
  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    int v;
    v = int'(m_seg.vc);
    if (!in_seg) begin
      // segment start: eligibility and round-robin order
      int e;
      e = -1;
      for (int k = 1; k <= NV; k++) begin
        int c; c = (last_vc + k) % NV;
        if (e < 0 && s_valid[c] && !remote_pause[c]) e = c;
      end
      chk(!remote_pause[v], "segment started on a paused VC");
      chk(v == e, $sformatf("round robin: got %0d expected %0d", v, e));
      for (int c = 0; c < NV; c++) if (c != v && open_frame[c]) begin interleaves++; break; end
      for (int c = 0; c < NV; c++) if (s_valid[c] && remote_pause[c]) begin pause_skips++; break; end
      seg_vc = v; seg_words = 0;
    end
    chk(v == seg_vc, "VC changed inside a segment");
    chk(v < NV && exp_q[v].size() > 0 && m_seg.b == exp_q[v][0], $sformatf("data of VC %0d", v));
    if (v < NV && exp_q[v].size() > 0) void'(exp_q[v].pop_front());
    seg_words++;
    begin
      int lim;
      lim = (burst_words == 0 || burst_words > BW) ? BW : int'(burst_words);
      chk(m_seg.seg_last == (m_seg.b.last || seg_words >= lim), "segment end");
      if (m_seg.seg_last && !m_seg.b.last) lim_hist[lim]++;
    end
    if (m_seg.seg_last && !m_seg.b.last) splits++;
    in_seg = !m_seg.seg_last;
    if (m_seg.seg_last) last_vc = v;
    open_frame[v] = !m_seg.b.last;
    total++;
  end

  // sources: hold a word until it is taken
  for (genvar g = 0; g < NV; g++) begin : g_src
    int frame = 0, word = 0, len = 1;
    always @(negedge clk) begin
      if (rst) begin
        s_valid[g] <= 0; s_beat[g] <= '0;
      end else if (!s_valid[g] || s_ready_q[g]) begin
        if ($urandom % 4 != 0) begin
          beat_t b;
          if (word == 0) len = 1 + $urandom % 11;
          b.data = pat_word(g, frame, word); b.keep = '1; b.user = 8'(word);
          b.last = (word == len - 1);
          s_valid[g] <= 1; s_beat[g] <= b;
          exp_q[g].push_back(b);
          if (b.last) begin word = 0; frame++; end else word++;
        end else s_valid[g] <= 0;
      end
    end
  end
  logic [NV-1:0] s_ready_q;
  always @(posedge clk) s_ready_q <= s_valid & s_ready;

  import htsp_tb_pkg::pat_word;

  initial begin
    m_ready = 0; remote_pause = '0; burst_words = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      m_ready = ($urandom % 5) != 0;
      if ($urandom % 64 == 0) remote_pause[$urandom % NV] ^= 1'b1;
      // run-time burst limit: 0 (maximum), 1, 2, 3, 4 or 9 (clamped to 4)
      if (c % 2000 == 1999) burst_words = lims[((c + 1) / 2000) % 6];
    end
    chk(total > 5000, $sformatf("%0d words moved", total));
    chk(interleaves > 0, $sformatf("%0d interleaved segments", interleaves));
    chk(pause_skips > 0, $sformatf("%0d segments started past a paused VC", pause_skips));
    chk(splits > 0, $sformatf("%0d frames cut at the burst limit", splits));
    for (int l = 1; l <= BW; l++) chk(lim_hist[l] > 0, $sformatf("segments cut at a limit of %0d words", l));
    $display("interleaves=%0d pause_skips=%0d splits=%0d words=%0d", interleaves, pause_skips, splits, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
