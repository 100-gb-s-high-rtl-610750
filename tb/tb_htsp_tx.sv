// tb_htsp_tx -- self-checking test of TX HTSP framing.
// Segments of 1..6 words on random VCs, with partial keep on the last word, random
// TUSER and TLAST, are fed while the output ready toggles at random and the local
// pause bits change. Every output frame is rebuilt byte by byte with the reference
// model of htsp_tb_pkg and compared word for word: header (MACs, EtherType, version,
// TID sequence, pause, VC, TUserFirst, op-code, user data, checksum), payload sent
// with full keep, and footer (valid bytes, TLAST/TUSER, latched pause, byte count).
// Also checked: a header-only frame after KEEPALIVE cycles of silence and none while
// data flows; an op-code is sent exactly once; with ready high, back-to-back
// segments of N words take N+2 cycles each.
module tb_htsp_tx;
  import htsp_pkg::*;
  import htsp_tb_pkg::*;
  localparam int KA = 32;
  localparam logic [15:0] ET = 16'hB588;
  logic clk = 0, rst = 1;
  logic s_valid, s_ready, m_valid, m_ready;
  seg_beat_t s_seg;
  beat_t m_beat;
  logic [47:0] loc_mac = 48'h0A0B0C0D0E0F, rem_mac = 48'h112233445566;
  logic [MAX_VC-1:0] local_pause;
  logic [127:0] user_data;
  logic op_valid, op_ready;
  logic [127:0] op_data;
  logic hdr_only_sent, frame_sent;
  int checks = 0, failures = 0;

  htsp_tx #(.KEEPALIVE_CYCLES(KA), .ETHER_TYPE(ET)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #5000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- expected segments ----------------
  typedef struct { int vc; beat_t w[$]; } seg_t;
  seg_t segq[$];

  // ---------------- monitor ----------------
  beat_t fr[$];
  logic [15:0] hp, fp;
  logic hop; logic [127:0] hopd;
  logic [7:0] tid_exp = 0;
  int n_hdr_only = 0, n_frames = 0, n_ops = 0, busy_ka = 0;
  bit in_pay = 0;
  int pay_left = 0;

  always @(posedge clk) if (!rst) begin
    if (op_ready) n_ops++;
    if (in_pay) fp |= local_pause;
    if (m_valid && m_ready) begin
      if (fr.size() == 0) begin
        hp = local_pause; fp = local_pause; hop = op_valid; hopd = op_data;
        in_pay = !m_beat.last;
        pay_left = (!m_beat.last && segq.size() > 0) ? segq[0].w.size() : 0;
      end else if (in_pay) begin
        pay_left--;
        if (pay_left == 0) in_pay = 0;
      end
      fr.push_back(m_beat);
      if (m_beat.last) begin
        check_frame();
        fr.delete();
      end
    end
  end

  task automatic check_frame();
    if (fr.size() == 1) begin
      n_hdr_only++;
      chk(fr[0].data == ref_header(rem_mac, loc_mac, ET, tid_exp, hp, 8'd0, 8'd0, hop,
                                   hop ? hopd : 128'd0, user_data) && fr[0].keep == '1,
          "header-only frame");
    end else begin
      seg_t s; int n; logic [15:0] size; logic [7:0] kb;
      n_frames++;
      if (segq.size() == 0) begin chk(0, "unexpected frame"); return; end
      s = segq.pop_front(); n = s.w.size();
      chk(fr.size() == n + 2, $sformatf("frame length %0d for %0d words", fr.size(), n));
      if (fr.size() != n + 2) return;
      chk(fr[0].data == ref_header(rem_mac, loc_mac, ET, tid_exp, hp, 8'(s.vc),
                                   s.w[0].user, hop, hop ? hopd : 128'd0, user_data),
          $sformatf("header of frame TID %0d", tid_exp));
      for (int i = 0; i < n; i++)
        chk(fr[1+i].data == s.w[i].data && fr[1+i].keep == '1 && !fr[1+i].last,
            $sformatf("payload word %0d", i));
      kb = 0; for (int i = 0; i < 64; i++) kb += 8'(s.w[n-1].keep[i]);
      size = 16'((n - 1) * 64) + 16'(kb);
      chk(fr[n+1].data == ref_footer(kb, s.w[n-1].user[7:1], s.w[n-1].last, fp, size) &&
          fr[n+1].keep == 64'h3F, "footer");
    end
    tid_exp++;
  endtask

  // ---------------- driver ----------------
  task automatic send_seg(input int vc, input int n, input bit rnd_gap);
    seg_t s; int kb;
    s.vc = vc;
    for (int i = 0; i < n; i++) begin
      beat_t b;
      b.data = {16{$urandom}}; b.user = 8'($urandom); b.keep = '1; b.last = 0;
      if (i == n - 1) begin
        b.last = 1'($urandom);
        kb = b.last ? 1 + $urandom % 64 : 64;
        b.keep = '0; for (int k = 0; k < kb; k++) b.keep[k] = 1'b1;
      end
      s.w.push_back(b);
    end
    segq.push_back(s);
    for (int i = 0; i < n; i++) begin
      s_seg.b = s.w[i]; s_seg.vc = VC_W'(vc); s_seg.seg_last = (i == n - 1);
      s_valid = 1;
      @(posedge clk); while (!s_ready) @(posedge clk);
      #1;
      if (rnd_gap && $urandom % 3 == 0) begin s_valid = 0; s_seg = '0; @(posedge clk); #1; end
    end
    s_valid = 0; s_seg = '0;
  endtask

  initial begin
    int t0, hdr0;
    s_valid = 0; s_seg = '0; m_ready = 1; local_pause = 16'h0005;
    user_data = {4{$urandom}}; op_valid = 0; op_data = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // keep-alive: the first header-only frame leaves after KA cycles of silence
    t0 = 0;
    while (!hdr_only_sent && t0 < 10 * KA) begin @(posedge clk); #1; t0++; end
    chk(t0 == KA - 1, $sformatf("first header-only frame after %0d cycles", t0));
    repeat (3 * KA) @(posedge clk);
    #1;
    chk(n_hdr_only >= 3 && n_hdr_only <= 4, $sformatf("%0d header-only frames in idle", n_hdr_only));
    // back-to-back segments with ready high: N+2 cycles each
    hdr0 = n_hdr_only;
    t0 = $time;
    for (int k = 0; k < 20; k++) send_seg(k % 16, 5, 0);
    while (segq.size() > 0) @(posedge clk);
    #1;
    chk(($time - t0) / 10 == 20 * 7 + 1, $sformatf("20 segments of 5 words in %0d cycles", ($time - t0) / 10));
    chk(n_hdr_only == hdr0, "no header-only frame while data flows");
    // random traffic, random ready, pause changes and an op-code
    fork
      begin
        for (int k = 0; k < 300; k++) send_seg($urandom % 16, 1 + $urandom % 6, 1);
      end
      begin
        for (int c = 0; c < 3000; c++) begin
          @(negedge clk);
          m_ready = ($urandom % 4) != 0;
          if ($urandom % 16 == 0) local_pause = 16'($urandom);
          if (c == 500) begin op_valid = 1; op_data = {4{$urandom}}; end
          if (n_ops > 0) op_valid = 0;
        end
        m_ready = 1;
      end
    join
    repeat (20) @(posedge clk);
    chk(segq.size() == 0, "all segments framed");
    chk(n_ops == 1, $sformatf("op-code sent %0d times", n_ops));
    chk(n_frames == 320, $sformatf("%0d data frames", n_frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
