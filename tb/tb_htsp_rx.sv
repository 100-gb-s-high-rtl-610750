// tb_htsp_rx -- self-checking test of RX HTSP.
// Frames are built with the reference model (htsp_tb_pkg) and fed as a MAC would,
// with random idle cycles between words. Checked: link down and all remote pauses set
// after reset; a header-only frame brings the link up and sets remote pause and user
// data; data frames on random VCs come out word for word with the right VC, keep,
// TLAST and TUSER (TUserFirst on the first word, footer TUSER bits on the last); the
// footer pause updates the remote pause; an op-code is presented once; a bad checksum,
// a wrong version or an out-of-range VC drops the frame with hdr_err; an FCS error or
// a wrong payload size ends the segment with TLAST and the error bit and pulses
// frame_err; the link drops after LINK_TIMEOUT silent cycles.
module tb_htsp_rx;
  import htsp_pkg::*;
  import htsp_tb_pkg::*;
  localparam int NV = 4, LT = 200;
  localparam logic [15:0] ET = 16'hB588;
  logic clk = 0, rst = 1;
  logic s_valid, m_valid, link_up, op_valid, hdr_err, frame_err, hdr_only_rcvd;
  beat_t s_beat, m_beat;
  logic [VC_W-1:0] m_vc;
  logic [MAX_VC-1:0] remote_pause;
  logic [127:0] user_data, op_data;
  logic [7:0] rem_tid;
  int checks = 0, failures = 0;
  typedef struct { beat_t b; int vc; } out_t;
  out_t expq[$];
  int n_out = 0, n_hdr_err = 0, n_frame_err = 0, n_ops = 0, n_ho = 0;
  logic [127:0] last_op;
  logic [7:0] tid = 0;

  htsp_rx #(.NUM_VC(NV), .LINK_TIMEOUT(LT), .ETHER_TYPE(ET)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #5000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (hdr_err) n_hdr_err++;
    if (frame_err) n_frame_err++;
    if (hdr_only_rcvd) n_ho++;
    if (op_valid) begin n_ops++; last_op = op_data; end
    if (m_valid) begin
      n_out++;
      if (expq.size() == 0) chk(0, "unexpected output word");
      else begin
        out_t e; e = expq.pop_front();
        chk(m_beat == e.b && int'(m_vc) == e.vc,
            $sformatf("output word: vc %0d/%0d keep %h/%h last %b/%b user %h/%h", m_vc, e.vc,
                      m_beat.keep, e.b.keep, m_beat.last, e.b.last, m_beat.user, e.b.user));
      end
    end
  end

  task automatic put(input logic [511:0] d, input logic last, input logic fcs);
    while ($urandom % 4 == 0) begin s_valid = 0; @(posedge clk); #1; end
    s_valid = 1; s_beat = '0; s_beat.data = d; s_beat.keep = last ? 64'h3F : '1;
    s_beat.last = last; s_beat.user = {7'd0, fcs};
    @(posedge clk); #1; s_valid = 0; s_beat = '0;
  endtask

  // kind: 0 good, 1 bad checksum, 2 bad version, 3 VC out of range, 4 FCS error, 5 size error
  task automatic frame(input int vc, input int n, input logic [15:0] hpause,
                       input logic [15:0] fpause, input int kind, input bit op);
    logic [511:0] h, w[$];
    logic [7:0] tu, kb; logic [6:0] tuh; logic tl;
    logic [15:0] size;
    bit err;
    tu = 8'($urandom); tuh = 7'($urandom); tl = 1'($urandom);
    kb = tl ? 8'(1 + $urandom % 64) : 8'd64;
    h = ref_header(48'h1, 48'h2, ET, tid, hpause, 8'(kind == 3 ? NV : vc), tu, op,
                   op ? 128'hC0DE : '0, 128'(tid));
    tid++;
    if (kind == 1) h[100] = ~h[100];
    if (kind == 2) h[8*14 +: 8] = 8'h02;
    for (int i = 0; i < n; i++) w.push_back({16{$urandom}});
    size = 16'((n - 1) * 64) + 16'(kb);
    if (kind == 5) size = size + 16'd1;
    err = (kind == 4 || kind == 5);
    if (kind <= 3 && kind != 0) begin
      // dropped frame: nothing expected
    end else begin
      for (int i = 0; i < n; i++) begin
        out_t e;
        e.vc = vc; e.b.data = w[i]; e.b.keep = '1; e.b.last = 0; e.b.user = '0;
        if (i == 0) e.b.user = tu;
        if (i == n - 1) begin
          e.b.keep = err ? '1 : '0;
          if (!err) for (int k = 0; k < kb; k++) e.b.keep[k] = 1'b1;
          e.b.last = err || tl;
          e.b.user = {tuh, i == 0 ? tu[0] : 1'b0} | (err ? 8'h02 : 8'h00);
        end
        expq.push_back(e);
      end
    end
    put(h, 0, 0);
    for (int i = 0; i < n; i++) put(w[i], 0, 0);
    put(ref_footer(kb, tuh, tl, fpause, size), 1, kind == 4);
  endtask

  task automatic hdr_only(input logic [15:0] p);
    put(ref_header(48'h1, 48'h2, ET, tid, p, 8'd0, 8'd0, 0, '0, 128'hABCD_0000 + 128'(tid)), 1, 0);
    tid++;
  endtask

  initial begin
    int e0;
    s_valid = 0; s_beat = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    @(posedge clk); #1;
    chk(!link_up && remote_pause == '1, "link down, all paused after reset");
    hdr_only(16'h00A5);
    repeat (2) @(posedge clk); #1;
    chk(link_up && remote_pause == 16'h00A5, "header-only frame: link up, pause");
    chk(user_data == 128'hABCD_0000, "user data");
    chk(n_ho == 1, "header-only frame seen");
    // good frames
    for (int k = 0; k < 200; k++) begin
      logic [15:0] fp; fp = 16'($urandom);
      frame($urandom % NV, 1 + $urandom % 6, 16'($urandom), fp, 0, 0);
      repeat (3) @(posedge clk); #1;
      chk(remote_pause == fp, "footer pause");
    end
    // op-code
    frame(1, 2, 0, 0, 0, 1);
    repeat (3) @(posedge clk); #1;
    chk(n_ops == 1 && last_op == 128'hC0DE, "op-code received once");
    // dropped frames
    e0 = n_out;
    frame(0, 3, 0, 0, 1, 0);
    frame(0, 3, 0, 0, 2, 0);
    frame(0, 3, 0, 0, 3, 0);
    repeat (3) @(posedge clk); #1;
    chk(n_hdr_err == 3, $sformatf("%0d header errors", n_hdr_err));
    chk(n_out == e0, "dropped frames gave no output");
    // errored frames
    frame(2, 4, 0, 0, 4, 0);
    frame(3, 1, 0, 0, 5, 0);
    frame(1, 3, 0, 16'h0003, 0, 0);
    repeat (3) @(posedge clk); #1;
    chk(n_frame_err == 2, $sformatf("%0d frame errors", n_frame_err));
    chk(expq.size() == 0, "all expected words came out");
    // link timeout
    repeat (LT + 5) @(posedge clk); #1;
    chk(!link_up && remote_pause == '1, "link dropped after timeout");
    hdr_only(16'h0000);
    repeat (2) @(posedge clk); #1;
    chk(link_up && remote_pause == 16'h0000, "link back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
