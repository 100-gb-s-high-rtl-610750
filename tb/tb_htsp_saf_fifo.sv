// tb_htsp_saf_fifo -- self-checking test of the store-and-forward frame FIFO.
// Frames of random length are written with random gaps; the output must stay invalid
// until a frame's last word is in, and once a frame starts leaving (ready held high)
// its words must come on consecutive cycles. All words are compared in order.
module tb_htsp_saf_fifo;
  import htsp_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst = 1;
  logic s_valid, s_ready, m_valid, m_ready;
  beat_t s_beat, m_beat;
  beat_t q[$];
  int checks = 0, failures = 0, frames_in = 0, frames_out = 0;
  bit in_frame = 0;

  htsp_saf_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #500000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reader: always ready; checks order, no gaps inside a frame, no early release
  always @(posedge clk) if (!rst) begin
    if (m_valid) begin
      checks++;
      if (q.size() == 0 || m_beat != q[0]) begin failures++; $display("FAIL: order"); end
      else void'(q.pop_front());
      in_frame <= !m_beat.last;
      if (m_beat.last) frames_out++;
    end else if (in_frame) begin
      checks++; failures++; $display("FAIL: gap inside frame");
    end
  end

  initial begin
    m_ready = 1; s_valid = 0; s_beat = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // first frame: 5 words written slowly; nothing may come out before the last
    for (int w = 0; w < 5; w++) begin
      s_beat = '0; s_beat.data = {16{$urandom}}; s_beat.last = (w == 4);
      s_valid = 1; q.push_back(s_beat);
      @(posedge clk); #1; s_valid = 0;
      repeat (3) begin
        chk(!m_valid || w == 4, "no release before TLAST");
        @(posedge clk); #1;
      end
    end
    frames_in++;
    // random frames
    for (int f = 0; f < 60; f++) begin
      int len;
      len = 1 + $urandom % 20;
      for (int w = 0; w < len; w++) begin
        @(negedge clk);
        s_beat = '0; s_beat.data = {16{$urandom}}; s_beat.keep = {2{$urandom}};
        s_beat.last = (w == len - 1);
        s_valid = 1;
        while (!s_ready) @(negedge clk);
        q.push_back(s_beat);
        @(posedge clk); #1 s_valid = 0;
        if ($urandom % 4 == 0) @(posedge clk);
      end
      frames_in++;
    end
    s_valid = 0;
    repeat (50) @(posedge clk);
    chk(frames_out == frames_in, $sformatf("frames out %0d in %0d", frames_out, frames_in));
    chk(q.size() == 0, "all words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
