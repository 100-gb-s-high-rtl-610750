// tb_htsp_tx_fifo -- self-checking test of the per-VC TX FIFO.
// A depth-8 FIFO is filled until it refuses a word (full), then driven with random
// valid/ready; every word read is compared with a reference queue. Also checked: the
// first word is readable two cycles after its write edge, not one.
module tb_htsp_tx_fifo;
  import htsp_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst = 1;
  logic s_valid, s_ready, m_valid, m_ready;
  beat_t s_beat, m_beat;
  beat_t q[$];
  int checks = 0, failures = 0;

  htsp_tx_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic beat_t rnd_beat(int n);
    beat_t b;
    b.data = {16{$urandom}};
    b.data[31:0] = n;
    b.keep = {$urandom, $urandom};
    b.user = 8'($urandom);
    b.last = 1'($urandom);
    return b;
  endfunction

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n = 0, got = 0;
    s_valid = 0; m_ready = 0; s_beat = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    @(posedge clk); #1;
    chk(!m_valid && s_ready, "empty after reset");
    // latency: write one word, it shows one cycle later
    s_beat = rnd_beat(n++); s_valid = 1; q.push_back(s_beat);
    @(posedge clk); #1; s_valid = 0;
    chk(!m_valid, "first word not yet visible one cycle after its write");
    @(posedge clk); #1;
    chk(m_valid && m_beat == q[0], "first word visible two cycles after its write");
    // fill to full
    while (s_ready) begin
      s_beat = rnd_beat(n++); s_valid = 1; q.push_back(s_beat);
      @(posedge clk); #1;
    end
    s_valid = 0;
    chk(q.size() == DEPTH, $sformatf("full after %0d words", q.size()));
    // random traffic
    for (int c = 0; c < 3000; c++) begin
      bit do_w;
      do_w = ($urandom % 3) != 0;
      m_ready = ($urandom % 2);
      if (do_w && !s_valid) begin s_beat = rnd_beat(n++); end
      s_valid = do_w;
      #1;
      if (m_valid && m_ready) begin
        chk(q.size() > 0 && m_beat == q[0], "read order");
        void'(q.pop_front()); got++;
      end
      if (s_valid && s_ready) q.push_back(s_beat);
      @(posedge clk); #1;
    end
    s_valid = 0; m_ready = 1;
    while (m_valid) begin
      #1; chk(m_beat == q[0], "drain order"); void'(q.pop_front());
      @(posedge clk); #1;
    end
    chk(got > 1000, $sformatf("%0d words moved", got));
    chk(q.size() == 0, "all words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
