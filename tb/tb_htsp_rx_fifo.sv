// tb_htsp_rx_fifo -- self-checking test of the per-VC RX FIFO with pause and overflow.
// Depth 16, threshold 8: pause must rise one cycle after the 8th word is held and not
// before; writing 20 words drops 4 with an overflow pulse each; the 16 kept words come
// out in order; pause falls once the fill level is back below 8.
module tb_htsp_rx_fifo;
  import htsp_pkg::*;
  localparam int DEPTH = 16, THR = 8;
  logic clk = 0, rst = 1;
  logic s_valid, m_valid, m_ready, pause, overflow;
  beat_t s_beat, m_beat;
  beat_t q[$];
  int checks = 0, failures = 0, ovf = 0;

  htsp_rx_fifo #(.DEPTH(DEPTH), .PAUSE_THRESH(THR)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && overflow) ovf++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_valid = 0; m_ready = 0; s_beat = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 20; i++) begin
      s_beat = '0; s_beat.data = {16{$urandom}}; s_beat.user = 8'(i); s_beat.last = 1'(i % 3 == 0);
      s_valid = 1;
      if (i < DEPTH) q.push_back(s_beat);
      @(posedge clk); #1;
      // i+1 words written; pause registered from the count before this edge
      if (i + 1 < THR + 1) chk(!pause, $sformatf("no pause with %0d words", i));
      if (i + 1 >= THR + 1) chk(pause, $sformatf("pause with %0d words", i));
    end
    s_valid = 0;
    @(posedge clk); #1;
    chk(ovf == 20 - DEPTH, $sformatf("overflow pulses %0d", ovf));
    m_ready = 1;
    for (int i = 0; i < DEPTH; i++) begin
      chk(m_valid && m_beat == q[i], $sformatf("read %0d", i));
      @(posedge clk); #1;
      if (i == DEPTH - THR) begin
        @(negedge clk);
      end
    end
    chk(!m_valid, "empty after reading all");
    chk(!pause, "pause released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
