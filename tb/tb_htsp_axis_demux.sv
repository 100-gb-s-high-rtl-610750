// tb_htsp_axis_demux -- self-checking test of the VC demultiplexer.
// Random words with random VC tags (and idle cycles) go in; one cycle later exactly the
// strobe of that VC must be high with the same word, and no strobe after an idle cycle.
module tb_htsp_axis_demux;
  import htsp_pkg::*;
  localparam int NV = 16;
  logic clk = 0, rst = 1;
  logic s_valid;
  beat_t s_beat, m_beat;
  logic [VC_W-1:0] s_vc;
  logic [NV-1:0] m_valid;
  int checks = 0, failures = 0;
  int hits [NV];

  htsp_axis_demux #(.NUM_VC(NV)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic pv; beat_t pb; logic [VC_W-1:0] pvc;
    s_valid = 0; s_beat = '0; s_vc = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    pv = 0; pb = '0; pvc = '0;
    for (int c = 0; c < 2000; c++) begin
      s_valid = ($urandom % 3) != 0;
      s_vc = VC_W'($urandom);
      s_beat.data = {16{$urandom}}; s_beat.keep = {2{$urandom}};
      s_beat.user = 8'($urandom); s_beat.last = 1'($urandom);
      @(posedge clk); #1;
      if (s_valid) begin
        logic [NV-1:0] exp; exp = '0; exp[s_vc] = 1'b1;
        chk(m_valid == exp && m_beat == s_beat, $sformatf("word to VC %0d", s_vc));
        hits[s_vc]++;
      end else chk(m_valid == '0, "no strobe when idle");
    end
    foreach (hits[v]) chk(hits[v] > 0, $sformatf("VC %0d reached", v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
