// htsp_saf_fifo -- store-and-forward frame FIFO between TX HTSP and the Ethernet MAC.
//
// The MAC must see TVALID held high from the first to the last word of a frame. This
// FIFO therefore releases a frame only once its last word (TLAST) has been written: a
// count of complete frames held gates m_valid. Inside a released frame the words leave
// back to back, since all of them are already stored. The cost is latency that grows
// with the frame length, up to the longest HTSP frame (burst limit + header + footer).
//
// Interface: valid/ready on both sides, first-word-fall-through read, on
// htsp_fwft_fifo; the first word of a complete frame is offered two cycles after the
// frame's last word was written. A frame longer
// than the FIFO cannot be stored whole; DEPTH must exceed the longest frame, which the
// default of 512 words does for the 130-word frames of an 8 kB burst.
//
// The FIFO and its purpose come from the published latency discussion; the depth is
// this design's choice.
module htsp_saf_fifo
  import htsp_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  s_valid,
  output logic  s_ready,
  input  beat_t s_beat,
  output logic  m_valid,
  input  logic  m_ready,
  output beat_t m_beat
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic          full, out_valid, wr_en, rd_en, wr_eof, rd_eof;
  logic [CW-1:0] count, frames;     // frames: complete frames held

  assign s_ready = !full;
  assign wr_en   = s_valid && s_ready;
  assign rd_en   = m_valid && m_ready;
  assign wr_eof  = wr_en && s_beat.last;
  assign rd_eof  = rd_en && m_beat.last;
  assign m_valid = out_valid && (frames != '0);

  htsp_fwft_fifo #(.DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .push(wr_en), .in_data(s_beat), .full,
    .pop(rd_en), .out_valid, .out_data(m_beat), .count
  );

  always_ff @(posedge clk) begin
    if (rst) frames <= '0;
    else     frames <= frames + CW'(wr_eof) - CW'(rd_eof);
  end

  // Once a frame starts leaving, it leaves without a gap.
  a_no_gap: assert property (@(posedge clk) disable iff (rst)
    (rd_en && !m_beat.last) |=> m_valid);
endmodule
