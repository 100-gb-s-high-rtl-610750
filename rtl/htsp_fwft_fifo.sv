// htsp_fwft_fifo -- first-word-fall-through FIFO on a synchronous-read RAM.
//
// Shared storage of the three HTSP FIFOs. The words live in a simple dual-port array
// whose read port is registered, so that synthesis can map it to block RAM or
// UltraRAM, as a 512-bit-wide FIFO of thousands of words must be. An output register
// in front of the array gives first-word-fall-through behaviour: whenever out_valid is
// high, out_data is the oldest word, and `pop` removes it.
//
// The output register is refilled from the array on the same edge that pops it, so the
// FIFO moves one word per cycle in and out. A word written into an empty FIFO appears
// at the output two cycles after the write edge (one for the array write, one for the
// registered read). `count` is the number of words held, including the output register;
// `full` means DEPTH words are held. Writing while full and popping while empty are
// the caller's errors and are checked by assertions.
module htsp_fwft_fifo
  import htsp_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push,
  input  beat_t                    in_data,
  output logic                     full,
  input  logic                     pop,
  output logic                     out_valid,
  output beat_t                    out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  beat_t         mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [CW-1:0] ram_count;          // words in the array, not yet in the output register
  logic          load;               // move the oldest array word into the output register

  assign full  = (count == CW'(DEPTH));
  assign count = ram_count + CW'(out_valid);
  assign load  = (ram_count != '0) && (!out_valid || pop);

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
    if (load) out_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      ram_count <= '0;
      out_valid <= 1'b0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (load) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      ram_count <= ram_count + CW'(push) - CW'(load);
      if (load)     out_valid <= 1'b1;
      else if (pop) out_valid <= 1'b0;
    end
  end

  a_no_push_full: assert property (@(posedge clk) disable iff (rst) push |-> !full);
  a_no_pop_empty: assert property (@(posedge clk) disable iff (rst) pop |-> out_valid);
endmodule
