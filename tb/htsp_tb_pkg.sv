// htsp_tb_pkg -- reference model of the HTSP word formats for the testbenches.
//
// Written byte by byte from the header and footer tables, independently of the
// packing functions of htsp_pkg: a header or footer is built as an array of 64 bytes
// and only then turned into a 512-bit word (byte i = bits 8i+7..8i). The header
// checksum is computed here as the Internet checksum over big 16-bit words assembled
// from byte pairs (low byte first).
package htsp_tb_pkg;

  typedef logic [7:0] bytes_t [64];

  function automatic logic [511:0] to_word(input bytes_t b);
    logic [511:0] w;
    for (int i = 0; i < 64; i++) w[8*i +: 8] = b[i];
    return w;
  endfunction

  function automatic bytes_t to_bytes(input logic [511:0] w);
    bytes_t b;
    for (int i = 0; i < 64; i++) b[i] = w[8*i +: 8];
    return b;
  endfunction

  function automatic logic [15:0] ref_xsum(input bytes_t b);
    int unsigned s;
    s = 0;
    for (int i = 0; i < 32; i++) begin
      s = s + {24'd0, b[2*i]} + ({24'd0, b[2*i+1]} << 8);
      if (s > 32'hFFFF) s = (s & 32'hFFFF) + 1;
    end
    return ~s[15:0];
  endfunction

  function automatic logic [511:0] ref_header(
      input logic [47:0] dmac, input logic [47:0] smac, input logic [15:0] etype,
      input logic [7:0] tid, input logic [15:0] pause, input logic [7:0] vc,
      input logic [7:0] tuser, input logic op_en, input logic [127:0] op_data,
      input logic [127:0] udata);
    bytes_t b;
    logic [15:0] x;
    foreach (b[i]) b[i] = 8'h00;
    for (int i = 0; i < 6; i++) begin
      b[i]   = dmac[8*i +: 8];
      b[6+i] = smac[8*i +: 8];
    end
    b[12] = etype[7:0];  b[13] = etype[15:8];
    b[14] = 8'h01;       b[15] = tid;
    b[16] = pause[7:0];  b[17] = pause[15:8];
    b[18] = vc;          b[19] = tuser;
    b[20] = {7'd0, op_en};
    for (int i = 0; i < 16; i++) begin
      b[32+i] = op_data[8*i +: 8];
      b[48+i] = udata[8*i +: 8];
    end
    x = ref_xsum(b);
    b[30] = x[7:0]; b[31] = x[15:8];
    return to_word(b);
  endfunction

  function automatic logic [511:0] ref_footer(input logic [7:0] keep_bytes,
      input logic [6:0] tuser_hi, input logic tlast, input logic [15:0] pause,
      input logic [15:0] size);
    bytes_t b;
    foreach (b[i]) b[i] = 8'h00;
    b[0] = keep_bytes;
    b[1] = {tuser_hi, tlast};
    b[2] = pause[7:0]; b[3] = pause[15:8];
    b[4] = size[7:0];  b[5] = size[15:8];
    return to_word(b);
  endfunction

  // Deterministic payload word for (vc, frame, word): a 32-bit LFSR expanded to 512 bits.
  function automatic logic [511:0] pat_word(input int vc, input int frame, input int word);
    logic [31:0] s;
    logic [511:0] w;
    s = 32'h1234_5678 ^ (vc << 24) ^ (frame << 12) ^ word;
    for (int i = 0; i < 16; i++) begin
      s = {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]} ^ 32'h9E37_79B9;
      w[32*i +: 32] = s;
    end
    return w;
  endfunction

endpackage
