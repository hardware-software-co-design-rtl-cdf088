// tb_ref_pkg -- reference models used by the testbenches, written from the
// algorithm descriptions and independent of the RTL.
//
//  * encode_last_bits: packs four weights in [-64, 63] and a 4-bit lookahead
//    count into one 32-bit block, step by step as the encoding algorithm does
//    it (keep the sign, drop bit 6, shift left, insert the count bit, restore
//    the sign). Weight k goes to byte k.
//  * lookahead_count: the number of all-zero blocks that follow block b in a
//    row of blocks, capped at a given limit.
//  * dot4: the plain sum of the four products of a block.
package tb_ref_pkg;

  typedef byte signed blk_t [4];

  function automatic logic [31:0] encode_last_bits(input blk_t w, input int unsigned skip);
    logic [31:0] word;
    logic [7:0]  v, sign_bit, skip_bit;
    for (int i = 0; i < 4; i++) begin
      v        = w[i];
      sign_bit = (v >> 7) & 8'h01;
      skip_bit = 8'((skip >> i) & 1);
      v        = v & 8'b1011_1111;
      v        = (v << 1) & 8'b0111_1110;
      v        = v | skip_bit;
      v        = v | (sign_bit << 7);
      word[8*i +: 8] = v;
    end
    return word;
  endfunction

  function automatic int dot4(input blk_t w, input logic [31:0] x);
    int s = 0;
    for (int k = 0; k < 4; k++) s += int'(w[k]) * int'($signed(x[8*k +: 8]));
    return s;
  endfunction

  function automatic int nonzeros(input blk_t w);
    int n = 0;
    for (int k = 0; k < 4; k++) if (w[k] != 0) n++;
    return n;
  endfunction

  function automatic logic [31:0] pack8(input blk_t w);
    logic [31:0] word;
    for (int k = 0; k < 4; k++) word[8*k +: 8] = w[k];
    return word;
  endfunction

  // random weight in [-64, 63], non-zero
  function automatic byte signed rand_w7_nz();
    int v;
    do v = int'($urandom_range(0, 127)) - 64; while (v == 0);
    return byte'(v);
  endfunction

  // random signed byte
  function automatic byte signed rand_b();
    return byte'($urandom_range(0, 255));
  endfunction

endpackage
