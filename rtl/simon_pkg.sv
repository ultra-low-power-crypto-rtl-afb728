`timescale 1ps/1ps
// Simon 32/64 constants and round functions shared by the engine.
//
// Simon 32/64 works on a 32-bit block split into two 16-bit words and a
// 64-bit key held as four 16-bit words; it runs 32 rounds and uses the round
// constant sequence z0. One round maps (x, y) to (y ^ f(x) ^ k, x) with
// f(x) = (x <<< 1 & x <<< 8) ^ (x <<< 2). The key schedule for four key
// words is
//   tmp = (k[i+3] >>> 3) ^ k[i+1];  tmp ^= tmp >>> 1;
//   k[i+4] = ~k[i] ^ tmp ^ z0[i] ^ 3.
// These are the published Simon definitions; the engine built on them is
// the bit-parallel one-round-per-cycle organisation.
package simon_pkg;

  localparam int unsigned WORD   = 16;  // word size n
  localparam int unsigned ROUNDS = 32;  // rounds T
  localparam int unsigned CNT_W  = $clog2(ROUNDS);

  typedef logic [WORD-1:0] word_t;

  // z0 written so that bit i is the constant of round i (the usual printed
  // string 11111010001001010110000111001101111101000100101011000011100110
  // read left to right, reversed here into LSB-first order).
  localparam logic [61:0] Z0 = 62'b01100111000011010100100010111110110011100001101010010001011111;

  function automatic word_t rotl(word_t v, int unsigned s);
    return (v << s) | (v >> (WORD - s));
  endfunction

  function automatic word_t rotr(word_t v, int unsigned s);
    return (v >> s) | (v << (WORD - s));
  endfunction

  // Round function f.
  function automatic word_t simon_f(word_t x);
    return (rotl(x, 1) & rotl(x, 8)) ^ rotl(x, 2);
  endfunction

  // Next key word from the four current ones: k_i (oldest) .. k_i3 (newest).
  function automatic word_t key_next(word_t k_i, word_t k_i1, word_t k_i3, logic z);
    word_t tmp;
    tmp = rotr(k_i3, 3) ^ k_i1;
    tmp = tmp ^ rotr(tmp, 1);
    return ~k_i ^ tmp ^ word_t'({z}) ^ word_t'(3);
  endfunction

endpackage
