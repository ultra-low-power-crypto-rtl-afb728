`timescale 1ps/1ps
// Reference model of Simon 32/64 for the testbenches.
//
// Written from the cipher's definition, independently of the engine: the key
// is expanded into all 32 round keys first, then the 32 rounds are applied.
// The round constant string z0 is kept in the order it is usually printed
// (round 0 is the leftmost character) and indexed from that end.
package simon_ref_pkg;

  localparam string Z0_STR = "11111010001001010110000111001101111101000100101011000011100110";

  function automatic logic [15:0] rl(logic [15:0] v, int s);
    return 16'((v << s) | (v >> (16 - s)));
  endfunction

  function automatic logic [15:0] rr(logic [15:0] v, int s);
    return 16'((v >> s) | (v << (16 - s)));
  endfunction

  function automatic logic z0_bit(int i);
    return Z0_STR[i % 62] == "1";
  endfunction

  // Round key i of the 64-bit key {k3, k2, k1, k0}.
  function automatic logic [15:0] round_key(logic [63:0] key, int i);
    logic [15:0] k [0:31];
    logic [15:0] tmp;
    for (int j = 0; j < 4; j++) k[j] = key[16*j +: 16];
    for (int j = 4; j < 32; j++) begin
      tmp  = rr(k[j-1], 3) ^ k[j-3];
      tmp  = tmp ^ rr(tmp, 1);
      k[j] = 16'hFFFC ^ {15'b0, z0_bit(j-4)} ^ k[j-4] ^ tmp;
    end
    return k[i];
  endfunction

  // State {x, y} after the first n rounds.
  function automatic logic [31:0] encrypt_rounds(logic [31:0] pt, logic [63:0] key, int n);
    logic [15:0] x, y, t;
    x = pt[31:16];
    y = pt[15:0];
    for (int i = 0; i < n; i++) begin
      t = x;
      x = y ^ ((rl(x, 1) & rl(x, 8)) ^ rl(x, 2)) ^ round_key(key, i);
      y = t;
    end
    return {x, y};
  endfunction

  function automatic logic [31:0] encrypt(logic [31:0] pt, logic [63:0] key);
    return encrypt_rounds(pt, key, 32);
  endfunction

endpackage
