// chacha_ref_pkg -- reference ChaCha20 block function for the testbenches, written
// directly from RFC 8439 as ten double rounds over an array (no pipelining), plus the
// 64-bit keystream word used for word k of a 64-byte block.
package chacha_ref_pkg;

  function automatic logic [31:0] rl(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic logic [511:0] ref_block(logic [255:0] k, logic [95:0] n, logic [31:0] c);
    logic [31:0] x [16];
    logic [31:0] s [16];
    int q [8][4] = '{'{0,4,8,12}, '{1,5,9,13}, '{2,6,10,14}, '{3,7,11,15},
                     '{0,5,10,15}, '{1,6,11,12}, '{2,7,8,13}, '{3,4,9,14}};
    logic [511:0] r;
    s[0] = 32'h61707865; s[1] = 32'h3320646e; s[2] = 32'h79622d32; s[3] = 32'h6b206574;
    for (int i = 0; i < 8; i++) s[4+i] = k[32*i +: 32];
    s[12] = c;
    for (int i = 0; i < 3; i++) s[13+i] = n[32*i +: 32];
    x = s;
    for (int dr = 0; dr < 10; dr++)
      for (int j = 0; j < 8; j++) begin
        int a, b, cc, d;
        a = q[j][0]; b = q[j][1]; cc = q[j][2]; d = q[j][3];
        x[a] += x[b]; x[d] = rl(x[d] ^ x[a], 16);
        x[cc] += x[d]; x[b] = rl(x[b] ^ x[cc], 12);
        x[a] += x[b]; x[d] = rl(x[d] ^ x[a], 8);
        x[cc] += x[d]; x[b] = rl(x[b] ^ x[cc], 7);
      end
    for (int i = 0; i < 16; i++) r[32*i +: 32] = x[i] + s[i];
    return r;
  endfunction

  // keystream for 64-bit word w (counting from the start of a buffer) when the buffer
  // starts at block counter c0
  function automatic logic [63:0] ks_word(logic [255:0] k, logic [95:0] n, logic [31:0] c0, int w);
    logic [511:0] blk;
    blk = ref_block(k, n, c0 + 32'(w / 8));
    return blk[64*(w % 8) +: 64];
  endfunction

endpackage
