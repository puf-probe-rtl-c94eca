// tb_ref_pkg: reference models used by the testbenches, written independently
// of the RTL in a plain procedural style.
//   md5_bytes   - MD5 (RFC 1321) of a message of up to 55 bytes, with the round
//                 constants computed from the sine formula at run time.
//   diode_sig   - 132-bit pairwise-comparison signature of twelve voltages.
//   reg_field   - sign-magnitude field with saturation.
package tb_ref_pkg;
  function automatic logic [31:0] rotl(input logic [31:0] x, input int s);
    return (x << s) | (x >> (32 - s));
  endfunction

  // msg[0] is the first byte
  function automatic logic [127:0] md5_bytes(input logic [7:0] msg [], input int len);
    logic [7:0]  blk [64];
    logic [31:0] M [16];
    logic [31:0] K [64];
    int          S [64];
    int          r [16] = '{7,12,17,22, 5,9,14,20, 4,11,16,23, 6,10,15,21};
    logic [31:0] a, b, c, d, f, t;
    logic [31:0] a0, b0, c0, d0;
    logic [127:0] out;
    int g;
    for (int i = 0; i < 64; i++) begin
      real x;
      x = $sin(i + 1.0);
      if (x < 0) x = -x;
      K[i] = 32'(longint'($floor(x * 4294967296.0)));
      S[i] = r[(i/16)*4 + i%4];
    end
    for (int i = 0; i < 64; i++) blk[i] = 8'h00;
    for (int i = 0; i < len; i++) blk[i] = msg[i];
    blk[len] = 8'h80;
    {blk[63], blk[62], blk[61], blk[60], blk[59], blk[58], blk[57], blk[56]} = 64'(len * 8);
    for (int i = 0; i < 16; i++) M[i] = {blk[4*i+3], blk[4*i+2], blk[4*i+1], blk[4*i]};
    a0 = 32'h67452301; b0 = 32'hefcdab89; c0 = 32'h98badcfe; d0 = 32'h10325476;
    a = a0; b = b0; c = c0; d = d0;
    for (int i = 0; i < 64; i++) begin
      if (i < 16)      begin f = (b & c) | (~b & d); g = i;              end
      else if (i < 32) begin f = (d & b) | (~d & c); g = (5*i + 1) % 16; end
      else if (i < 48) begin f = b ^ c ^ d;          g = (3*i + 5) % 16; end
      else             begin f = c ^ (b | ~d);       g = (7*i) % 16;     end
      t = d; d = c; c = b;
      b = b + rotl(a + f + K[i] + M[g], S[i]);
      a = t;
    end
    a += a0; b += b0; c += c0; d += d0;
    for (int i = 0; i < 4; i++) begin
      out[127 - 8*i      -: 8] = a[8*i +: 8];
      out[127 - 8*(i+4)  -: 8] = b[8*i +: 8];
      out[127 - 8*(i+8)  -: 8] = c[8*i +: 8];
      out[127 - 8*(i+12) -: 8] = d[8*i +: 8];
    end
    return out;
  endfunction

  function automatic logic [127:0] md5_nonce(input logic [31:0] n);
    logic [7:0] m [];
    m = new[4];
    m[0] = n[31:24]; m[1] = n[23:16]; m[2] = n[15:8]; m[3] = n[7:0];
    return md5_bytes(m, 4);
  endfunction

  function automatic logic [131:0] diode_sig(input int v [12]);
    logic [131:0] s;
    int p;
    p = 131;
    for (int i = 0; i < 12; i++)
      for (int j = 0; j < 12; j++)
        if (j != i) begin
          s[p] = (v[i] > v[j]);
          p--;
        end
    return s;
  endfunction
endpackage
