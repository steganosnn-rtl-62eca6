// tb_ref_pkg: reference model used by the testbenches, written independently of the RTL.
//
// The digit-to-(cipher, KEY) table is typed in from the published table (cipher and KEY
// columns), not derived from spike patterns as the RTL does. Digits are split with integer
// division rather than double dabble, and the dithered embedding is modelled per channel
// with integer arithmetic.
package tb_ref_pkg;

  localparam int CIPHER [10] = '{0, 11, 7, 13, 5, 2, 12, 4, 9, 6};
  localparam int KEY    [10] = '{0,  0, 0,  1, 1, 3,  3, 5, 4, 7};

  // Six symbols of a sample: sign, then ten-thousands ... units.
  function automatic void symbols(input int s, output int sym [6]);
    int m;
    m      = (s < 0) ? -s : s;
    sym[0] = (s < 0) ? 1 : 0;
    sym[1] = (m / 10000) % 10;
    sym[2] = (m / 1000) % 10;
    sym[3] = (m / 100) % 10;
    sym[4] = (m / 10) % 10;
    sym[5] = m % 10;
  endfunction

  function automatic logic [23:0] cipher_bits(input int s);
    int sym [6];
    logic [23:0] v;
    symbols(s, sym);
    v = '0;
    for (int i = 0; i < 6; i++) v = (v << 4) | 24'(CIPHER[sym[i]]);
    return v;
  endfunction

  function automatic logic [23:0] key_bits(input int s);
    int sym [6];
    logic [23:0] v;
    symbols(s, sym);
    v = '0;
    for (int i = 0; i < 6; i++) v = (v << 4) | 24'(KEY[sym[i]]);
    return v;
  endfunction

  function automatic logic [7:0] ref_ch(input int c, input int off, input logic [1:0] bits);
    int x;
    x = c + off;
    if (x > 255) x = 255;
    x = (x / 4) * 4 + int'(bits);
    return 8'(x);
  endfunction

  // Pixel word {R,G,B,A}; bits8 = {R bits, G bits, B bits, A bits}.
  function automatic logic [31:0] ref_pix(input logic [31:0] p, input int off,
                                          input logic [7:0] bits8);
    return {ref_ch(int'(p[31:24]), off, bits8[7:6]), ref_ch(int'(p[23:16]), off, bits8[5:4]),
            ref_ch(int'(p[15:8]),  off, bits8[3:2]), ref_ch(int'(p[7:0]),   off, bits8[1:0])};
  endfunction

endpackage
