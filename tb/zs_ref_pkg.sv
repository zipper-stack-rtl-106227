// zs_ref_pkg: reference model of the Zipper Stack MAC for the testbenches.
//
// An independent Keccak-f[400] written in the textbook A[x][y] form, with the published
// 64-bit Keccak round constants truncated to 16-bit lanes and the published rotation
// offset table (mod 16), instead of the LFSR and (x,y) walk the RTL uses. ref_mac()
// returns the 24-bit tag for key || addr || prev_mac || domain bit absorbed as one
// padded 256-bit block, the construction the RTL implements (domain 0: return-address
// chain, 1: jump-buffer tag).
package zs_ref_pkg;

  localparam logic [63:0] RC64 [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // ROT[x][y]
  localparam int ROT [5][5] = '{
    '{ 0, 36,  3, 41, 18},
    '{ 1, 44, 10, 45,  2},
    '{62,  6, 43, 15, 61},
    '{28, 55, 25, 21, 56},
    '{27, 20, 39,  8, 14}};

  typedef logic [15:0] l16_t;

  function automatic l16_t rl(input l16_t v, input int n);
    int s;
    s = n % 16;
    if (s == 0) return v;
    return (v << s) | (v >> (16 - s));
  endfunction

  function automatic void keccak_f400(inout l16_t A [5][5]);
    l16_t B [5][5];
    l16_t C [5];
    l16_t D [5];
    for (int r = 0; r < 20; r++) begin
      for (int x = 0; x < 5; x++) C[x] = A[x][0] ^ A[x][1] ^ A[x][2] ^ A[x][3] ^ A[x][4];
      for (int x = 0; x < 5; x++) D[x] = C[(x+4)%5] ^ rl(C[(x+1)%5], 1);
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) A[x][y] ^= D[x];
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        B[y][(2*x+3*y)%5] = rl(A[x][y], ROT[x][y]);
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        A[x][y] = B[x][y] ^ ((~B[(x+1)%5][y]) & B[(x+2)%5][y]);
      A[0][0] ^= RC64[r][15:0];
    end
  endfunction

  function automatic logic [23:0] ref_mac(input logic [63:0] key, input logic [39:0] addr,
                                          input logic [23:0] prev, input bit dom = 1'b0);
    l16_t A [5][5];
    logic [399:0] s;
    s = '0;
    s[127:0] = {prev, addr, key};
    s[128] = dom;
    s[129] = 1'b1;
    s[255] = 1'b1;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) A[x][y] = s[16*(x+5*y) +: 16];
    keccak_f400(A);
    return {A[1][0][7:0], A[0][0]};
  endfunction

endpackage
