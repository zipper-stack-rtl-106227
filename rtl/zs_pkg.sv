// zs_pkg: sizes, types and the Keccak-f[400] helpers shared by the Zipper Stack unit.
//
// The unit chains every spilled return address to a MAC. The newest MAC lives in the
// on-chip Top register; each older MAC travels in the upper bits of the saved return
// address. Widths follow the RISC-V prototype: a 64-bit ra register whose lower 40 bits
// hold the address (NA) and whose upper 24 bits hold a MAC (NM), and a 64-bit key (NS).
// A domain bit separates the MACs of the return-address chain from the tags that
// authenticate a Top value saved in a setjmp jump buffer.
// The MAC function is Keccak with l = 4 (16-bit lanes, 400-bit state, rate 256,
// capacity 144), 12 + 2l = 20 rounds. The functions below compute one Keccak round;
// round constants and rotation offsets are derived here with the Keccak LFSR and the
// (x,y) walk of the specification rather than stored as tables.
package zs_pkg;

  localparam int unsigned XLEN     = 64;   // ra register width
  localparam int unsigned NA       = 40;   // address bits kept in ra[39:0]
  localparam int unsigned NM       = 24;   // MAC / Top register width, ra[63:40]
  localparam int unsigned NS       = 64;   // Key register width
  localparam int unsigned KECCAK_L = 4;    // lane width 2**l
  localparam int unsigned LANE     = 1 << KECCAK_L;        // 16
  localparam int unsigned STATE    = 25 * LANE;            // 400
  localparam int unsigned RATE     = 256;
  localparam int unsigned ROUNDS   = 12 + 2 * KECCAK_L;    // 20
  localparam int unsigned MSG      = NS + NA + NM;         // 128-bit absorbed message

  typedef logic [LANE-1:0]  lane_t;
  typedef lane_t [24:0]     kstate_t;   // lane index x + 5*y

  typedef enum logic [2:0] {
    ZS_NONE    = 3'd0,
    ZS_ZIP     = 3'd1,   // after a call: chain ra to Top
    ZS_UNZIP   = 3'd2,   // before a return: check ra against Top, restore Top
    ZS_SAVE    = 3'd3,   // setjmp: Top and its tag into a jump-buffer word
    ZS_RESTORE = 3'd4    // longjmp: check a jump-buffer word, restore Top
  } zs_op_e;

  // Encoding (this design's choice): custom-0 major opcode, funct3 selects the op.
  localparam logic [6:0] OPC_CUSTOM0  = 7'b0001011;
  localparam logic [2:0] F3_ZIP       = 3'b000;
  localparam logic [2:0] F3_UNZIP     = 3'b001;
  localparam logic [2:0] F3_SAVE      = 3'b010;
  localparam logic [2:0] F3_RESTORE   = 3'b011;

  // MAC domains: return-address chain and jump-buffer tags never share a MAC value.
  localparam logic DOM_CHAIN  = 1'b0;
  localparam logic DOM_JMPBUF = 1'b1;

  // Keccak LFSR bit rc(t), x^8 + x^6 + x^5 + x^4 + 1.
  function automatic logic rc_bit(input int unsigned t);
    logic [7:0] r;
    r = 8'h01;
    for (int unsigned i = 0; i < (t % 255); i++) begin
      r = {r[6:0], 1'b0} ^ (r[7] ? 8'h71 : 8'h00);
    end
    return r[0];
  endfunction

  // Iota constant of round ir for 16-bit lanes: bit 2^j-1 set from rc(j + 7*ir).
  function automatic lane_t round_const(input int unsigned ir);
    lane_t c;
    c = '0;
    for (int unsigned j = 0; j <= KECCAK_L; j++) begin
      c[(1 << j) - 1] = rc_bit(j + 7 * ir);
    end
    return c;
  endfunction

  function automatic lane_t rotl(input lane_t v, input int unsigned n);
    int unsigned s;
    s = n % LANE;
    return (s == 0) ? v : lane_t'((v << s) | (v >> (LANE - s)));
  endfunction

  // Rho offset of lane (x,y): walk (1,0) -> (y, 2x+3y) for t = 0..23.
  function automatic int unsigned rho_offset(input int unsigned x, input int unsigned y);
    int unsigned cx, cy, nx;
    if (x == 0 && y == 0) return 0;
    cx = 1; cy = 0;
    for (int unsigned t = 0; t < 24; t++) begin
      if (cx == x && cy == y) return (((t + 1) * (t + 2)) / 2) % LANE;
      nx = cy;
      cy = (2 * cx + 3 * cy) % 5;
      cx = nx;
    end
    return 0;
  endfunction

  // One Keccak-f[400] round: theta, rho, pi, chi, then iota with constant rc.
  function automatic kstate_t keccak_round(input kstate_t a, input lane_t rc);
    lane_t   c [5];
    lane_t   d [5];
    kstate_t b;
    kstate_t o;
    for (int unsigned x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int unsigned x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int unsigned x = 0; x < 5; x++)
      for (int unsigned y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y] ^ d[x], rho_offset(x, y));
    for (int unsigned x = 0; x < 5; x++)
      for (int unsigned y = 0; y < 5; y++)
        o[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    o[0] = o[0] ^ rc;
    return o;
  endfunction

  // Absorb key || address || previous MAC || domain bit as one padded rate block into
  // a zero state.
  function automatic kstate_t absorb(input logic [NS-1:0] key,
                                     input logic [NA-1:0] addr,
                                     input logic [NM-1:0] mac,
                                     input logic          dom);
    logic [STATE-1:0] s;
    s = '0;
    s[MSG-1:0] = {mac, addr, key};   // key in bits 0..63, then address, then MAC
    s[MSG]     = dom;                // bit 128: domain
    s[MSG+1]   = 1'b1;               // pad10*1: first pad bit
    s[RATE-1]  = s[RATE-1] ^ 1'b1;   // last pad bit
    return kstate_t'(s);
  endfunction

endpackage
