// edap_pkg: sizes, types and GF(2^128) arithmetic of the EDAP memory-side
// encryption path (encryption engine between the L2 and the L1 caches).
//
// From the paper: 128-byte cache lines cut into eight 16-byte sections, a
// 64-bit secure processing identifier (SEID), an XTS tweak X = <SEID, EA>
// built from the SEID and the line's effective address, an 8-byte digest
// per line, alpha = x in GF(2^128), and the GCM hash key H = E_K2(0).
//
// This design's choices: X places the SEID in bits [127:64] and the EA in
// bits [63:0]; effective and real addresses are 64 bits; the digest is the
// leading 8 bytes (bits [127:64]) of the 128-bit hash result.
//
// Two GF(2^128) conventions are used, each that of its standard:
//  * xts_mul_alpha follows IEEE 1619: the 16 bytes are a little-endian
//    integer, shifted left by one with 0x87 folded into byte 0 on carry.
//  * gf128_mul follows GCM (NIST SP 800-38D): bit 127 of the vector is the
//    coefficient of x^0, reduction by R = 0xE1 || 0^120.
package edap_pkg;

  parameter int LINE_BYTES = 128;
  parameter int SECTIONS   = LINE_BYTES / 16;     // 8 XTS data units
  parameter int LINE_BITS  = LINE_BYTES * 8;
  parameter int OFFS_BITS  = $clog2(LINE_BYTES);  // 7
  parameter int SEID_BITS  = 64;
  parameter int ADDR_BITS  = 64;
  parameter int DIG_BITS   = 64;

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [ADDR_BITS-1:0] addr_t;
  typedef logic [SEID_BITS-1:0] seid_t;
  typedef logic [DIG_BITS-1:0]  digest_t;
  typedef logic [127:0]         blk_t;

  // Operations a core may send to an L1 cache.
  typedef enum logic [1:0] {
    OP_LOAD    = 2'd0,   // read one doubleword
    OP_STORE   = 2'd1,   // write bytes of one doubleword
    OP_ACQUIRE = 2'd2,   // claim an empty (zeroed) block without reading memory
    OP_RELEASE = 2'd3    // erase a block and hand it back as zeros in memory
  } l1_op_e;

  // 16-byte section i of a line; section 0 is the lowest-addressed, held in
  // the top bits, matching the byte order of a block.
  function automatic blk_t section(input line_t l, input int i);
    return l[LINE_BITS - 1 - 128*i -: 128];
  endfunction

  function automatic blk_t byte_swap(input blk_t b);
    blk_t r;
    for (int i = 0; i < 16; i++) r[8*i +: 8] = b[127 - 8*i -: 8];
    return r;
  endfunction

  function automatic blk_t xts_mul_alpha(input blk_t t);
    blk_t le;
    blk_t sh;
    le = byte_swap(t);
    sh = {le[126:0], 1'b0} ^ (le[127] ? 128'h87 : 128'h0);
    return byte_swap(sh);
  endfunction

  function automatic blk_t gf128_mul(input blk_t x, input blk_t y);
    blk_t z;
    blk_t v;
    z = '0;
    v = y;
    for (int i = 0; i < 128; i++) begin
      if (x[127 - i]) z ^= v;
      v = v[0] ? ((v >> 1) ^ {8'he1, 120'h0}) : (v >> 1);
    end
    return z;
  endfunction

  function automatic blk_t make_tweak(input seid_t s, input addr_t ea);
    return {s, ea[ADDR_BITS-1:OFFS_BITS], {OFFS_BITS{1'b0}}};
  endfunction

endpackage
