// imiv_pkg: types, sizes and pure functions shared by the in-memory
// integrity verification design.
//
// Geometry follows the 512 GB NVDIMM the design is sized for: 64-byte lines
// (2^33 of them), split-counter blocks of 64 bytes covering 4 KB of data
// (2^27 blocks), and an eight-ary Bonsai Merkle tree over those blocks with
// nine hashed levels below a 64-byte root. Each tree node is eight 64-bit
// digests of its children. The two levels just below the root (8 + 64
// nodes) live in a no-replacement buffer; the lower six levels are cached.
//
// The counter format (64-bit major, 64 x 7-bit minor), the 64-bit digest,
// the hash function and the bus message formats are this design's choices;
// the published description fixes only the sizes quoted above.
package imiv_pkg;

  localparam int unsigned LINE_BITS   = 512;              // 64-byte block
  localparam int unsigned DIG_BITS    = 64;               // one digest / SMAC
  localparam int unsigned ARITY       = 8;                // eight-ary trees
  localparam int unsigned LINE_AW     = 33;               // 512 GB / 64 B
  localparam int unsigned CTR_AW      = LINE_AW - 6;      // 64 lines / counter block
  localparam int unsigned SMAC_AW     = LINE_AW - 3;      // 8 SMACs / SMAC block
  localparam int unsigned BMT_LEVELS  = 9;                // hashed levels (0..8)
  localparam int unsigned UPPER_LVLS  = 2;                // levels 7, 8 in the buffer
  localparam int unsigned LOWER_LVLS  = BMT_LEVELS - 1 - UPPER_LVLS; // levels 1..6
  localparam int unsigned MINOR_BITS  = 7;

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [DIG_BITS-1:0]  dig_t;
  typedef logic [LINE_AW-1:0]   laddr_t;   // 64-byte line index within the DIMM
  typedef logic [CTR_AW-1:0]    caddr_t;   // counter block index

  // Kind of block carried on the memory bus and the media port.
  typedef enum logic [1:0] {
    K_DATA = 2'd0,   // ciphertext line
    K_CTR  = 2'd1,   // counter block
    K_SMAC = 2'd2,   // block of eight SMACs
    K_NODE = 2'd3    // BMT node (media port only)
  } kind_e;

  // Request from the memory controller to the NVDIMM.
  typedef struct packed {
    logic       write;      // 1: ciphertext + SMAC write, 0: read
    kind_e      kind;       // read: which block is wanted
    laddr_t     addr;       // line address of the data line concerned
    logic       use_nonce;  // counter read that must come back encrypted
    dig_t       nonce;
    line_t      data;       // write: ciphertext
    dig_t       smac;       // write: SMAC of the ciphertext
  } bus_req_t;

  // Response from the NVDIMM.
  typedef struct packed {
    kind_e      kind;
    laddr_t     addr;
    logic       enc;        // counter block is nonce-encrypted
    logic       err;        // IVE detected an integrity failure
    line_t      data;
  } bus_rsp_t;

  // Request from the IVE to the storage media (through the internal buffers).
  typedef struct packed {
    logic              write;
    kind_e             kind;
    logic [3:0]        level;   // K_NODE: tree level 1..8
    logic [LINE_AW-1:0] idx;    // block index within its kind/level
    logic [63:0]       bmask;   // write byte mask
    line_t             data;
  } media_req_t;

  // ---------------------------------------------------------------------
  // Split counter block helpers
  // ---------------------------------------------------------------------
  function automatic logic [63:0] ctr_major(line_t b);
    return b[63:0];
  endfunction

  function automatic logic [MINOR_BITS-1:0] ctr_minor(line_t b, logic [5:0] i);
    return b[64 + MINOR_BITS*i +: MINOR_BITS];
  endfunction

  // Increment the minor counter of line i. On minor wrap the major counter is
  // incremented and every minor is cleared (page re-encryption is flagged by
  // the caller, see ctr_wraps).
  function automatic line_t ctr_inc(line_t b, logic [5:0] i);
    line_t r = b;
    if (&ctr_minor(b, i)) begin
      r = '0;
      r[63:0] = b[63:0] + 64'd1;
    end else begin
      r[64 + MINOR_BITS*i +: MINOR_BITS] = ctr_minor(b, i) + 1'b1;
    end
    return r;
  endfunction

  function automatic logic ctr_wraps(line_t b, logic [5:0] i);
    return &ctr_minor(b, i);
  endfunction

  // ---------------------------------------------------------------------
  // Hash: SipHash-style ARX compression of one 64-byte block to 64 bits
  // under a 64-bit key and a 64-bit chaining value. Not claimed to be a
  // vetted MAC; it stands in for the hash unit the design leaves open.
  // ---------------------------------------------------------------------
  function automatic logic [63:0] rotl64(logic [63:0] x, int unsigned s);
    return (x << s) | (x >> (64 - s));
  endfunction

  function automatic logic [255:0] sipround(logic [255:0] v);
    logic [63:0] v0, v1, v2, v3;
    {v3, v2, v1, v0} = v;
    v0 = v0 + v1; v1 = rotl64(v1, 13); v1 = v1 ^ v0; v0 = rotl64(v0, 32);
    v2 = v2 + v3; v3 = rotl64(v3, 16); v3 = v3 ^ v2;
    v0 = v0 + v3; v3 = rotl64(v3, 21); v3 = v3 ^ v0;
    v2 = v2 + v1; v1 = rotl64(v1, 17); v1 = v1 ^ v2; v2 = rotl64(v2, 32);
    return {v3, v2, v1, v0};
  endfunction

  function automatic dig_t hash64(dig_t key, dig_t chain, line_t msg);
    logic [255:0] v;
    logic [63:0]  k1;
    k1 = key ^ chain;
    v = {k1 ^ 64'h7465646279746573, key ^ 64'h6c7967656e657261,
         k1 ^ 64'h646f72616e646f6d, key ^ 64'h736f6d6570736575};
    for (int i = 0; i < 8; i++) begin
      v[255:192] = v[255:192] ^ msg[64*i +: 64];
      v = sipround(v);
      v = sipround(v);
      v[63:0] = v[63:0] ^ msg[64*i +: 64];
    end
    v[191:128] = v[191:128] ^ 64'hff;
    for (int i = 0; i < 4; i++) v = sipround(v);
    return v[63:0] ^ v[127:64] ^ v[191:128] ^ v[255:192];
  endfunction

  // Second SMAC block: binds the line address and the line's counter.
  function automatic line_t smac_tail(laddr_t a, line_t ctr_blk);
    line_t m = '0;
    m[LINE_AW-1:0]    = a;
    m[127:64]         = ctr_major(ctr_blk);
    m[128 +: MINOR_BITS] = ctr_minor(ctr_blk, a[5:0]);
    return m;
  endfunction

  // Reference SMAC = H(k, H(k, 0, ciphertext), {addr, major, minor}).
  // Hardware computes it as two passes through a hash unit.
  function automatic dig_t smac_ref(dig_t k, line_t ct, laddr_t a, line_t ctr_blk);
    return hash64(k, hash64(k, '0, ct), smac_tail(a, ctr_blk));
  endfunction

  // BMT geometry: index of the level-l node on the path of counter block c.
  function automatic logic [LINE_AW-1:0] node_idx(caddr_t c, int unsigned l);
    logic [LINE_AW-1:0] x = LINE_AW'(c);
    return x >> (3 * l);
  endfunction

  // Slot of the level-(l-1) child inside its level-l parent.
  function automatic logic [2:0] node_slot(caddr_t c, int unsigned l);
    logic [LINE_AW-1:0] x = LINE_AW'(c);
    return x[3*(l-1) +: 3];
  endfunction

  // Digest of a never-written subtree rooted at level l (l = 0: a counter
  // block of zeros). Used to give reset values to the root and the media.
  function automatic dig_t zero_digest(dig_t k, int unsigned l);
    dig_t  d = hash64(k, '0, '0);
    for (int unsigned i = 0; i < l; i++) d = hash64(k, '0, {ARITY{d}});
    return d;
  endfunction

endpackage
