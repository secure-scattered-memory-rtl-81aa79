// ssm_pkg - constants, types and GF(2^64) arithmetic shared by the Secure
// Scattered Memory (SSM) engine.
//
// SSM stores no ciphertext. A 64-byte data line is turned into the ten
// coefficients of a degree-9 polynomial over GF(2^64): eight data words, one
// zero "padding" coefficient and one check coefficient derived from an on-chip
// seed. The polynomial is evaluated at ten distinct random points; each point
// and its value, (x, f(x)), is a 9-byte share. Any ten shares give the
// polynomial back by Lagrange interpolation, and the check coefficients prove
// that none of the shares was altered.
//
// Storage layout. Seven 72-bit shares fill one 64-byte share block (bits
// [503:0], slot s at [72*s +: 72], top byte unused). Eight share blocks form a
// group, so every access moves K = 56 shares. Four consecutive data lines
// live in one group: share m of the line at offset o sits at linear slot
// L = o*10 + m, i.e. block L % 8, slot L / 8. Consecutive lines therefore
// start on rotated blocks (0, 2, 4, 6), and the 16 slots no line uses hold
// random filler.
//
// Following the paper: degree 9, ten shares per line, 9-byte shares, seven
// shares per block, eight blocks (56 shares) per access, arithmetic in
// GF(2^64). This design's own choices: the reduction polynomial
// x^64 + x^4 + x^3 + x + 1, the position of the padding coefficient (x^8),
// four lines per group, the linear-slot placement and the check-coefficient
// derivation a1 = seed * (2*line + 1).
package ssm_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned COEF_W           = 64;  // GF(2^64) element
  localparam int unsigned X_W              = 8;   // x coordinate of a share
  localparam int unsigned SHARE_W          = X_W + COEF_W;  // 72 bits = 9 bytes
  localparam int unsigned N_DEG            = 9;   // polynomial degree
  localparam int unsigned N_COEF           = N_DEG + 1;  // 10 coefficients
  localparam int unsigned T_SHARES         = N_COEF;     // shares needed (t)
  localparam int unsigned DATA_WORDS       = 8;   // 64-byte line / 8 bytes
  localparam int unsigned PAD_IDX          = DATA_WORDS;  // zero coefficient
  localparam int unsigned CHK_IDX          = N_DEG;       // seed coefficient a1
  localparam int unsigned LINE_BITS        = 512;
  localparam int unsigned SLOTS_PER_BLOCK  = 7;
  localparam int unsigned BLOCKS_PER_GROUP = 8;
  localparam int unsigned K_SHARES         = SLOTS_PER_BLOCK * BLOCKS_PER_GROUP;  // 56
  localparam int unsigned DATA_PER_GROUP   = 4;
  localparam int unsigned OFF_W            = $clog2(DATA_PER_GROUP);
  localparam int unsigned BLK_W            = $clog2(BLOCKS_PER_GROUP);
  localparam int unsigned SLOT_W           = $clog2(SLOTS_PER_BLOCK);

  // Addresses: 32 GB of DRAM in 64-byte lines -> 29-bit physical block
  // address. Data (plaintext) line addresses are 27 bits (8 GB).
  localparam int unsigned PBA_W    = 29;
  localparam int unsigned LINE_W   = 27;
  localparam int unsigned GROUP_W  = LINE_W - OFF_W;
  localparam int unsigned NUM_SEEDS = 16;
  localparam int unsigned SEED_IDX_W = $clog2(NUM_SEEDS);

  // x^64 + x^4 + x^3 + x + 1 (the x^64 term is implicit)
  localparam logic [COEF_W-1:0] GF_POLY = 64'h0000_0000_0000_001B;

  // ---------------------------------------------------------------- types
  typedef logic [COEF_W-1:0]  gf_t;
  typedef logic [X_W-1:0]     gx_t;
  typedef logic [PBA_W-1:0]   pba_t;
  typedef logic [LINE_W-1:0]  line_addr_t;
  typedef logic [GROUP_W-1:0] group_t;
  typedef logic [LINE_BITS-1:0] line_t;

  typedef struct packed {
    gx_t x;
    gf_t y;
  } share_t;

  typedef gf_t    coef_vec_t  [N_COEF];
  typedef share_t share_vec_t [T_SHARES];
  typedef pba_t   pba_vec_t   [BLOCKS_PER_GROUP];
  typedef line_t  group_blk_t [BLOCKS_PER_GROUP];

  // Position of one share inside a group.
  typedef struct packed {
    logic [BLK_W-1:0]  blk;
    logic [SLOT_W-1:0] slot;
  } slot_pos_t;

  // One-cycle event pulses of the SSM engine (for performance counters).
  typedef struct packed {
    logic tlb_hit;       // SSM TLB hit
    logic tlb_miss;      // SSM TLB miss -> page walk
    logic sc_hit;        // share block found in the shares cache
    logic sc_miss;       // share block fetched from DRAM
    logic sc_evict;      // shares cache replaced a valid block
    logic relocate;      // a group was moved to fresh locations (write)
    logic integ_fail;    // a read failed the integrity check
  } ssm_events_t;

  // ---------------------------------------------------------------- GF(2^64)
  function automatic gf_t gf_xtime(gf_t a);
    return {a[COEF_W-2:0], 1'b0} ^ (a[COEF_W-1] ? GF_POLY : '0);
  endfunction

  // Shift-and-add multiplication modulo GF_POLY.
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    gf_t r = '0;
    gf_t s = a;
    for (int i = 0; i < COEF_W; i++) begin
      if (b[i]) r ^= s;
      s = gf_xtime(s);
    end
    return r;
  endfunction

  // Check coefficient a1 bound to the seed and to the data line address.
  function automatic gf_t derive_check(gf_t seed, line_addr_t line);
    gf_t m;
    m = gf_t'({line, 1'b1});
    return gf_mul(seed, m);
  endfunction

  // Where share m of the line at group offset o is stored.
  function automatic slot_pos_t share_pos(logic [OFF_W-1:0] o, int unsigned m);
    int unsigned l;
    slot_pos_t p;
    l      = int'(o) * T_SHARES + m;
    p.blk  = BLK_W'(l % BLOCKS_PER_GROUP);
    p.slot = SLOT_W'(l / BLOCKS_PER_GROUP);
    return p;
  endfunction

  // SSM page-table line: eight block addresses, each in a 32-bit field.
  function automatic pba_vec_t pt_unpack(line_t l);
    pba_vec_t v;
    for (int b = 0; b < BLOCKS_PER_GROUP; b++) v[b] = l[32*b +: PBA_W];
    return v;
  endfunction

  function automatic line_t pt_pack(pba_vec_t v);
    line_t l = '0;
    for (int b = 0; b < BLOCKS_PER_GROUP; b++) l[32*b +: PBA_W] = v[b];
    return l;
  endfunction

endpackage
