// hermes_pkg: constants, types and index arithmetic shared by the Hermes NTT
// accelerator.
//
// Default sizes are the main configuration: 64-bit coefficients, p = 16
// butterfly units per partial stage (2p = 32 lanes), N_part = 256-point
// partial NTTs (S_part = 8 stages) and polynomials of up to 2^16 points.
//
// Index conventions used throughout the RTL:
//   i   global coefficient index, 0 .. N-1
//   j   position inside one N_part-point block, 0 .. N_part-1
//   t   round (cycle) inside a block, 0 .. N_part/(2p)-1
//   l   lane, 0 .. 2p-1
// Pass 1 block b holds i = b + (N/N_part)*j and computes global stages
// 0 .. S_part-1; pass 2 block c holds i = c*N_part + j and computes the
// remaining log2(N) - S_part stages (the leading core stages run in Swap Mode).
package hermes_pkg;

  localparam int unsigned COEF_W        = 64;   // coefficient bit width
  localparam int unsigned P_DEF         = 16;   // butterfly units per partial stage
  localparam int unsigned N_PART_DEF    = 256;  // points per partial NTT
  localparam int unsigned LOG_N_MAX_DEF = 16;   // largest supported log2(N)

  typedef logic [COEF_W-1:0] coef_t;

  // One twiddle-table word: the twiddle w and its Shoup companion
  // floor(w * 2^COEF_W / q).
  typedef struct packed {
    coef_t w;
    coef_t wpre;
  } tw_t;

  // BU operating mode (paper: Butterfly Mode / Swap Mode).
  typedef enum logic {
    BU_SWAP  = 1'b0,
    BU_BFLY  = 1'b1
  } bu_mode_e;

  // Controller phases.
  typedef enum logic [2:0] {
    ST_IDLE, ST_LOAD, ST_PASS1, ST_DRAIN1, ST_PASS2, ST_DRAIN2, ST_STORE
  } ctrl_state_e;

  // Side information that travels with every round of a block.
  typedef struct packed {
    logic        pass2;  // 0: first pass (strided block), 1: second pass (contiguous block)
    logic [15:0] blk;    // block number inside the pass
    logic [4:0]  log_n;  // log2 of the transform length
  } blk_tag_t;

  // ---------------------------------------------------------------------
  // Index helpers. Widths are fixed at 32 bits; callers pass the sizes.
  // ---------------------------------------------------------------------

  // Conflict-free on-chip fragmentation (Algorithm 1):
  //   bank = (i xor floor(i / N_part)) mod 2p,  offset = i / (2p)
  function automatic int unsigned frag_bank(int unsigned i, int unsigned s_part,
                                            int unsigned lw);
    return ((i ^ (i >> s_part)) & ((32'd1 << lw) - 1));
  endfunction

  function automatic int unsigned frag_offset(int unsigned i, int unsigned lw);
    return i >> lw;
  endfunction

  // Bits of j that select the read/write round of a block. The other lw bits
  // of j are exactly those that the bank function depends on, so the 2p
  // elements of one round always sit in 2p different banks.
  //   pass 2 (and single-pass N = N_part): bank bits are j[lw-1:0]
  //   pass 1 with stride 2^a: bank bits are j[lw-1-a:0] and j[s_part-a +: lw]
  function automatic int unsigned round_mask(logic pass2, int unsigned log_n,
                                             int unsigned s_part, int unsigned lw);
    int unsigned a;
    int unsigned bank_bits;
    bank_bits = 0;
    a = pass2 ? 0 : (log_n - s_part);
    for (int unsigned b = 0; b < s_part; b++) begin
      if (b + a < lw) bank_bits |= (32'd1 << b);
      if (b + a >= s_part && b + a < s_part + lw) bank_bits |= (32'd1 << b);
    end
    return ((32'd1 << s_part) - 1) & ~bank_bits;
  endfunction

  // Deposit the round number r into the bits of mask and the slot number s
  // into the remaining bits: the block position read in slot s of round r.
  function automatic int unsigned deposit(int unsigned r, int unsigned s,
                                          int unsigned mask, int unsigned s_part);
    int unsigned j, ri, si;
    j = 0; ri = 0; si = 0;
    for (int unsigned b = 0; b < s_part; b++) begin
      if (mask[b]) begin
        j |= ((r >> ri) & 1) << b;
        ri++;
      end else begin
        j |= ((s >> si) & 1) << b;
        si++;
      end
    end
    return j;
  endfunction

  // Global index of block position j.
  function automatic int unsigned global_index(blk_tag_t tag, int unsigned j,
                                               int unsigned s_part);
    if (tag.pass2) return (int'(tag.blk) << s_part) + j;
    else           return int'(tag.blk) + (j << (int'(tag.log_n) - s_part));
  endfunction

  // Number of leading core stages in Swap Mode (paper: Butterfly Mode is used
  // for the last S - S_part*floor((S-1)/S_part) stages).
  function automatic int unsigned n_swap(blk_tag_t tag, int unsigned s_part);
    if (!tag.pass2) return 0;
    return 2 * s_part - int'(tag.log_n);
  endfunction

  // Position j carried by lane l in round t inside the core.
  //   arrangement A (dependent stages, k < lw-1):
  //       j[s_part-1 -: lw-1] = l[lw-1:1], j[0] = l[0], j[s_part-lw:1] = t
  //   arrangement B (independent stages):
  //       j[lw-1:0] = l, j[s_part-1:lw] = t
  function automatic int unsigned core_pos(logic arr_b, int unsigned t, int unsigned l,
                                           int unsigned s_part, int unsigned lw);
    if (arr_b) return (t << lw) | l;
    else       return ((l >> 1) << (s_part - lw + 1)) | (t << 1) | (l & 1);
  endfunction

  // Lane of element e of stream s of NTTU u in core stage k. The bit that
  // tells the two butterfly inputs apart sits at lane bit pb; in dependent
  // stages it is the element bit e (both inputs of a BU come from one
  // stream), in independent stages it is the stream bit s (one input from
  // each stream).
  function automatic int unsigned nttu_lane(int unsigned k, int unsigned u, int unsigned s,
                                            int unsigned e, int unsigned s_part,
                                            int unsigned lw);
    int unsigned pb, rest, ins;
    logic dep;
    dep  = (k < lw - 1);
    pb   = dep ? (lw - 1 - k) : (s_part - 1 - k);
    rest = dep ? ((u << 1) | s) : ((u << 1) | e);
    ins  = dep ? e : s;
    return ((rest >> pb) << (pb + 1)) | (ins << pb) | (rest & ((32'd1 << pb) - 1));
  endfunction

  // Twiddle-table index used by the butterfly whose upper input is global
  // index i in global stage g: psi_rev[2^g + floor(i / 2^(log_n - g))].
  function automatic int unsigned tw_index(int unsigned g, int unsigned i,
                                           int unsigned log_n);
    return (32'd1 << g) + (i >> (log_n - g));
  endfunction

endpackage
