// lscd_pkg: types shared by the list successive-cancellation (LSC) decoder.
//
// The decoder works on source-bit couples (u[2c], u[2c+1]). Every source bit
// is of one of three kinds, read from the flag ROM: frozen, reliable
// information bit (decided by hard decision, never expanded) or unreliable
// information bit (expanded into two paths and pruned by the list manager).
// The control unit issues one operation per clock cycle, described by ctrl_t.
// The 2-bit kind encoding and the operation set are choices of this design.
package lscd_pkg;

  // Kind of a source bit, as stored in the 2N-bit flag ROM.
  typedef enum logic [1:0] {
    KIND_FROZEN     = 2'd0,
    KIND_RELIABLE   = 2'd1,
    KIND_UNRELIABLE = 2'd2
  } bit_kind_e;

  // One clock-cycle operation of the decoder.
  typedef enum logic [2:0] {
    OP_IDLE  = 3'd0,  // nothing
    OP_NODE  = 3'd1,  // one word of an f or g node at stage >= 1
    OP_LEAF0 = 3'd2,  // leaf f node of bit 2c (with PMU)
    OP_LEAF1 = 3'd3,  // leaf g node of bit 2c+1 (with PMU)
    OP_DTS   = 3'd4,  // list pruning (DTS) and lazy copy
    OP_DONE  = 3'd5   // decoding finished, result held
  } op_e;

  // Which source bits a state-memory commit writes.
  typedef enum logic [1:0] {
    CM_EVEN = 2'd0,   // bit 2c alone (value u0)
    CM_ODD  = 2'd1,   // bit 2c+1 alone (value u1)
    CM_PAIR = 2'd2    // bits 2c and 2c+1 together (u0, u1)
  } commit_mode_e;

  // Control word issued by the control unit each cycle. Widths are sized
  // for N up to 2^15.
  typedef struct packed {
    op_e          op;
    logic         is_g;     // node is a g node (else f)
    logic         fuse;     // stage-1 node that also decides the couple (cases I, II, IV)
    logic         second;   // OP_DTS: pruning after bit 2c+1 (else after bit 2c)
    logic [3:0]   stage;    // output stage t of the node (0 for leaves)
    logic [15:0]  word;     // output word index within the stage
    logic [15:0]  couple;   // couple index c
    bit_kind_e    kind0;    // kind of bit 2c
    bit_kind_e    kind1;    // kind of bit 2c+1
    logic [15:0]  info_pos; // number of information bits decided before this couple bit
  } ctrl_t;

  // Source-bit couple cases of the latency analysis (a_r reliable, a_f frozen).
  typedef enum logic [2:0] {
    CASE_I   = 3'd1,  // reliable, reliable
    CASE_II  = 3'd2,  // frozen, reliable
    CASE_III = 3'd3,  // unreliable, reliable
    CASE_IV  = 3'd4,  // frozen, frozen
    CASE_V   = 3'd5,  // frozen, unreliable
    CASE_VI  = 3'd6,  // unreliable, unreliable
    CASE_NA  = 3'd7   // combination that a polar code does not produce
  } couple_case_e;

  function automatic couple_case_e classify(input bit_kind_e k0, input bit_kind_e k1);
    if (k0 == KIND_RELIABLE   && k1 == KIND_RELIABLE)   return CASE_I;
    if (k0 == KIND_FROZEN     && k1 == KIND_RELIABLE)   return CASE_II;
    if (k0 == KIND_UNRELIABLE && k1 == KIND_RELIABLE)   return CASE_III;
    if (k0 == KIND_FROZEN     && k1 == KIND_FROZEN)     return CASE_IV;
    if (k0 == KIND_FROZEN     && k1 == KIND_UNRELIABLE) return CASE_V;
    if (k0 == KIND_UNRELIABLE && k1 == KIND_UNRELIABLE) return CASE_VI;
    return CASE_NA;
  endfunction

  // A couple is decided inside its stage-1 node (no leaf cycles) in cases I, II, IV.
  function automatic logic is_fused(input bit_kind_e k0, input bit_kind_e k1);
    couple_case_e c;
    c = classify(k0, k1);
    return (c == CASE_I) || (c == CASE_II) || (c == CASE_IV);
  endfunction

endpackage
