// medha_pkg: constants, types and the instruction format shared by the
// accelerator. The sizes (degree N = 2^14, 16 butterfly cores per RPAU,
// 4 dyadic cores, 10 RPAUs, 60-bit residues, 13 ciphertext residue
// polynomial memories plus 2 x 9 key-switching-key slots) are the values
// of the published FPGA implementation. The instruction encoding, the
// polynomial slot numbering and the configuration map are this design's
// own, because no binary format is published.
package medha_pkg;

  // ---------------------------------------------------------------------
  // Default sizes
  // ---------------------------------------------------------------------
  localparam int unsigned W_DEF        = 60;     // residue width (60/54-bit moduli)
  localparam int unsigned N_DEF        = 16384;  // ring degree handled in hardware
  localparam int unsigned CORES_DEF    = 16;     // butterfly cores per RPAU
  localparam int unsigned DYD_DEF      = 4;      // dyadic cores per RPAU
  localparam int unsigned NUM_RPAU_DEF = 10;     // RPAUs on the ring
  localparam int unsigned MUL_LAT_DEF  = 20;     // modular multiplier pipeline depth
  localparam int unsigned NUM_RPM      = 13;     // ciphertext residue polynomial memories
  localparam int unsigned NUM_KSK      = 9;      // key slots per key component
  localparam int unsigned NUM_POLY     = NUM_RPM + 2 * NUM_KSK; // 31
  localparam int unsigned POLY_W       = 5;
  localparam int unsigned NUM_SCALAR   = 16;     // per-RPAU scalar registers
  localparam int unsigned MASK_W       = 16;     // RPAU mask width in instructions

  // Polynomial slot numbers: 0..12 RPM-0..12, 13..21 KSK0-0..8, 22..30 KSK1-0..8
  localparam logic [POLY_W-1:0] KSK0_BASE = POLY_W'(NUM_RPM);
  localparam logic [POLY_W-1:0] KSK1_BASE = POLY_W'(NUM_RPM + NUM_KSK);

  // ---------------------------------------------------------------------
  // Butterfly / dyadic core modes
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] {
    BF_DIT = 3'd0,  // (u + w t, u - w t), u enters MUL_LAT cycles after t
    BF_DIF = 3'd1,  // ((u + t)/2, (u - t) w / 2)
    BF_ADD = 3'd2,  // u + t  (on the u output)
    BF_SUB = 3'd3,  // u - t  (on the u output)
    BF_MUL = 3'd4   // t * w  (on the t output)
  } bf_mode_e;

  typedef enum logic [1:0] {
    DY_ADD = 2'd0, DY_SUB = 2'd1, DY_MUL = 2'd2, DY_MAC = 2'd3
  } dy_mode_e;

  // ---------------------------------------------------------------------
  // Instruction set
  // ---------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    // RPAU.All (main core) instructions
    OP_NTT    = 5'd1,   // in place forward NTT of dst, twiddle ring = ring
    OP_INTT   = 5'd2,   // in place inverse NTT of dst
    OP_CADD   = 5'd3,   // dst = src1 + src2
    OP_CSUB   = 5'd4,   // dst = src1 - src2
    OP_CMUL   = 5'd5,   // dst = src1 * src2
    OP_CSCALE = 5'd6,   // dst = src1 * scalar[sidx] (also modular reduction by 1)
    OP_SPLIT  = 5'd7,   // (src1, src2) = (src1 + s*src2, src1 - s*src2), s = scalar[sidx]
    OP_JOIN   = 5'd8,   // (src1, src2) = ((src1+src2)/2, (src1-src2)*s/2)
    OP_AUTO   = 5'd9,   // dst = automorphism(src1, galois)
    OP_BCAST  = 5'd10,  // RPAU sidx sends src1, every other RPAU stores it in dst
    // RPAU.Dyadic instructions
    OP_DADD   = 5'd16,  // dst = src1 + src2
    OP_DSUB   = 5'd17,  // dst = src1 - src2
    OP_DMUL   = 5'd18,  // dst = src1 * src2
    OP_DMAC   = 5'd19,  // dst = dst + src1 * src2
    OP_DMACK  = 5'd20,  // dst = dst + src1 * KSK0(seed[sidx])  (key generated on the fly)
    // Program-flow instructions (take no RPAU cycles)
    OP_SYNC   = 5'd24,  // wait until main and dyadic groups of the masked RPAUs are idle
    OP_SYNCC  = 5'd25,  // wait for the other program controller
    OP_END    = 5'd31
  } opcode_e;

  typedef struct packed {
    opcode_e             op;
    logic [MASK_W-1:0]   mask;    // RPAUs that execute the instruction
    logic [POLY_W-1:0]   dst;
    logic [POLY_W-1:0]   src1;
    logic [POLY_W-1:0]   src2;
    logic [1:0]          ring;    // twiddle ring: 0 = x^N - z^N, 1 = x^N + z^N, 2 = x^N + 1
    logic [3:0]          sidx;    // scalar / seed index, or broadcasting RPAU
    logic [15:0]         galois;  // Galois element for OP_AUTO (odd)
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  function automatic logic is_main_op(opcode_e op);
    return (op inside {OP_NTT, OP_INTT, OP_CADD, OP_CSUB, OP_CMUL, OP_CSCALE,
                       OP_SPLIT, OP_JOIN, OP_AUTO, OP_BCAST});
  endfunction

  function automatic logic is_dyd_op(opcode_e op);
    return (op inside {OP_DADD, OP_DSUB, OP_DMUL, OP_DMAC, OP_DMACK});
  endfunction

  // ---------------------------------------------------------------------
  // Per-RPAU configuration map (written by the host before a program)
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] {
    CFG_Q      = 3'd0,  // modulus q
    CFG_MU     = 3'd1,  // Barrett constant floor(2^(2W)/q)
    CFG_SCALAR = 3'd2,  // scalar[addr]
    CFG_SEED   = 3'd3,  // PRNG seed[addr]
    CFG_TF     = 3'd4,  // twiddle table: addr = {core, dir, index}
    CFG_TFSCL  = 3'd5,  // twiddle ring scale: addr = {ring, dir, stage}
    CFG_QBITS  = 3'd6   // bit length of q (for the PRNG sampler)
  } cfg_sel_e;

endpackage
