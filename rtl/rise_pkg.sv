// rise_pkg -- shared constants, types and address helpers of the RISE
// homomorphic-encryption edge accelerator.
//
// Coefficients are Q_W-bit residues modulo a runtime prime q. A polynomial of
// N = 2^logn coefficients lives in one bank group of NBANK single-port banks:
// element position p is stored in bank p[1:0], row p >> 2. Polynomials enter
// the accelerator at bit-reversed positions (the NTT_swap4 input order) and
// leave through the "bit manipulation" permutation phy_addr() that undoes the
// layout the NTT_swap4 stages leave behind.
package rise_pkg;

  parameter int unsigned Q_W      = 30;    // log q, one RNS limb
  parameter int unsigned LOGN_MAX = 14;    // largest N = 16384
  parameter int unsigned NBANK    = 4;     // 1RW banks per bank group
  parameter int unsigned STATE_W  = 1600;  // Keccak state / seed
  parameter int unsigned RATE_W   = 1088;  // PRNG output block
  parameter int unsigned BINOM_K  = 21;    // bits per Hamming weight
  parameter int unsigned MEM_AW   = 32;    // DMA word address width
  parameter int unsigned MEM_DW   = 32;    // DMA word width

  typedef logic [Q_W-1:0] coef_t;

  // BFU mode, encoding from the BFU decode table
  typedef enum logic [1:0] {
    BFU_BFLY  = 2'b00,
    BFU_BFLY1 = 2'b01,
    BFU_ADD   = 2'b10,
    BFU_MUL   = 2'b11
  } bfu_mode_e;

  // Accelerator command
  typedef enum logic [1:0] {
    OP_NONE   = 2'd0,
    OP_ENC_C0 = 2'd1,
    OP_ENC_C1 = 2'd2,
    OP_DEC    = 2'd3
  } rise_op_e;

  // Computation-controller operation
  typedef enum logic [2:0] {
    CMP_NTT   = 3'd0,   // forward NTT of one bank group, in place
    CMP_INTT  = 3'd1,   // inverse NTT (without the 1/N scaling)
    CMP_ADD   = 3'd2,   // BG1 <- BG0 + BG1
    CMP_MUL   = 3'd3,   // BG1 <- BG0 * BG1
    CMP_SCALE = 3'd4    // BG1 <- const * BG1
  } comp_op_e;

  // Error sampler distribution
  typedef enum logic {
    SMP_UNIFORM  = 1'b0,  // ternary {-1,0,1}, for mu
    SMP_BINOMIAL = 1'b1   // centred binomial, k = 21, for e0/e1
  } smp_dist_e;

  // Runtime configuration written by the host
  typedef struct packed {
    logic [3:0]  logn;
    coef_t       q;
    logic [2*Q_W-1:0] mu;      // floor(2^(2*Q_W) / q)
    coef_t       w_n;          // primitive N-th root of unity mod q
    coef_t       w_n_inv;      // its inverse
    coef_t       n_inv;        // N^-1 mod q
    logic [MEM_AW-1:0] addr_a; // pk0 / pk1 (enc), c1 (dec)
    logic [MEM_AW-1:0] addr_b; // m (enc c0), s (dec)
    logic [MEM_AW-1:0] addr_c; // c0 (dec)
    logic [MEM_AW-1:0] addr_out;
  } rise_cfg_t;

  // Bit-reverse the low logn bits of i.
  function automatic logic [LOGN_MAX-1:0] bitrev_n(input logic [LOGN_MAX-1:0] i,
                                                   input logic [3:0] logn);
    logic [LOGN_MAX-1:0] r;
    for (int b = 0; b < LOGN_MAX; b++) r[b] = i[LOGN_MAX-1-b];
    return r >> (LOGN_MAX - int'(logn));
  endfunction

  // Output permutation of NTT_swap4:
  // phy = {i[logn-3:2], i[logn-1:logn-2], i[1:0]}
  function automatic logic [LOGN_MAX-1:0] phy_addr(input logic [LOGN_MAX-1:0] i,
                                                   input logic [3:0] logn);
    logic [LOGN_MAX-1:0] mid, top2, lo_mask;
    lo_mask = (LOGN_MAX'(1) << (logn - 4'd2)) - 1'b1;      // bits [logn-3:0]
    top2    = (i >> (logn - 4'd2)) & LOGN_MAX'(3);
    mid     = (i & lo_mask) >> 2;                          // i[logn-3:2]
    return (mid << 4) | (top2 << 2) | (i & LOGN_MAX'(3));
  endfunction

endpackage
