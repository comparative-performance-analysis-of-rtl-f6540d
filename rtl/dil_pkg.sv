// dil_pkg: constants, types and modular-arithmetic helpers shared by the
// Dilithium accelerator.
//
// The ring is Z_q[X]/(X^256+1) with q = 8380417 = 2^23 - 2^13 + 1 and the
// primitive 512th root of unity zeta = 1753, as in the CRYSTALS-Dilithium
// specification. Coefficients are kept fully reduced in [0, q) and the NTT is
// computed in the plain (non-Montgomery) domain; this is a choice of this
// design. mod_reduce46 uses the identity 2^23 = 2^13 - 1 (mod q) three times,
// which needs only shifts and adds, then one conditional subtraction.
// The twiddle table (zetas[k] = zeta^brv8(k) mod q) is computed by the constant
// function gen_zetas, so no number table is stored in a file.
package dil_pkg;

  localparam int unsigned QW = 23;                 // coefficient width
  localparam int unsigned N  = 256;                // polynomial degree
  localparam logic [QW-1:0] Q     = 23'd8380417;
  localparam logic [QW-1:0] ZETA  = 23'd1753;
  localparam logic [QW-1:0] NINV  = 23'd8347681;   // 256^-1 mod q

  typedef logic [QW-1:0] coef_t;

  // butterfly operating modes
  typedef enum logic [1:0] {
    BF_CT  = 2'd0,   // a' = a + w*b, b' = a - w*b          (forward NTT)
    BF_GS  = 2'd1,   // a' = a + b,   b' = (a - b)*w        (inverse NTT)
    BF_MUL = 2'd2    // a' = a,       b' = b*w              (pointwise / scaling)
  } bf_mode_e;

  // NTT core operations
  typedef enum logic [1:0] {
    NOP_NTT  = 2'd0,
    NOP_INTT = 2'd1,
    NOP_PWM  = 2'd2
  } ntt_op_e;

  // hash modes of the Keccak sponge
  typedef enum logic [1:0] {
    HM_SHAKE128 = 2'd0,
    HM_SHAKE256 = 2'd1,
    HM_SHA3_256 = 2'd2,
    HM_SHA3_512 = 2'd3
  } hash_mode_e;

  // sampler modes
  typedef enum logic [1:0] {
    SM_UNIFORM = 2'd0,   // 23-bit candidates < q          (ExpandA, SHAKE128)
    SM_ETA2    = 2'd1,   // 4-bit candidates < 15, 2 - t%5  (ExpandS eta = 2, SHAKE256)
    SM_ETA4    = 2'd2    // 4-bit candidates < 9,  4 - t    (ExpandS eta = 4, SHAKE256)
  } smp_mode_e;

  // accelerator commands (AXI4-Lite OP register, bits [3:0])
  typedef enum logic [3:0] {
    CMD_NONE   = 4'd0,
    CMD_LOAD   = 4'd1,   // stream 256 coefficients into a slot
    CMD_STORE  = 4'd2,   // stream 256 coefficients out of a slot
    CMD_NTT    = 4'd3,
    CMD_INTT   = 4'd4,
    CMD_PWM    = 4'd5,   // dst = a o b (coefficient-wise)
    CMD_HASH   = 4'd6,   // absorb stream, squeeze LEN words to stream
    CMD_SAMPLE = 4'd7    // SHAKE(seed) -> sampled polynomial in a slot
  } cmd_e;

  // command configuration held in the AXI4-Lite CMD and LEN registers
  typedef struct packed {
    cmd_e        cmd;
    hash_mode_e  hmode;
    smp_mode_e   smode;
    logic [1:0]  slot_a;
    logic [1:0]  slot_b;
    logic [1:0]  slot_dst;
    logic [15:0] len;      // output words of CMD_HASH
  } cmd_cfg_t;

  // AXI4-Lite register map (byte addresses)
  localparam logic [5:0] REG_CTRL   = 6'h00;  // W: bit0 = start
  localparam logic [5:0] REG_CMD    = 6'h04;  // RW: [3:0] cmd [5:4] hash mode [7:6] sampler mode
                                              //     [9:8] slot_a [13:12] slot_b [17:16] dst
  localparam logic [5:0] REG_LEN    = 6'h08;  // RW: [15:0] hash output words
  localparam logic [5:0] REG_STATUS = 6'h0C;  // R: [0] busy [1] done (sticky)
  localparam logic [5:0] REG_CYCLES = 6'h10;  // R: cycles of the last command

  function automatic coef_t mod_add(coef_t a, coef_t b);
    logic [QW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, Q}) s = s - {1'b0, Q};
    return s[QW-1:0];
  endfunction

  function automatic coef_t mod_sub(coef_t a, coef_t b);
    logic [QW:0] s;
    s = {1'b0, a} + {1'b0, Q} - {1'b0, b};
    if (s >= {1'b0, Q}) s = s - {1'b0, Q};
    return s[QW-1:0];
  endfunction

  // x < 2^46 -> x mod q
  function automatic coef_t mod_reduce46(logic [45:0] x);
    logic [36:0] r1;
    logic [26:0] r2;
    logic [23:0] r3;
    r1 = 37'(x[45:23]) * 37'd8191 + 37'(x[22:0]);   // < 2^36 + 2^23
    r2 = 27'(r1[36:23]) * 27'd8191 + 27'(r1[22:0]); // < 2^26 + 2^23
    r3 = 24'(r2[26:23]) * 24'd8191 + 24'(r2[22:0]); // < 2^23 + 2^17 < 2q
    if (r3 >= {1'b0, Q}) r3 = r3 - {1'b0, Q};
    return r3[QW-1:0];
  endfunction

  function automatic coef_t mod_mul(coef_t a, coef_t b);
    return mod_reduce46(46'(a) * 46'(b));
  endfunction

  function automatic logic [7:0] brv8(logic [7:0] k);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = k[7-i];
    return r;
  endfunction

  // zetas[k] = 1753^brv8(k) mod q, k = 0..255 (entry k at bits [23k +: 23])
  function automatic logic [N*QW-1:0] gen_zetas();
    logic [N*QW-1:0] z;
    logic [63:0] pw [N];
    pw[0] = 64'd1;
    for (int i = 1; i < N; i++) pw[i] = (pw[i-1] * 64'(ZETA)) % 64'(Q);
    for (int k = 0; k < N; k++) z[k*QW +: QW] = pw[brv8(8'(k))][QW-1:0];
    return z;
  endfunction

endpackage
