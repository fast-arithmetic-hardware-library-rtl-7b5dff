// he_pkg: sizes, moduli and constant functions shared by the RLWE arithmetic blocks.
//
// The default configuration is a ring of degree N = 1024 with a 1200-bit ciphertext
// modulus Q split into K = 40 residue lanes of QW = 30 bits each (these four numbers are
// the ones the arithmetic library is evaluated with). The 40 lane moduli are not listed
// anywhere else, so this design picks the 40 largest primes below 2^30 that satisfy
// q = 1 (mod 2N), which makes every lane NTT-friendly; their product is exactly 1200
// bits wide. PSI_TABLE holds one primitive 2N-th root of unity per modulus (psi, with
// psi^2 = omega a primitive N-th root), found by search off-line. Everything else a block
// needs (Barrett factors, inverses, fold constants, CRT constants) is derived from these
// two tables by the constant functions below at elaboration time.
package he_pkg;

  localparam int unsigned N    = 1024;     // polynomial degree
  localparam int unsigned LOGN = 10;
  localparam int unsigned K    = 40;       // number of RNS moduli
  localparam int unsigned QW   = 30;       // bits per residue
  localparam int unsigned BW   = 1200;     // bits of a full coefficient (K*QW)
  localparam int unsigned KMAX = 40;

  typedef logic [QW-1:0] res_t;

  // Lane moduli: q_i = 1 mod 2048, 2^29 < q_i < 2^30, listed from the largest down.
  localparam logic [29:0] Q_TABLE [KMAX] = '{
    30'd1073707009, 30'd1073698817, 30'd1073692673, 30'd1073682433, 30'd1073668097,
    30'd1073655809, 30'd1073651713, 30'd1073643521, 30'd1073620993, 30'd1073600513,
    30'd1073569793, 30'd1073563649, 30'd1073551361, 30'd1073539073, 30'd1073522689,
    30'd1073510401, 30'd1073508353, 30'd1073479681, 30'd1073453057, 30'd1073442817,
    30'd1073440769, 30'd1073430529, 30'd1073412097, 30'd1073391617, 30'd1073385473,
    30'd1073354753, 30'd1073350657, 30'd1073330177, 30'd1073299457, 30'd1073268737,
    30'd1073264641, 30'd1073233921, 30'd1073213441, 30'd1073184769, 30'd1073166337,
    30'd1073135617, 30'd1073080321, 30'd1073072129, 30'd1073053697, 30'd1073029121};

  // Primitive 2048-th roots of unity, one per modulus above.
  localparam logic [29:0] PSI_TABLE [KMAX] = '{
    30'd110668061,  30'd1001574163, 30'd295993548,  30'd799212603,  30'd409813024,
    30'd114328893,  30'd581873785,  30'd605292108,  30'd756759309,  30'd973648818,
    30'd88718793,   30'd343320694,  30'd864074859,  30'd184043075,  30'd925791024,
    30'd454604048,  30'd104642234,  30'd530309095,  30'd224167686,  30'd134696397,
    30'd414367352,  30'd597578740,  30'd316619687,  30'd327477365,  30'd361475001,
    30'd71457192,   30'd254659886,  30'd591368872,  30'd971382199,  30'd488804676,
    30'd965843960,  30'd567391997,  30'd993152931,  30'd944327827,  30'd810376639,
    30'd56841637,   30'd274671263,  30'd594565708,  30'd964357737,  30'd354703458};

  // Operations of the accelerator top.
  typedef enum logic [2:0] {
    OP_ADD     = 3'd0,   // c = a + d
    OP_MAC     = 3'd1,   // c = a * b + d   (negacyclic product)
    OP_RELIN   = 3'd2,   // c = d + sum_i bit_i(a) * rlk[i]
    OP_KEYGEN  = 3'd3,   // rlk[i] = 2^i * a          for all i (a = s^2)
    OP_KEYMASK = 3'd4    // rlk[pass] = rlk[pass] + d
  } op_e;

  // ---------------------------------------------------------------- constant helpers
  function automatic logic [63:0] mulmod64(input logic [63:0] a, input logic [63:0] b,
                                           input logic [63:0] q);
    logic [127:0] p;
    p = a * b;
    return 64'(p % q);
  endfunction

  function automatic logic [63:0] powmod64(input logic [63:0] a, input logic [63:0] e,
                                           input logic [63:0] q);
    logic [63:0] r, b, x;
    r = 1; b = a % q; x = e;
    while (x != 0) begin
      if (x[0]) r = mulmod64(r, b, q);
      b = mulmod64(b, b, q);
      x = x >> 1;
    end
    return r;
  endfunction

  function automatic logic [63:0] invmod64(input logic [63:0] a, input logic [63:0] q);
    return powmod64(a, q - 2, q);
  endfunction

  // Barrett factor floor(2^aw / q) for inputs of aw bits.
  function automatic logic [127:0] barrett_mu(input logic [63:0] q, input int aw);
    logic [255:0] one;
    one = 256'd1 << aw;
    return 128'(one / q);
  endfunction

  // ceil(log2 q)
  function automatic int clog2_64(input logic [63:0] q);
    return $clog2(q);
  endfunction

  // 2^(QW*j) mod q, the fold constant of chunk j in the RNS conversion.
  function automatic logic [QW-1:0] fold_const(input logic [63:0] q, input int j);
    return QW'(powmod64(64'd2, 64'(QW * j), q));
  endfunction

  // Product of the first k moduli.
  function automatic logic [BW-1:0] big_q(input int k);
    logic [BW-1:0] p;
    p = 1;
    for (int i = 0; i < k; i++) p = BW'(p * Q_TABLE[i]);
    return p;
  endfunction

  // CRT constant c_i = (Q/q_i) * ((Q/q_i)^-1 mod q_i), always < Q.
  function automatic logic [BW-1:0] crt_const(input int i, input int k);
    logic [BW-1:0] qi_big;
    logic [63:0]   qi_mod, inv;
    logic [BW+QW-1:0] c;
    qi_big = 1;
    qi_mod = 1;
    for (int j = 0; j < k; j++)
      if (j != i) begin
        qi_big = BW'(qi_big * Q_TABLE[j]);
        qi_mod = mulmod64(qi_mod, 64'(Q_TABLE[j]), 64'(Q_TABLE[i]));
      end
    inv = invmod64(qi_mod, 64'(Q_TABLE[i]));
    c = qi_big * inv;
    return BW'(c);
  endfunction

  // Modified Barrett constants: k = floor(floor(log2 q) / 2), r = ceil(2^(3k) / q).
  function automatic int mbr_k(input logic [63:0] q);
    return ($clog2(q + 1) - 1) / 2;
  endfunction

  function automatic logic [63:0] mbr_r(input logic [63:0] q);
    logic [127:0] num;
    num = 128'd1 << (3 * mbr_k(q));
    return 64'((num + 128'(q) - 1) / 128'(q));
  endfunction

  // Constants of one residue lane for a ring of degree n (n a power of two, n <= 1024):
  // the modulus, its Barrett factor for 2*QW-bit inputs, psi (a primitive 2n-th root),
  // omega = psi^2, their inverses, n^-1 and the modified-Barrett pair (k, r).
  typedef struct packed {
    logic [QW-1:0]   q;
    logic [QW+1:0]   mu;
    logic [QW-1:0]   psi;
    logic [QW-1:0]   psi_inv;
    logic [QW-1:0]   omega;
    logic [QW-1:0]   omega_inv;
    logic [QW-1:0]   n_inv;
    logic [5:0]      mbr_k;
    logic [QW/2+2:0] mbr_r;
  } lane_const_t;

  function automatic lane_const_t lane_consts(input int lane, input int n);
    lane_const_t c;
    logic [63:0] q, psi, om;
    q           = 64'(Q_TABLE[lane]);
    psi         = powmod64(64'(PSI_TABLE[lane]), 64'(1024 / n), q);
    om          = mulmod64(psi, psi, q);
    c.q         = QW'(q);
    c.mu        = (QW+2)'(barrett_mu(q, 2 * QW));
    c.psi       = QW'(psi);
    c.psi_inv   = QW'(invmod64(psi, q));
    c.omega     = QW'(om);
    c.omega_inv = QW'(invmod64(om, q));
    c.n_inv     = QW'(invmod64(64'(n), q));
    c.mbr_k     = 6'(mbr_k(q));
    c.mbr_r     = (QW/2+3)'(mbr_r(q));
    return c;
  endfunction

endpackage
