// cirm_pkg: types, constants and code-construction functions shared by the
// CIRM-ECC racetrack-memory compute-in-memory datapath.
//
// Geometry follows the evaluated configuration: a 512-bit row split into
// eight 64-bit words, each word protected by a (72,64) SEC-DED Hamming code,
// so one row occupies 8 x 72 = 576 nanowires.  A DBC has 32 domains per
// nanowire and a subarray holds 16 DBCs.  The transverse-read distance (TRD),
// which is also the number of operands of one bulk-bitwise operation, is 3 as
// in the sense circuit the paper draws.  The Hamming bit placement (check
// bits at power-of-two positions, overall parity bit last) is this design's
// choice; the paper only names the "64-72 Hamming code".  For the 2-ECC
// configuration the package also provides GF(2^7) arithmetic and the
// constant columns of shortened (78,64) and (85,64) BCH codes (2-ECC and
// 3-ECC), evaluated at elaboration time; the paper names BCH codes but
// gives no construction.
package cirm_pkg;

  localparam int unsigned DATA_W      = 64;   // data bits per ECC word
  localparam int unsigned HAM_CHK_W   = 7;    // Hamming check bits
  localparam int unsigned HAM_CW_W    = 72;   // codeword: data, checks, overall parity
  localparam int unsigned WORDS       = 8;    // ECC words per row (512-bit operand)
  localparam int unsigned ROW_DATA_W  = WORDS * DATA_W;   // 512
  localparam int unsigned ROW_CW_W    = WORDS * HAM_CW_W; // 576 nanowires
  localparam int unsigned DOMAINS_DEF = 32;   // domains per nanowire
  localparam int unsigned NUM_DBC_DEF = 16;   // DBCs per subarray
  localparam int unsigned TRD_DEF     = 3;    // transverse-read distance = operands

  // Bulk-bitwise operation requested from one transverse read.
  typedef enum logic [2:0] {
    OP_AND  = 3'd0,
    OP_NAND = 3'd1,
    OP_OR   = 3'd2,
    OP_NOR  = 3'd3,
    OP_XOR  = 3'd4,
    OP_XNOR = 3'd5
  } cim_op_e;

  // Command accepted by the subarray controller.
  typedef enum logic [1:0] {
    CMD_WRITE = 2'd0,   // encode and store a row
    CMD_READ  = 2'd1,   // read a row with SEC-DED correction
    CMD_CIM   = 2'd2    // transverse-read bulk-bitwise operation
  } cmd_e;

  // How a sensing fault found by the ECC on the XOR result affects the
  // requested operation.
  typedef enum logic [1:0] {
    FC_NONE      = 2'd0,  // no fault flagged on this bit
    FC_NON_ERROR = 2'd1,  // fault, but the requested result is right anyway
    FC_DET_ERROR = 2'd2,  // fault, result known to be wrong: flip it
    FC_AMBIGUOUS = 2'd3   // fault, result cannot be inferred: reissue
  } fault_class_e;

  // Completion status of one command.
  typedef struct packed {
    logic [WORDS-1:0] uncorrectable;  // word had more faults than the code corrects
    logic [WORDS-1:0] ambiguous;      // word still ambiguous when reissues ran out
    logic [3:0]       reissues;       // transverse reads repeated for this command
    logic [9:0]       corrected;      // result bits flipped by correction
    logic             cmd_error;      // malformed command (operands outside one DBC)
  } status_t;

  // Hamming position (1..71) of data bit j: the j-th position that is not a
  // power of two, counting from 3.
  function automatic int unsigned ham_data_pos(int unsigned j);
    int unsigned cnt = 0;
    for (int unsigned p = 3; p < 128; p++) begin
      if ((p & (p - 1)) != 0) begin
        if (cnt == j) return p;
        cnt++;
      end
    end
    return 0;
  endfunction

  // Data bits covered by check bit i: those whose Hamming position has bit i
  // set.  Used as a constant mask, so the check bits are plain XOR trees.
  function automatic logic [DATA_W-1:0] ham_cover(int unsigned i);
    logic [DATA_W-1:0] m = '0;
    for (int unsigned j = 0; j < DATA_W; j++) begin
      int unsigned p = ham_data_pos(j);
      m[j] = p[i];
    end
    return m;
  endfunction


  // ------------------------------------------------------------------
  // Double-error-correcting BCH code for the 2-ECC configuration: the
  // (127,113) binary BCH code over GF(2^7), p(x) = x^7 + x^3 + 1, shortened
  // to 78 bits for a 64-bit word (14 check bits).  Codeword bit k holds the
  // coefficient of x^(k+14) for k < 64 (data) and of x^(k-64) for k >= 64
  // (check bits), so cw[63:0] is the data word as for the Hamming code.
  localparam int unsigned BCH_CHK_W = 14;
  localparam int unsigned BCH_CW_W  = DATA_W + BCH_CHK_W;   // 78
  localparam logic [7:0]  GF_POLY   = 8'h89;                // x^7 + x^3 + 1

  function automatic logic [6:0] gf_mul(logic [6:0] a, logic [6:0] b);
    logic [7:0] acc = '0;
    logic [7:0] x   = {1'b0, a};
    for (int i = 0; i < 7; i++) begin
      if (b[i]) acc ^= x;
      x = x << 1;
      if (x[7]) x ^= GF_POLY;
    end
    return acc[6:0];
  endfunction

  // alpha^e, alpha = x
  function automatic logic [6:0] gf_exp(int unsigned e);
    logic [6:0] r = 7'd1;
    for (int unsigned i = 0; i < e % 127; i++) r = gf_mul(r, 7'd2);
    return r;
  endfunction

  // multiplicative inverse, a^126 (0 maps to 0)
  function automatic logic [6:0] gf_inv(logic [6:0] a);
    logic [6:0] r = 7'd1;
    logic [6:0] sq = a;
    for (int i = 1; i < 7; i++) begin
      sq = gf_mul(sq, sq);   // a^(2^i)
      r  = gf_mul(r, sq);    // 126 = 2 + 4 + ... + 64
    end
    return r;
  endfunction

  // polynomial exponent of codeword bit k (t = 2 code)
  function automatic int unsigned bch_pos(int unsigned k);
    return (k < DATA_W) ? k + BCH_CHK_W : k - DATA_W;
  endfunction

  // generator polynomial of the t-error-correcting code (t = 2 or 3):
  // product of (x + alpha^i) over the cyclotomic cosets of alpha, alpha^3
  // and, for t = 3, alpha^5; bit i is the coefficient of x^i
  function automatic logic [21:0] bch_gen_t(int unsigned t);
    logic [6:0] c [22];
    logic [21:0] g;
    int unsigned roots [21] = '{1, 2, 4, 8, 16, 32, 64, 3, 6, 12, 24, 48, 96, 65,
                                5, 10, 20, 40, 80, 33, 66};
    int unsigned deg = 0;
    for (int i = 0; i < 22; i++) c[i] = '0;
    c[0] = 7'd1;
    for (int unsigned r = 0; r < 7 * t; r++) begin
      logic [6:0] a = gf_exp(roots[r]);
      deg++;
      for (int i = 21; i > 0; i--)
        if (i <= deg) c[i] = c[i-1] ^ gf_mul(a, c[i]);
      c[0] = gf_mul(a, c[0]);
    end
    for (int i = 0; i < 22; i++) g[i] = c[i][0];
    return g;
  endfunction

  function automatic logic [BCH_CHK_W:0] bch_gen();
    logic [21:0] g = bch_gen_t(2);
    return g[BCH_CHK_W:0];
  endfunction

  // check bits contributed by data bit j of the t-error-correcting code:
  // x^(j + 7t) mod g(x)
  function automatic logic [20:0] bch_col_t(int unsigned t, int unsigned j);
    logic [21:0] g = bch_gen_t(t);
    logic [21:0] r = 22'd1;
    logic [20:0] rem;
    int unsigned w = 7 * t;
    for (int unsigned i = 0; i < j + w; i++) begin
      r = r << 1;
      if (r[w]) r ^= g;
    end
    rem = r[20:0];
    return rem;
  endfunction

  function automatic logic [BCH_CHK_W-1:0] bch_col(int unsigned j);
    logic [20:0] c = bch_col_t(2, j);
    return c[BCH_CHK_W-1:0];
  endfunction

  // triple-error-correcting (85,64) code for the 3-ECC configuration:
  // (127,106) BCH shortened to 85 bits, same bit order as the t = 2 code
  localparam int unsigned BCH3_CHK_W = 21;
  localparam int unsigned BCH3_CW_W  = DATA_W + BCH3_CHK_W;   // 85

  function automatic int unsigned bch3_pos(int unsigned k);
    return (k < DATA_W) ? k + BCH3_CHK_W : k - DATA_W;
  endfunction

endpackage
