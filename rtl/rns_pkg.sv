// rns_pkg: shared types, constants and elaboration-time functions of the
// reconfigurable residue number system (RNS) processor.
//
// The processor works on a moduli set that is not typed in by hand but
// generated from two numbers: the binary word width N and the cardinality
// (number of moduli) NMOD. find_modulus() implements the moduli-set search:
//   x  = ceil( (2^N-1)^(1/NMOD) ), rounded up to an even number "2n";
//   the first three moduli are 2n, 2n+1, 2n-1 (always pairwise co-prime);
//   for NMOD = 3, 2n is raised in steps of 2 until (2n)(2n+1)(2n-1) >= 2^N-1;
//   for every further modulus j (j = 3 .. NMOD-1):
//     k   = ceil( (2^N-1) / product of the moduli found so far ),
//     k^j = ceil( k^(1/(NMOD-j)) ),
//     k_j = the smallest number >= k^j co-prime to all moduli found so far.
// With N = 32 and NMOD = 3 this gives {1626, 1627, 1625}, the processor's
// default. The functions run only while the design is elaborated; no
// hardware is built for them.
//
// The CRT helpers give the dynamic range M (product of the moduli), the
// residue width, the binary width of M-1 and the multiplicative inverse of
// M/m_i modulo m_i that the RNS-to-binary converter needs.
//
// The control word ctrl_t is one step of a function program. Its fields are
// named after the multiplexer selects SM1..SM7. The select codes 000 (BtoR
// converter 1), 001 (BtoR converter 2), 101 (adder) for SM1..SM6 and 000
// (multiplier) for SM7 follow the paper's worked example; the codes of the
// subtractor and multiplier at the input multiplexers, of the adder and
// subtractor at the output multiplexer, and all other fields (operand
// sources, write enables, repeat and last flags) are this design's choice.
package rns_pkg;

  // Largest cardinality the elaboration functions support.
  localparam int MAXMOD = 16;

  // Number of function blocks in the programmable memory and steps per block.
  localparam int NFUNC = 3;
  localparam int STEPS = 8;

  // ------------------------------------------------------------------
  // Integer helpers (64-bit, elaboration time)
  // ------------------------------------------------------------------

  // x^e, saturated at 2^63 so that comparisons stay meaningful.
  function automatic longint unsigned ipow_sat(longint unsigned x, int e);
    longint unsigned r = 1;
    for (int i = 0; i < e; i++) begin
      if (x != 0 && r > (64'h8000_0000_0000_0000 / x)) return 64'h8000_0000_0000_0000;
      r = r * x;
    end
    return r;
  endfunction

  // Smallest x >= 1 with x^e >= v (ceiling of the e-th root), by bisection.
  function automatic longint unsigned ceil_root(longint unsigned v, int e);
    longint unsigned lo = 1, hi = 64'h1_0000_0000, mid;
    if (e <= 1) return (v == 0) ? 1 : v;
    if (v <= 1) return 1;
    while (lo < hi) begin
      mid = lo + (hi - lo) / 2;
      if (ipow_sat(mid, e) >= v) hi = mid;
      else lo = mid + 1;
    end
    return lo;
  endfunction

  function automatic longint unsigned gcd(longint unsigned a, longint unsigned b);
    longint unsigned t;
    while (b != 0) begin
      t = a % b;
      a = b;
      b = t;
    end
    return a;
  endfunction

  function automatic int clog2_64(longint unsigned v);
    int r = 0;
    longint unsigned p = 1;
    while (p < v) begin
      p = p << 1;
      r++;
    end
    return r;
  endfunction

  // ------------------------------------------------------------------
  // Moduli-set generation
  // ------------------------------------------------------------------

  // Modulus number idx (0-based) of the set generated for width n_bits and
  // cardinality card. Order: 2n, 2n+1, 2n-1, k1, k2, ...
  function automatic longint unsigned find_modulus(int n_bits, int card, int idx);
    longint unsigned set_m[MAXMOD];
    longint unsigned v, x, two_n, prod, k, kr, cand;
    bit ok;
    v = (64'd1 << n_bits) - 1;
    x = ceil_root(v, card);
    two_n = (x % 2 == 0) ? x : x + 1;
    if (card == 3)
      while (two_n * (two_n + 1) * (two_n - 1) < v) two_n += 2;
    set_m[0] = two_n;
    set_m[1] = two_n + 1;
    set_m[2] = two_n - 1;
    prod = two_n * (two_n + 1) * (two_n - 1);
    for (int j = 3; j < card && j < MAXMOD; j++) begin
      k    = (v + prod - 1) / prod;
      kr   = ceil_root(k, card - j);
      cand = (kr < 2) ? 2 : kr;
      do begin
        ok = 1'b1;
        for (int i = 0; i < j; i++)
          if (gcd(cand, set_m[i]) != 1) ok = 1'b0;
        if (!ok) cand++;
      end while (!ok);
      set_m[j] = cand;
      prod = prod * cand;
    end
    return set_m[idx];
  endfunction

  // Dynamic range M: product of all moduli.
  function automatic longint unsigned dyn_range(int n_bits, int card);
    longint unsigned p = 1;
    for (int i = 0; i < card; i++) p = p * find_modulus(n_bits, card, i);
    return p;
  endfunction

  // Bits of one residue lane: enough for the largest modulus minus one.
  function automatic int res_width(int n_bits, int card);
    int w = 1;
    for (int i = 0; i < card; i++)
      if (clog2_64(find_modulus(n_bits, card, i)) > w) w = clog2_64(find_modulus(n_bits, card, i));
    return w;
  endfunction

  // Bits of a binary value in [0, M).
  function automatic int bin_width(int n_bits, int card);
    return clog2_64(dyn_range(n_bits, card));
  endfunction

  // Sum over the moduli of ceil(log2 m_i): the bit count used to compare sets.
  function automatic int set_bits(int n_bits, int card);
    int s = 0;
    for (int i = 0; i < card; i++) s += clog2_64(find_modulus(n_bits, card, i));
    return s;
  endfunction

  // Inverse of a modulo m (a and m co-prime), by the extended Euclid method.
  function automatic longint unsigned mod_inverse(longint unsigned a, longint unsigned m);
    longint signed t = 0, newt = 1, q, tmp;
    longint signed r = longint'(m), newr = longint'(a % m);
    if (m == 1) return 0;
    while (newr != 0) begin
      q    = r / newr;
      tmp  = t - q * newt; t = newt; newt = tmp;
      tmp  = r - q * newr; r = newr; newr = tmp;
    end
    if (t < 0) t = t + longint'(m);
    return longint'(t);
  endfunction

  // CRT weight of lane idx: |(M/m_i)^-1|_(m_i).
  function automatic longint unsigned crt_inv(int n_bits, int card, int idx);
    longint unsigned mi = find_modulus(n_bits, card, idx);
    return mod_inverse((dyn_range(n_bits, card) / mi) % mi, mi);
  endfunction

  // ------------------------------------------------------------------
  // Control word
  // ------------------------------------------------------------------

  // Source selected by one of the six 5:1 input multiplexers (SM1..SM6).
  typedef enum logic [2:0] {
    SRC_CONV1 = 3'b000,
    SRC_CONV2 = 3'b001,
    SRC_ADD   = 3'b101,
    SRC_SUB   = 3'b110,
    SRC_MUL   = 3'b111
  } src_e;

  // Unit selected by the output multiplexer (SM7).
  typedef enum logic [2:0] {
    OUT_MUL = 3'b000,
    OUT_ADD = 3'b001,
    OUT_SUB = 3'b010
  } osel_e;

  // Binary value fed to a BtoR converter (or used as a repeat count).
  typedef enum logic [1:0] {
    OPD_X   = 2'd0,
    OPD_Y   = 2'd1,
    OPD_Z   = 2'd2,
    OPD_IMM = 2'd3
  } opd_e;

  typedef struct packed {
    logic  last;       // final step of the function block
    logic  rep;        // execute this step rep_src times (0 times: skip it)
    opd_e  rep_src;    // operand giving the repeat count
    opd_e  conv1_src;  // binary input of BtoR converter 1
    opd_e  conv2_src;  // binary input of BtoR converter 2
    src_e  sm1;        // adder input A
    src_e  sm2;        // adder input B
    src_e  sm3;        // subtractor input A (minuend)
    src_e  sm4;        // subtractor input B (subtrahend)
    src_e  sm5;        // multiplier input A
    src_e  sm6;        // multiplier input B
    osel_e sm7;        // output multiplexer
    logic  out_en;     // output multiplexer enabled: load the binary result
    logic  we_add;     // adder result register (TEMP1) loads
    logic  we_sub;     // subtractor result register loads
    logic  we_mul;     // multiplier result register (TEMP2) loads
  } ctrl_t;


  // A step that does nothing.
  localparam ctrl_t CTRL_NOP = '{last: 1'b0, rep: 1'b0, rep_src: OPD_X, conv1_src: OPD_X,
                                 conv2_src: OPD_X, sm1: SRC_CONV1, sm2: SRC_CONV1,
                                 sm3: SRC_CONV1, sm4: SRC_CONV1, sm5: SRC_CONV1,
                                 sm6: SRC_CONV1, sm7: OUT_MUL, out_en: 1'b0,
                                 we_add: 1'b0, we_sub: 1'b0, we_mul: 1'b0};

  // Programs loaded into the function memory at reset.
  //   Function 1 (block 0): (X + Y) * Z
  //     step 0: X -> conv1, Y -> conv2, SM1 = 000, SM2 = 001, TEMP1 = x + y
  //     step 1: Z -> conv2, SM5 = 101, SM6 = 001,             TEMP2 = TEMP1 * z
  //     step 2: SM7 = 000, enabled: result = RtoB(TEMP2)
  //   Function 2 (block 1): X ^ Y (POWER, built on the multiplier)
  //     step 0: imm 1 -> conv2, SM5 = SM6 = 001,              TEMP2 = 1
  //     step 1: repeated Y times: SM5 = 111, SM6 = 000,       TEMP2 = TEMP2 * x
  //     step 2: SM7 = 000, enabled
  //   Function 3 (block 2): a single ending no-op, left for the host to program.
  function automatic ctrl_t default_ctrl(int func, int step);
    ctrl_t c = CTRL_NOP;
    case (func)
      0: case (step)
           0: begin c.conv1_src = OPD_X; c.conv2_src = OPD_Y;
                    c.sm1 = SRC_CONV1; c.sm2 = SRC_CONV2; c.we_add = 1'b1; end
           1: begin c.conv2_src = OPD_Z; c.sm5 = SRC_ADD; c.sm6 = SRC_CONV2; c.we_mul = 1'b1; end
           2: begin c.sm7 = OUT_MUL; c.out_en = 1'b1; c.last = 1'b1; end
           default: ;
         endcase
      1: case (step)
           0: begin c.conv1_src = OPD_X; c.conv2_src = OPD_IMM;
                    c.sm5 = SRC_CONV2; c.sm6 = SRC_CONV2; c.we_mul = 1'b1; end
           1: begin c.rep = 1'b1; c.rep_src = OPD_Y; c.conv1_src = OPD_X;
                    c.sm5 = SRC_MUL; c.sm6 = SRC_CONV1; c.we_mul = 1'b1; end
           2: begin c.sm7 = OUT_MUL; c.out_en = 1'b1; c.last = 1'b1; end
           default: ;
         endcase
      default: if (step == 0) c.last = 1'b1;
    endcase
    return c;
  endfunction

  // Immediate operand stored with a default step (only POWER's constant 1).
  function automatic longint unsigned default_imm(int func, int step);
    return (func == 1 && step == 0) ? 64'd1 : 64'd0;
  endfunction

endpackage
