// tfhe_pkg -- shared types, constants and modular arithmetic for the TFHE processor.
//
// All ciphertext arithmetic is done in Z_q with the NTT-friendly Solinas prime
// q = 2^64 - 2^32 + 1.  The functions below are the combinational cores that the
// datapath modules instantiate:
//   * mod_add / mod_sub / mod_neg : "simple reduction", one conditional +-q.
//   * karatsuba_mul64            : 64x64 -> 128 bit product, Karatsuba with a
//                                  recursion depth of two (three 32-bit products,
//                                  each made of three 16-bit products).
//   * solinas_reduce             : "full reduction" of a 128-bit product using
//                                  2^96 = -1 and 2^64 = 2^32 - 1 (mod q):
//                                  v = a*2^96 + b*2^64 + c*2^32 + d
//                                    = (b + c)*2^32 + d - a - b  (mod q).
//   * const_mul / const_pow /    : elaboration-time helpers used only to fill
//     psi_root / twiddle_exp       the twiddle-factor ROMs.
// The choice of prime, the reduction identity and the Karatsuba depth follow the
// paper.  The final correction after the Solinas fold is done here with a short
// chain of conditional subtractions (the folded value can reach about 5q), which
// is this design's own choice.
// The multiplicative generator 7 of Z_q is used to derive the primitive 2N-th root
// of unity psi = 7^((q-1)/2N); the testbenches check psi^N = -1.
package tfhe_pkg;

  typedef logic [63:0] coef_t;

  localparam coef_t Q = 64'hFFFF_FFFF_0000_0001;
  localparam coef_t GENERATOR = 64'd7;

  // Instruction opcodes of the processor (two bits, as sized in the paper).
  typedef enum logic [1:0] {
    OP_PBS    = 2'd0,
    OP_MULADD = 2'd1,
    OP_KS     = 2'd2,
    OP_NOP    = 2'd3
  } opcode_e;

  // One processor instruction.  The paper sizes an instruction as three 64-bit
  // data addresses, log2(N) bits of sample-extract index and a two-bit opcode; the
  // key index and the two MulAdd scalars are additions of this design.
  //   PBS   : addr0 = input LWE, addr1 = lookup-table RLWE, addr2 = result
  //   KS    : addr0 = input LWE (dimension kN), addr2 = result
  //   MULADD: addr0 = first LWE, addr1 = second LWE, addr2 = result,
  //           result = scalar0 * first + scalar1 * second
  typedef struct packed {
    opcode_e     op;
    logic [63:0] addr0;
    logic [63:0] addr1;
    logic [63:0] addr2;
    logic [15:0] ext_idx;
    logic [15:0] key_idx;
    coef_t       scalar0;
    coef_t       scalar1;
  } instr_t;

  // ---------------------------------------------------------------- simple reduction
  function automatic coef_t mod_add(input coef_t a, input coef_t b);
    logic [64:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, Q}) s = s - {1'b0, Q};
    return s[63:0];
  endfunction

  function automatic coef_t mod_sub(input coef_t a, input coef_t b);
    if (a >= b) return a - b;
    else        return a + (Q - b);
  endfunction

  function automatic coef_t mod_neg(input coef_t a);
    return (a == 64'd0) ? 64'd0 : Q - a;
  endfunction

  // ---------------------------------------------------------------- Karatsuba
  // 33x33 -> 66 bit product from three 17/18-bit partial products (second level).
  function automatic logic [65:0] karatsuba_mul33(input logic [32:0] x, input logic [32:0] y);
    logic [16:0] x1, y1;
    logic [15:0] x0, y0;
    logic [33:0] z2, z0;
    logic [17:0] xs, ys;
    logic [35:0] zm;
    logic [65:0] z1;
    x1 = x[32:16]; x0 = x[15:0];
    y1 = y[32:16]; y0 = y[15:0];
    z2 = {17'd0, x1} * {17'd0, y1};
    z0 = {18'd0, x0} * {18'd0, y0};
    xs = {1'b0, x1} + {2'b0, x0};
    ys = {1'b0, y1} + {2'b0, y0};
    zm = {18'd0, xs} * {18'd0, ys};
    z1 = {30'd0, zm} - {32'd0, z2} - {32'd0, z0};
    return ({32'd0, z2} << 32) + (z1 << 16) + {32'd0, z0};
  endfunction

  // 64x64 -> 128 bit product from three 33-bit Karatsuba products (first level).
  function automatic logic [127:0] karatsuba_mul64(input coef_t x, input coef_t y);
    logic [65:0] z2, z0, zm;
    logic [32:0] xs, ys;
    logic [127:0] z1;
    z2 = karatsuba_mul33({1'b0, x[63:32]}, {1'b0, y[63:32]});
    z0 = karatsuba_mul33({1'b0, x[31:0]},  {1'b0, y[31:0]});
    xs = {1'b0, x[63:32]} + {1'b0, x[31:0]};
    ys = {1'b0, y[63:32]} + {1'b0, y[31:0]};
    zm = karatsuba_mul33(xs, ys);
    z1 = {62'd0, zm} - {62'd0, z2} - {62'd0, z0};
    return ({62'd0, z2} << 64) + (z1 << 32) + {62'd0, z0};
  endfunction

  // ---------------------------------------------------------------- full reduction
  function automatic coef_t solinas_reduce(input logic [127:0] v);
    logic [31:0] a, b, c, d;
    logic [67:0] t;
    a = v[127:96]; b = v[95:64]; c = v[63:32]; d = v[31:0];
    // (b + c) * 2^32 + d - a - b, made non-negative by adding 2q.
    t = ({36'd0, b} + {36'd0, c}) << 32;
    t = t + {36'd0, d} + {3'd0, Q, 1'b0} - {36'd0, a} - {36'd0, b};
    if (t >= ({4'd0, Q} << 2)) t = t - ({4'd0, Q} << 2);
    if (t >= ({4'd0, Q} << 1)) t = t - ({4'd0, Q} << 1);
    if (t >= {4'd0, Q})        t = t - {4'd0, Q};
    return t[63:0];
  endfunction

  function automatic coef_t mod_mul(input coef_t x, input coef_t y);
    return solinas_reduce(karatsuba_mul64(x, y));
  endfunction

  // ---------------------------------------------------------------- twiddle helpers

  function automatic int unsigned bit_reverse(input int unsigned v, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  // Constant-only arithmetic for the twiddle ROM contents: a plain 128-bit product
  // reduced with '%'.  It is evaluated at elaboration time only (it is cheaper for
  // the constant evaluator than the Karatsuba/Solinas datapath functions above).
  function automatic coef_t const_mul(input coef_t x, input coef_t y);
    logic [127:0] p;
    p = ({64'd0, x} * {64'd0, y}) % {64'd0, Q};
    return p[63:0];
  endfunction

  function automatic coef_t const_pow(input coef_t base, input coef_t e);
    coef_t r, b;
    r = 64'd1; b = base;
    for (int i = 0; i < 64; i++) begin
      if (e[i]) r = const_mul(r, b);
      b = const_mul(b, b);
    end
    return r;
  endfunction

  // psi = 7^((q-1)/2N), a primitive 2N-th root of unity (psi^N = -1).
  function automatic coef_t psi_root(input int unsigned n);
    return const_pow(GENERATOR, (Q - 64'd1) / (64'(n) * 2));
  endfunction

  // Twiddle of butterfly group m of an N-point negacyclic transform, in the
  // textbook CT/GS ordering (stage with span h uses m = N/(2h) + block):
  // psi^(bitrev(m)) forward, psi^(-bitrev(m)) = -psi^(N - bitrev(m)) inverse.
  // pw(i) = psi^i for i < N is supplied by the caller as a table, so that a whole
  // ROM costs N constant multiplications.
  function automatic int unsigned twiddle_exp(input int unsigned n, input int unsigned m);
    return bit_reverse(m, $clog2(n));
  endfunction

endpackage
