// tb_fx_pkg -- shared types and fixed-point arithmetic for the tight-binding
// streaming pipeline.
//
// Every real number in the datapath (coordinates, exponents, orbital energies,
// matrix elements, table entries, eigenvalues) is a signed two's-complement
// fixed-point word fx_t with FX_W bits, FX_FRAC of them after the binary point
// (48 bits, 24 fractional: range +-8.4e6, resolution 6e-8). Lengths are in
// bohr and energies in hartree. The original kernels are templated on a
// floating-point type; a wide fixed-point word is this design's own choice so
// that every operator is plain synthesizable integer logic.
//
// Indices (orbital, atom, pair counters) use IDX_W bits, enough for the 770
// orbitals of the largest molecule benchmarked with the stand-alone generator.
//
// The functions are combinational; the modules that call them place them in
// separate pipeline stages. fx_div returns 0 for a zero divisor, fx_sqrt
// returns 0 for a negative argument, fx_exp_neg saturates to 0 for large x.
package tb_fx_pkg;

  localparam int FX_W    = 48;
  localparam int FX_FRAC = 24;
  localparam int IDX_W   = 10;

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic [IDX_W-1:0]       idx_t;

  localparam fx_t FX_ONE  = fx_t'(64'sd1 <<< FX_FRAC);
  localparam fx_t FX_HALF = fx_t'(64'sd1 <<< (FX_FRAC-1));
  // pi, ln 2 and log2(e) scaled by 2^24
  localparam fx_t FX_PI     = fx_t'(48'sd52707179);
  localparam fx_t FX_LN2    = fx_t'(48'sd11629080);
  localparam fx_t FX_LOG2E  = fx_t'(48'sd24204406);

  // angular type of a basis function (l <= 1)
  typedef enum logic [1:0] {ORB_S = 2'd0, ORB_PX = 2'd1, ORB_PY = 2'd2, ORB_PZ = 2'd3} orb_l_e;

  // method selected for the full workflow
  typedef enum logic [1:0] {MODE_EHT = 2'd0, MODE_DFTB0 = 2'd1, MODE_HGEN = 2'd2} tb_mode_e;

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
  } coord_t;

  typedef struct packed {
    idx_t i;
    idx_t j;
  } pair_t;

  typedef struct packed {
    idx_t i;
    idx_t j;
    fx_t  h;
  } helem_t;

  // Per-orbital constants. EHT uses alpha, d, eps, k; DFTB0 uses species,
  // l and eps (on-site energy). atom maps an orbital to its atom.
  typedef struct packed {
    idx_t   atom;
    logic   species;   // 0 = H, 1 = C
    orb_l_e l;
    fx_t    alpha;
    fx_t    d;
    fx_t    eps;
    fx_t    k;
  } orb_desc_t;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_FRAC);
  endfunction

  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [FX_W+FX_FRAC-1:0] num;
    logic signed [FX_W+FX_FRAC-1:0] q;
    if (b == '0) return '0;
    num = {a, {FX_FRAC{1'b0}}};
    q = num / (FX_W+FX_FRAC)'(b);
    return fx_t'(q);
  endfunction

  // square root of a non-negative fixed-point number: isqrt(a * 2^FX_FRAC)
  function automatic fx_t fx_sqrt(fx_t a);
    logic [FX_W+FX_FRAC-1:0] rem, val, res, bit_v;
    if (a <= 0) return '0;
    val = {a, {FX_FRAC{1'b0}}};
    rem = val;
    res = '0;
    bit_v = {2'b01, {(FX_W+FX_FRAC-2){1'b0}}};
    for (int n = 0; n < (FX_W+FX_FRAC)/2; n++) begin
      if (rem >= res + bit_v) begin
        rem = rem - (res + bit_v);
        res = (res >> 1) + bit_v;
      end else begin
        res = res >> 1;
      end
      bit_v = bit_v >> 2;
    end
    return fx_t'(res);
  endfunction

  // exp(-x) for x >= 0: x*log2(e) = n + f, exp(-x) = 2^-n * exp(-f ln2),
  // the second factor by a degree-8 Horner polynomial.
  function automatic fx_t fx_exp_neg(fx_t x);
    fx_t y, g, r;
    int  n;
    if (x <= 0) return FX_ONE;
    y = fx_mul(x, FX_LOG2E);
    n = int'(y >>> FX_FRAC);
    if (n >= FX_FRAC + 2) return '0;
    g = fx_mul(y & fx_t'((64'sd1 <<< FX_FRAC) - 1), FX_LN2);
    r = FX_ONE;
    for (int k = 8; k >= 1; k--)
      r = FX_ONE - fx_mul(g, r) / fx_t'(k);
    return r >>> n;
  endfunction

  function automatic fx_t fx_abs(fx_t a);
    return (a < 0) ? -a : a;
  endfunction

endpackage
