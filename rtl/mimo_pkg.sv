// mimo_pkg: types and constants shared by the distributed massive-MIMO node.
// Complex values are carried as {re, im} pairs of two's-complement integers.
// The default sizes are those of the LTE-like example system (K = 20 terminals,
// 2048-point FFT, 1200 used subcarriers, 12+12-bit computation words,
// 6+6-bit converters, 2+2-bit symbols). Fixed-point scaling, link framing and
// the PE control word are choices of this implementation.
package mimo_pkg;

  // Word lengths (real + imaginary part each)
  localparam int unsigned WC   = 12;  // W_comp per component
  localparam int unsigned WADC = 6;   // W_ADC per component
  localparam int unsigned WDAC = 6;   // W_DAC per component
  localparam int unsigned WSYM = 2;   // W_symbol per component

  // Fractional bits of a computation word: values are Q2.(WC-2), so +1.0 = 2**(WC-2)
  localparam int unsigned FRAC = WC - 2;

  typedef struct packed {
    logic signed [WC-1:0] re;
    logic signed [WC-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [WADC-1:0] re;
    logic signed [WADC-1:0] im;
  } adc_t;

  typedef struct packed {
    logic signed [WDAC-1:0] re;
    logic signed [WDAC-1:0] im;
  } dac_t;

  // Operand sources of the PE multiplier input W (Fig. 13 multiplexer, plus 1/p)
  typedef enum logic [1:0] {
    WSRC_TWIDDLE = 2'd0,
    WSRC_CHEST   = 2'd1,
    WSRC_VEC     = 2'd2,
    WSRC_INVP    = 2'd3
  } wsrc_e;

  // PE control word (Fig. 6 multiplexers and the +/- unit)
  typedef struct packed {
    logic conj_w;   // use conj(W)
    logic conj_a;   // use conj(A)
    logic sub;      // Y1 = m1 - P instead of m1 + P
    logic m1_reg;   // first adder takes the accumulator register instead of B
    logic m2_y1;    // second adder takes Y1 instead of the product P
    logic m3_c;     // second adder takes C instead of B
    logic scale;    // halve both outputs (arithmetic shift right by one)
    logic acc_en;   // load Y1 into the accumulator register
  } pe_ctrl_t;

  // Up link (towards the CCU) word kinds
  typedef enum logic [0:0] {UP_GRAM = 1'b0, UP_YSUM = 1'b1} up_kind_e;
  // Down link (from the CCU) word kinds
  typedef enum logic [0:0] {DN_DINV = 1'b0, DN_SYM = 1'b1} dn_kind_e;

  typedef struct packed {
    up_kind_e kind;
    cplx_t    data;
  } up_word_t;

  typedef struct packed {
    dn_kind_e kind;
    cplx_t    data;   // D entry, or a symbol in data.re[1:0] / data.im[1:0]
  } dn_word_t;

  // Saturate a wide signed value to WC bits
  localparam logic signed [2*WC+3:0] SAT_MAX = (2*WC+4)'((1 << (WC-1)) - 1);
  localparam logic signed [2*WC+3:0] SAT_MIN = -(2*WC+4)'(1 << (WC-1));

  function automatic logic signed [WC-1:0] sat_wc(input logic signed [2*WC+3:0] v);
    if (v > SAT_MAX)      return SAT_MAX[WC-1:0];
    else if (v < SAT_MIN) return SAT_MIN[WC-1:0];
    else                  return v[WC-1:0];
  endfunction

  // A 2+2-bit symbol: each 2-bit unsigned component c selects the 4-PAM
  // level 2c-3 (-3, -1, +1, +3), scaled so that level 4 would be 1.0.
  function automatic logic signed [WC-1:0] sym_level(input logic [WSYM-1:0] c);
    logic signed [WC-1:0] lvl;
    lvl = $signed({{(WC-WSYM-1){1'b0}}, c, 1'b0}) - WC'(3);
    return lvl <<< (FRAC - 2);
  endfunction

  function automatic cplx_t sym_to_cplx(input cplx_t w);
    cplx_t r;
    r.re = sym_level(w.re[WSYM-1:0]);
    r.im = sym_level(w.im[WSYM-1:0]);
    return r;
  endfunction

  // ADC sample to computation word: full scale of the converter maps to +-1.0
  function automatic cplx_t adc_to_cplx(input adc_t s);
    cplx_t r;
    r.re = WC'(s.re) <<< (FRAC - (WADC - 1));
    r.im = WC'(s.im) <<< (FRAC - (WADC - 1));
    return r;
  endfunction

  // Computation word to DAC sample: the converter covers +-1.0; saturate outside it
  function automatic logic signed [WDAC-1:0] to_dac1(input logic signed [WC-1:0] v);
    logic signed [WC-1:0] t;
    t = v >>> (FRAC - (WDAC - 1));
    if (t > WC'((1 << (WDAC-1)) - 1))   return WDAC'((1 << (WDAC-1)) - 1);
    else if (t < -WC'(1 << (WDAC-1)))   return WDAC'(1 << (WDAC-1));
    else                                return t[WDAC-1:0];
  endfunction

  function automatic dac_t cplx_to_dac(input cplx_t v);
    dac_t r;
    r.re = to_dac1(v.re);
    r.im = to_dac1(v.im);
    return r;
  endfunction

endpackage
