// pe: the single processing element of a node. It performs every arithmetic
// operation the node needs: multiply (channel estimation), multiply-and-add of
// two child contributions (Gram matrix and uplink decoding), multiply-and-
// accumulate (precoding, precoding-vector computation) and the radix-2
// decimation-in-time butterfly with a twiddle multiplication on one input.
//
// Structure (follows the PE drawing of the paper): a complex multiplier P = W*A;
// a first adder/subtractor Y1 = m1 +/- P whose other input m1 is B or the
// accumulator register; the register stores Y1; a second adder
// Y2 = m2 + m3 with m2 = P or Y1 and m3 = B or C.
//   multiply           : B = 0,  Y1 = P
//   multiply-and-add   : Y1 = P + B, Y2 = Y1 + C
//   multiply-accumulate: Y1 = reg + P, reg <= Y1
//   butterfly          : Y1 = B - P, Y2 = P + B
// Own choices: operands are Q2.(WC-2) fixed point, the product is rounded down
// to that format, both outputs saturate to WC bits, conj flags on W and A
// (a sign flip of the imaginary part) and an optional halving of the outputs
// for FFT stage scaling. The datapath is combinational from W/A/B/C to Y1/Y2;
// only the accumulator register is clocked (loaded when acc_en and valid).
module pe
  import mimo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid,     // an operation is performed this cycle
  input  pe_ctrl_t ctrl,
  input  cplx_t    w,
  input  cplx_t    a,
  input  cplx_t    b,
  input  cplx_t    c,
  output cplx_t    y1,
  output cplx_t    y2
);

  localparam int unsigned WW = 2*WC + 4;
  typedef logic signed [WW-1:0] wide_t;

  cplx_t acc_q;

  wide_t wr, wi, ar, ai, pr, pi;
  wide_t m1r, m1i, y1r, y1i, m2r, m2i, m3r, m3i, y2r, y2i;

  always_comb begin
    wr = wide_t'(w.re);
    wi = ctrl.conj_w ? -wide_t'(w.im) : wide_t'(w.im);
    ar = wide_t'(a.re);
    ai = ctrl.conj_a ? -wide_t'(a.im) : wide_t'(a.im);
    // complex product, scaled back to FRAC fractional bits
    pr = (wr * ar - wi * ai) >>> FRAC;
    pi = (wr * ai + wi * ar) >>> FRAC;

    m1r = ctrl.m1_reg ? wide_t'(acc_q.re) : wide_t'(b.re);
    m1i = ctrl.m1_reg ? wide_t'(acc_q.im) : wide_t'(b.im);
    y1r = ctrl.sub ? m1r - pr : m1r + pr;
    y1i = ctrl.sub ? m1i - pi : m1i + pi;

    m2r = ctrl.m2_y1 ? y1r : pr;
    m2i = ctrl.m2_y1 ? y1i : pi;
    m3r = ctrl.m3_c ? wide_t'(c.re) : wide_t'(b.re);
    m3i = ctrl.m3_c ? wide_t'(c.im) : wide_t'(b.im);
    y2r = m2r + m3r;
    y2i = m2i + m3i;

    if (ctrl.scale) begin
      y1r = y1r >>> 1;  y1i = y1i >>> 1;
      y2r = y2r >>> 1;  y2i = y2i >>> 1;
    end
    y1.re = sat_wc(y1r);
    y1.im = sat_wc(y1i);
    y2.re = sat_wc(y2r);
    y2.im = sat_wc(y2i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   acc_q <= '0;
    else if (valid && ctrl.acc_en) acc_q <= y1;
  end

endmodule
