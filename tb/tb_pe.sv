// tb_pe: self-checking test of the processing element. Random operands and
// random control words (conjugations, add/subtract, the three multiplexers,
// halving, accumulator load) are applied; a reference model of the
// data path computes Y1 and Y2, and the accumulator is modelled alongside.
module tb_pe;
  import mimo_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid = 0;
  pe_ctrl_t ctrl = '0;
  cplx_t w = '0, a = '0, b = '0, c = '0;
  cplx_t y1, y2;

  pe dut (.clk, .rst_n, .valid, .ctrl, .w, .a, .b, .c, .y1, .y2);

  function automatic int sat(input longint v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return int'(v);
  endfunction

  longint acc_re = 0, acc_im = 0;   // model of the accumulator (unsaturated Y1)
  int n_acc = 0, n_sat = 0;

  task automatic check_now();
    longint wr, wi, ar, ai, pr, pi, m1r, m1i, y1r, y1i, m2r, m2i, y2r, y2i;
    wr = w.re; wi = ctrl.conj_w ? -longint'(w.im) : w.im;
    ar = a.re; ai = ctrl.conj_a ? -longint'(a.im) : a.im;
    pr = (wr * ar - wi * ai) >>> 10;
    pi = (wr * ai + wi * ar) >>> 10;
    m1r = ctrl.m1_reg ? acc_re : b.re;
    m1i = ctrl.m1_reg ? acc_im : b.im;
    y1r = ctrl.sub ? m1r - pr : m1r + pr;
    y1i = ctrl.sub ? m1i - pi : m1i + pi;
    m2r = ctrl.m2_y1 ? y1r : pr;
    m2i = ctrl.m2_y1 ? y1i : pi;
    y2r = m2r + (ctrl.m3_c ? c.re : b.re);
    y2i = m2i + (ctrl.m3_c ? c.im : b.im);
    if (ctrl.scale) begin
      y1r = y1r >>> 1; y1i = y1i >>> 1; y2r = y2r >>> 1; y2i = y2i >>> 1;
    end
    if (sat(y1r) != y1r || sat(y2r) != y2r) n_sat++;
    checks++;
    if (int'(y1.re) != sat(y1r) || int'(y1.im) != sat(y1i) ||
        int'(y2.re) != sat(y2r) || int'(y2.im) != sat(y2i)) begin
      failures++;
      if (failures < 10) $display("mismatch ctrl=%b: y1 %0d,%0d exp %0d,%0d  y2 %0d,%0d exp %0d,%0d",
        ctrl, y1.re, y1.im, sat(y1r), sat(y1i), y2.re, y2.im, sat(y2r), sat(y2i));
    end
    // the accumulator takes the Y1 output (halved and saturated)
    if (valid && ctrl.acc_en) begin
      acc_re = sat(y1r); acc_im = sat(y1i);
      n_acc++;
    end
  endtask

  function automatic logic signed [11:0] rnd();
    case ($urandom_range(3))
      0: return 12'sd2047;
      1: return -12'sd2048;
      default: return 12'($urandom);
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      valid = $urandom_range(3) != 0;
      ctrl  = pe_ctrl_t'($urandom);
      w = {rnd(), rnd()}; a = {rnd(), rnd()}; b = {rnd(), rnd()}; c = {rnd(), rnd()};
      if ($urandom_range(1)) begin   // moderate values: sums without saturation
        w.re = w.re >>> 2; w.im = w.im >>> 2; b.re = b.re >>> 3; c.im = c.im >>> 3;
      end
      #1 check_now();
    end
    $display("accumulator loads=%0d saturating ops=%0d", n_acc, n_sat);
    checks++; if (n_acc == 0 || n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
