// tb_mimo_node: end-to-end test of an antenna node at reduced size
// (K = 2 terminals, 16-point FFT, 8 used subcarriers, 4-sample cyclic
// prefix, 3 downlink symbols, one sample every R clock cycles).
// Two nodes run side by side on the same radio samples and downlink symbols:
//   - a ZF node with both children: the testbench plays the two children
//     (random partial sums), the parent link (random back-pressure) and the
//     central unit (it collects the Gram words and answers with a random
//     Hermitian D after a delay, then streams the downlink symbols);
//   - a CB leaf node (no children, no Gram matrix, no D).
// A bit-exact reference model written here (radix-2 FFT with the same
// rounding, the same channel estimation, Gram sum, vector and MAC equations)
// predicts every word sent to the parent and every DAC sample of the
// downlink symbols. Each mechanism is counted and must occur: parent-link
// back-pressure stalls, child-queue stalls, downlink-symbol-queue stalls,
// output-buffer gating of the IFFT, Gram words, W/A computations, uplink and
// downlink symbols in both modes.
module tb_mimo_node;
  import mimo_pkg::*;

  localparam int K = 2, LOGN = 4, N = 16, NSC = 8, NCP = 4;
  localparam int NUL1 = 0, NUL2 = 2, NDL = 3;
  localparam int NSYM = NUL1 + NUL2 + NDL + 3, NSPS = NCP + N;
  localparam int R = 8;                 // clock cycles per sample
  localparam int NF = 3;                // frames checked
  localparam int NDW = K * (K + 1) / 2;
  localparam int SCALE = 'b0101;
  localparam int INVP_RE = 768, INVP_IM = -128;
  localparam int CCU_DELAY = 40;        // cycles from the last Gram word to D
  localparam int SYM_RATE = 1;          // downlink symbols offered in SYM_RATE of 4 cycles
  localparam int EXTRA = 0;             // cycles allowed after the last frame for the sums
  localparam bit CHECK_MECH = 1;        // require every mechanism to occur

  typedef struct {int re; int im;} ci_t;

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ clock, reset
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a reset edge before the first clock edge
  always #5 clk = ~clk;

  // ------------------------------------------------------------ stimulus signals
  logic sample_strobe = 0, frame_start = 0;
  adc_t adc_data = '0;
  logic up_ready_z = 1;
  logic dn_valid = 0;      dn_word_t dn_word = '0;
  logic dn_valid_cb = 0;   dn_word_t dn_word_cb = '0;
  logic left_valid = 0, right_valid = 0;
  up_word_t left_word = '0, right_word = '0;
  cplx_t inv_p;
  assign inv_p.re = 12'(INVP_RE);
  assign inv_p.im = 12'(INVP_IM);

  // ZF node outputs
  dac_t dac_z;  logic upv_z; up_word_t upw_z; logic lr_z, rr_z, fv_z; dn_word_t fw_z;
  logic busy_z, stall_z, err_z;
  // CB node outputs
  dac_t dac_c;  logic upv_c; up_word_t upw_c; logic lr_c, rr_c, fv_c; dn_word_t fw_c;
  logic busy_c, stall_c, err_c;

  mimo_node #(.K(K), .LOGN(LOGN), .NSC(NSC), .NCP(NCP), .NUL1(NUL1), .NUL2(NUL2), .NDL(NDL))
  dut_zf (
    .clk, .rst_n, .zf_mode(1'b1), .has_left(1'b1), .has_right(1'b1),
    .fft_scale(LOGN'(SCALE)), .inv_p,
    .sample_strobe, .frame_start, .adc_data, .dac_data(dac_z),
    .up_valid(upv_z), .up_ready(up_ready_z), .up_word(upw_z),
    .dn_valid, .dn_word,
    .left_valid, .left_ready(lr_z), .left_word,
    .right_valid, .right_ready(rr_z), .right_word,
    .dn_fwd_valid(fv_z), .dn_fwd_word(fw_z),
    .busy(busy_z), .stall(stall_z), .error(err_z)
  );

  mimo_node #(.K(K), .LOGN(LOGN), .NSC(NSC), .NCP(NCP), .NUL1(NUL1), .NUL2(NUL2), .NDL(NDL))
  dut_cb (
    .clk, .rst_n, .zf_mode(1'b0), .has_left(1'b0), .has_right(1'b0),
    .fft_scale(LOGN'(SCALE)), .inv_p,
    .sample_strobe, .frame_start, .adc_data, .dac_data(dac_c),
    .up_valid(upv_c), .up_ready(1'b1), .up_word(upw_c),
    .dn_valid(dn_valid_cb), .dn_word(dn_word_cb),
    .left_valid(1'b0), .left_ready(lr_c), .left_word('0),
    .right_valid(1'b0), .right_ready(rr_c), .right_word('0),
    .dn_fwd_valid(fv_c), .dn_fwd_word(fw_c),
    .busy(busy_c), .stall(stall_c), .error(err_c)
  );

  // ------------------------------------------------------------ reference arithmetic
  function automatic int sat(input int v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction

  function automatic ci_t cmul(input ci_t w, input ci_t a, input bit cw, input bit ca);
    int wr, wi, ar, ai;
    ci_t p;
    wr = w.re; wi = cw ? -w.im : w.im;
    ar = a.re; ai = ca ? -a.im : a.im;
    p.re = (wr * ar - wi * ai) >>> 10;
    p.im = (wr * ai + wi * ar) >>> 10;
    return p;
  endfunction

  function automatic ci_t csat(input ci_t v);
    ci_t r;
    r.re = sat(v.re); r.im = sat(v.im);
    return r;
  endfunction

  function automatic int brev(input int x);
    int r = 0;
    for (int b = 0; b < LOGN; b++) if (x[b]) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  function automatic int sc_bin(input int s);
    return (s < NSC / 2) ? N - NSC / 2 + s : s - NSC / 2 + 1;
  endfunction

  function automatic ci_t twiddle(input int i);
    ci_t t;
    real ang;
    ang = 2.0 * 3.14159265358979323846 * i / N;
    t.re = int'($floor(1024.0 * $cos(ang) + 0.5));
    t.im = int'($floor(-1024.0 * $sin(ang) + 0.5));
    if (t.re > 2047) t.re = 2047;
    if (t.im > 2047) t.im = 2047;
    return t;
  endfunction

  // in: natural order; out: natural order
  function automatic void fft_ref(input ci_t x[N], input bit inv, output ci_t y[N]);
    ci_t a[N];
    for (int i = 0; i < N; i++) a[i] = x[brev(i)];
    for (int s = 0; s < LOGN; s++)
      for (int b = 0; b < N / 2; b++) begin
        int top, bot;
        ci_t p, t, y1, y2;
        top = ((b >> s) << (s + 1)) | (b & ((1 << s) - 1));
        bot = top | (1 << s);
        p = cmul(twiddle((b & ((1 << s) - 1)) << (LOGN - 1 - s)), a[bot], inv, 1'b0);
        t = a[top];
        y2.re = t.re + p.re; y2.im = t.im + p.im;
        y1.re = t.re - p.re; y1.im = t.im - p.im;
        if (SCALE[s]) begin
          y2.re = y2.re >>> 1; y2.im = y2.im >>> 1;
          y1.re = y1.re >>> 1; y1.im = y1.im >>> 1;
        end
        a[top] = csat(y2);
        a[bot] = csat(y1);
      end
    y = a;
  endfunction

  function automatic int to_dac(input int v);
    int t = v >>> 5;
    if (t > 31) return 31;
    if (t < -32) return -32;
    return t;
  endfunction

  // ------------------------------------------------------------ recorded data
  // received time-domain samples per symbol period (key = frame*NSYM + period)
  ci_t rx_samp [int][N];
  ci_t pilot_fft_c [int][N];     // cached pilot FFT per frame
  bit  pilot_fft_v [int];
  ci_t ul_fft_c [int][N];
  bit  ul_fft_v [int];
  ci_t dmat [int][K][K];         // D per frame (full Hermitian)
  bit  dmat_v [int];
  int  qcode [$];                // downlink symbol stream (4 bits per symbol)
  ci_t left_sent [$], right_sent [$];

  function automatic ci_t qsym(input int idx);
    ci_t s;
    s.re = (2 * (qcode[idx] & 3) - 3) * 256;
    s.im = (2 * ((qcode[idx] >> 2) & 3) - 3) * 256;
    return s;
  endfunction

  function automatic void pilot_fft(input int f, output ci_t y[N]);
    if (!pilot_fft_v.exists(f)) begin
      ci_t t[N];
      fft_ref(rx_samp[f * NSYM + NUL1], 1'b0, t);
      pilot_fft_c[f] = t;
      pilot_fft_v[f] = 1;
    end
    y = pilot_fft_c[f];
  endfunction

  function automatic void ul_fft(input int key, output ci_t y[N]);
    if (!ul_fft_v.exists(key)) begin
      ci_t t[N];
      fft_ref(rx_samp[key], 1'b0, t);
      ul_fft_c[key] = t;
      ul_fft_v[key] = 1;
    end
    y = ul_fft_c[key];
  endfunction

  ci_t zero_c = '{0, 0};

  // channel estimate h_k (ZF) or vector conj(h_k) (CB) of frame f
  function automatic ci_t chest(input int f, input int k, input bit cb);
    ci_t y[N];
    ci_t w;
    pilot_fft(f, y);
    w.re = INVP_RE; w.im = INVP_IM;
    return csat(cmul(w, y[sc_bin(k)], 1'b0, cb));
  endfunction

  ci_t vec_c [int];
  function automatic ci_t vec(input int f, input int j, input bit cb);
    ci_t acc, p;
    int key;
    key = (f * K + j) * 2 + int'(cb);
    if (vec_c.exists(key)) return vec_c[key];
    if (cb) begin
      acc = chest(f, j, 1'b1);
      vec_c[key] = acc;
      return acc;
    end
    acc = zero_c;
    for (int k = 0; k < K; k++) begin
      ci_t d;
      d = dmat[f][j][k];
      p = cmul(chest(f, k, 1'b0), d, 1'b1, 1'b0);
      acc.re = acc.re + p.re; acc.im = acc.im + p.im;
      acc = csat(acc);
    end
    vec_c[key] = acc;
    return acc;
  endfunction

  // three-input sum of multiply-and-add: sat(P + L + R), P + L kept wide
  function automatic ci_t mac3(input ci_t p, input ci_t l, input ci_t r);
    ci_t y;
    y.re = sat(p.re + l.re + r.re);
    y.im = sat(p.im + l.im + r.im);
    return y;
  endfunction

  // expected DAC samples of downlink symbol d of frame f
  ci_t dl_c [int][N];
  function automatic void dl_ref(input int f, input int d, input bit cb, output ci_t o[N]);
    ci_t x[N];
    int key;
    key = (f * NDL + d) * 2 + int'(cb);
    if (dl_c.exists(key)) begin
      o = dl_c[key];
      return;
    end
    for (int i = 0; i < N; i++) x[i] = zero_c;
    for (int s = 0; s < NSC; s++) begin
      ci_t acc, p;
      acc = zero_c;
      for (int k = 0; k < K; k++) begin
        p = cmul(vec(f, k, cb), qsym(((f * NDL + d) * NSC + s) * K + k), 1'b0, 1'b0);
        acc.re = acc.re + p.re; acc.im = acc.im + p.im;
        acc = csat(acc);
      end
      x[sc_bin(s)] = acc;
    end
    fft_ref(x, 1'b1, o);
    dl_c[key] = o;
  endfunction

  // ------------------------------------------------------------ counters of mechanisms
  int n_gram_z = 0, n_ysum_z = 0, n_ysum_c = 0, n_gram_c = 0;
  int n_dl_z = 0, n_dl_c = 0, n_wa = 0;
  int n_stall_up = 0, n_stall_child = 0, n_stall_sym = 0, n_gate = 0, n_child_pop = 0;
  int n_up_proto = 0;
  int fcat [5] = '{0, 0, 0, 0, 0};   // failures: DAC ZF, DAC CB, Gram, ZF sums, CB sums

  // ------------------------------------------------------------ radio
  int gsamp = 0;   // global sample count
  initial begin
    @(posedge rst_n);
    repeat (5) @(posedge clk);
    forever begin
      int per, sp, fr;
      fr = gsamp / (NSYM * NSPS);
      per = (gsamp / NSPS) % NSYM;
      sp = gsamp % NSPS;
      @(negedge clk);
      adc_data.re = 6'($urandom_range(63));
      adc_data.im = 6'($urandom_range(63));
      sample_strobe = 1;
      frame_start = (gsamp == 0);
      if ((per <= NUL1 + NUL2) && sp >= NCP) begin
        ci_t c;
        c.re = int'(adc_data.re) * 32; c.im = int'(adc_data.im) * 32;
        rx_samp[fr * NSYM + per][sp - NCP] = c;
      end
      @(negedge clk);
      sample_strobe = 0; frame_start = 0;
      // DAC sample of this strobe is valid after the next edge
      @(negedge clk);
      if (per >= NUL1 + NUL2 + 2 && per < NUL1 + NUL2 + 2 + NDL && fr < NF) begin
        int d, idx;
        ci_t oz[N], oc[N];
        d = per - (NUL1 + NUL2 + 2);
        idx = (sp < NCP) ? N - NCP + sp : sp - NCP;
        dl_ref(fr, d, 1'b0, oz);
        dl_ref(fr, d, 1'b1, oc);
        checks += 2;
        if (dac_z.re !== 6'(to_dac(oz[idx].re)) || dac_z.im !== 6'(to_dac(oz[idx].im))) begin
          failures++; fcat[0]++;
          if (failures < 400) $display("DAC ZF mismatch f%0d d%0d i%0d: got %0d,%0d exp %0d,%0d",
            fr, d, idx, dac_z.re, dac_z.im, to_dac(oz[idx].re), to_dac(oz[idx].im));
        end
        if (dac_c.re !== 6'(to_dac(oc[idx].re)) || dac_c.im !== 6'(to_dac(oc[idx].im))) begin
          failures++; fcat[1]++;
          if (failures < 400) $display("DAC CB mismatch f%0d d%0d i%0d: got %0d,%0d exp %0d,%0d",
            fr, d, idx, dac_c.re, dac_c.im, to_dac(oc[idx].re), to_dac(oc[idx].im));
        end
        if (sp == NSPS - 1) begin n_dl_z++; n_dl_c++; end
      end else if (per < NUL1 + NUL2 + 2 || per == NSYM - 1) begin
        checks++;
        if (dac_z != '0) begin failures++; $display("DAC not idle outside downlink"); end
      end
      repeat (R - 3) @(negedge clk);
      gsamp++;
    end
  end

  // ------------------------------------------------------------ children (random partial sums)
  // a child offers a word for one cycle when the node's queue reported room
  // children alternate between busy bursts and idle stretches
  int child_rate = 3;
  always @(negedge clk) if ($urandom_range(99) == 0) child_rate <= ($urandom_range(1) == 0) ? 0 : 3;
  always @(negedge clk) begin
    left_valid <= 1'b0; right_valid <= 1'b0;
    if (rst_n) begin
      if (lr_z && $urandom_range(3) < child_rate) begin
        ci_t c;
        c.re = $urandom_range(511) - 256; c.im = $urandom_range(511) - 256;
        left_sent.push_back(c);
        left_word.kind <= up_kind_e'($urandom_range(1));
        left_word.data.re <= 12'(c.re); left_word.data.im <= 12'(c.im);
        left_valid <= 1'b1;
      end
      if (rr_z && $urandom_range(3) < child_rate) begin
        ci_t c;
        c.re = $urandom_range(511) - 256; c.im = $urandom_range(511) - 256;
        right_sent.push_back(c);
        right_word.kind <= up_kind_e'($urandom_range(1));
        right_word.data.re <= 12'(c.re); right_word.data.im <= 12'(c.im);
        right_valid <= 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ parent link of the ZF node
  logic up_ready_q = 1;
  int up_idx = 0;      // words received from the ZF node (both kinds)
  int gram_done_at [int];
  always @(posedge clk) begin
    if (rst_n) begin
      up_ready_q <= up_ready_z;
      if (upv_z) begin
        if (!up_ready_q) n_up_proto++;
        if (upw_z.kind == UP_GRAM) begin
          int f, e, j, k;
          ci_t exp_v, p;
          f = n_gram_z / NDW; e = n_gram_z % NDW;
          j = 0; k = 0;
          begin
            int c;
            c = 0;
            for (int a = 0; a < K; a++) for (int b = a; b < K; b++) begin
              if (c == e) begin j = a; k = b; end
              c++;
            end
          end
          p = cmul(chest(f, j, 1'b0), chest(f, k, 1'b0), 1'b1, 1'b0);
          exp_v = mac3(p, left_sent[up_idx], right_sent[up_idx]);
          checks++;
          if (upw_z.data.re !== 12'(exp_v.re) || upw_z.data.im !== 12'(exp_v.im)) begin
            failures++; fcat[2]++;
            if (failures < 10) $display("GRAM mismatch f%0d (%0d,%0d): got %0d,%0d exp %0d,%0d",
              f, j, k, upw_z.data.re, upw_z.data.im, exp_v.re, exp_v.im);
          end
          n_gram_z++;
          if (n_gram_z % NDW == 0) gram_done_at[f] = 1;
        end else begin
          int u, f, s, k, key;
          ci_t y[N], exp_v, p;
          u = n_ysum_z / (NSC * K); f = u / NUL2;
          s = (n_ysum_z % (NSC * K)) / K; k = n_ysum_z % K;
          key = f * NSYM + NUL1 + 1 + (u % NUL2);
          ul_fft(key, y);
          p = cmul(vec(f, k, 1'b0), y[sc_bin(s)], 1'b0, 1'b0);
          exp_v = mac3(p, left_sent[up_idx], right_sent[up_idx]);
          checks++;
          if (upw_z.data.re !== 12'(exp_v.re) || upw_z.data.im !== 12'(exp_v.im)) begin
            failures++; fcat[3]++;
            if (failures < 10) $display("YSUM ZF mismatch u%0d s%0d k%0d: got %0d,%0d exp %0d,%0d",
              u, s, k, upw_z.data.re, upw_z.data.im, exp_v.re, exp_v.im);
          end
          n_ysum_z++;
        end
        up_idx++;
      end
      // CB node
      if (upv_c) begin
        if (upw_c.kind == UP_GRAM) n_gram_c++;
        else begin
          int u, f, s, k, key;
          ci_t y[N], exp_v, p;
          u = n_ysum_c / (NSC * K); f = u / NUL2;
          s = (n_ysum_c % (NSC * K)) / K; k = n_ysum_c % K;
          key = f * NSYM + NUL1 + 1 + (u % NUL2);
          ul_fft(key, y);
          p = cmul(vec(f, k, 1'b1), y[sc_bin(s)], 1'b0, 1'b0);
          exp_v = mac3(p, zero_c, zero_c);
          checks++;
          if (upw_c.data.re !== 12'(exp_v.re) || upw_c.data.im !== 12'(exp_v.im)) begin
            failures++; fcat[4]++;
            if (failures < 10) $display("YSUM CB mismatch u%0d s%0d k%0d: got %0d,%0d exp %0d,%0d",
              u, s, k, upw_c.data.re, upw_c.data.im, exp_v.re, exp_v.im);
          end
          n_ysum_c++;
        end
      end
      // mechanisms
      if (stall_z && dut_zf.u_ctrl.need_up && !up_ready_z) n_stall_up++;
      if (stall_z && dut_zf.u_ctrl.need_child && (!dut_zf.lq_valid || !dut_zf.rq_valid)) n_stall_child++;
      if ((stall_z && dut_zf.u_ctrl.need_sym && !dut_zf.sym_valid) ||
          (stall_c && dut_cb.u_ctrl.need_sym && !dut_cb.sym_valid)) n_stall_sym++;
      if ((stall_z && !dut_zf.u_ctrl.need_child && !dut_zf.u_ctrl.need_sym) ||
          (stall_c && !dut_cb.u_ctrl.need_child && !dut_cb.u_ctrl.need_sym)) n_gate++;
      if (dut_zf.u_ctrl.d_release) n_wa++;
      if (dut_zf.lq_pop) n_child_pop++;
    end
  end

  // random back-pressure on the ZF node's parent link
  always @(negedge clk) up_ready_z <= ($urandom_range(9) > 2);

  // ------------------------------------------------------------ central unit and downlink symbols
  int qsent = 0;
  initial begin
    int ftodo;
    ftodo = 0;
    for (int i = 0; i < (NF + 2) * NDL * NSC * K; i++) qcode.push_back($urandom_range(15));
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      dn_valid = 0; dn_valid_cb = 0;
      if (gram_done_at.exists(ftodo)) begin
        // inversion latency, then D row by row (upper triangle)
        repeat (CCU_DELAY) @(negedge clk);
        for (int j = 0; j < K; j++)
          for (int k = 0; k < K; k++) begin
            ci_t d;
            if (k < j) begin
              d.re = dmat[ftodo][k][j].re; d.im = -dmat[ftodo][k][j].im;
            end else begin
              d.re = $urandom_range(1023) - 512;
              d.im = (k == j) ? 0 : $urandom_range(1023) - 512;
            end
            dmat[ftodo][j][k] = d;
          end
        dmat_v[ftodo] = 1;
        for (int j = 0; j < K; j++)
          for (int k = j; k < K; k++) begin
            dn_valid = 1;
            dn_word.kind = DN_DINV;
            dn_word.data.re = 12'(dmat[ftodo][j][k].re);
            dn_word.data.im = 12'(dmat[ftodo][j][k].im);
            @(negedge clk);
          end
        dn_valid = 0;
        ftodo++;
      end else if (qsent < qcode.size() &&
                   dut_zf.u_parent_in.u_symq.cnt < 12 && dut_cb.u_parent_in.u_symq.cnt < 12 &&
                   $urandom_range(3) < SYM_RATE) begin
        dn_word.kind = DN_SYM;
        dn_word.data = '0;
        dn_word.data.re[1:0] = 2'(qcode[qsent] & 3);
        dn_word.data.im[1:0] = 2'((qcode[qsent] >> 2) & 3);
        dn_word.data.re[11:2] = 10'($urandom);   // unused bits
        dn_word_cb = dn_word;
        dn_valid = 1; dn_valid_cb = 1;
        qsent++;
      end
    end
  end

  // forwarding check: every word reaches the children one cycle later
  dn_word_t dn_q; logic dn_vq = 0;
  always @(posedge clk) begin
    dn_vq <= dn_valid; dn_q <= dn_word;
    if (rst_n && dn_vq) begin
      checks++;
      if (!fv_z || fw_z != dn_q) begin failures++; $display("forwarding mismatch"); end
    end
  end

  // ------------------------------------------------------------ run
  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (gsamp == NF * NSYM * NSPS);
    for (int i = 0; i < EXTRA && (n_ysum_z < NF * NUL2 * NSC * K || n_ysum_c < NF * NUL2 * NSC * K); i++)
      @(posedge clk);
    repeat (50) @(posedge clk);
    checks++; if (err_z || err_c) begin failures++; $display("error flag set z=%0d c=%0d", err_z, err_c); end
    checks++; if (n_gram_z < NF * NDW) begin failures++; $display("gram words %0d", n_gram_z); end
    checks++; if (n_ysum_z < NF * NUL2 * NSC * K) begin failures++; $display("ZF ysum words %0d", n_ysum_z); end
    checks++; if (n_ysum_c < NF * NUL2 * NSC * K) begin failures++; $display("CB ysum words %0d", n_ysum_c); end
    checks++; if (n_gram_c != 0) begin failures++; $display("CB node sent Gram words"); end
    checks++; if (n_up_proto != 0) begin failures++; $display("up word without ready %0d", n_up_proto); end
    $display("failures by kind: dac_zf=%0d dac_cb=%0d gram=%0d ysum_zf=%0d ysum_cb=%0d", fcat[0], fcat[1], fcat[2], fcat[3], fcat[4]);
    $display("mechanisms: gram=%0d ysum_zf=%0d ysum_cb=%0d dl_zf=%0d dl_cb=%0d wa=%0d stall_up=%0d stall_child=%0d stall_sym=%0d ifft_gate=%0d child_pops=%0d",
             n_gram_z, n_ysum_z, n_ysum_c, n_dl_z, n_dl_c, n_wa, n_stall_up, n_stall_child,
             n_stall_sym, n_gate, n_child_pop);
    checks++; if (n_wa < NF)         begin failures++; $display("W/A count %0d", n_wa); end
    checks++; if (n_dl_z != NF * NDL) begin failures++; $display("downlink symbols %0d", n_dl_z); end
    checks++; if (CHECK_MECH && n_stall_up == 0)    begin failures++; $display("no parent back-pressure stall"); end
    checks++; if (CHECK_MECH && n_stall_child == 0) begin failures++; $display("no child stall"); end
    checks++; if (CHECK_MECH && n_stall_sym == 0)   begin failures++; $display("no symbol-queue stall"); end
    checks++; if (CHECK_MECH && n_gate == 0)        begin failures++; $display("no output-buffer gating"); end
    checks++; if (CHECK_MECH && n_child_pop == 0)   begin failures++; $display("no child sums"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd10 * (R * NSYM * NSPS * (NF + 2) + EXTRA) * 10);
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
