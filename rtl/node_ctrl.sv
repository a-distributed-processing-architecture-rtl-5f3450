// node_ctrl: the control unit of a node. It runs the node's computational
// tasks one after another on the single PE, issuing one PE operation per clock
// cycle, and chooses the next task from the frame events, as in the paper's
// asymptotic schedule:
//   pilot job   : FFT of the pilot symbol, channel estimation (CE: K
//                 multiplications by 1/p) and, for ZF/MMSE, the local Gram
//                 contribution B_i (K(K+1)/2 multiply-and-adds with the
//                 children's contributions, sent to the parent);
//   W/A job     : (ZF/MMSE) once D = (H^H H)^-1 has arrived and all uplink
//                 symbols of the previous frame are done, the local
//                 precoding/decoding vector v = D conj(h_i) (K*K MACs);
//   uplink job  : FFT of a buffered uplink symbol, then for every used
//                 subcarrier and terminal y~ = v_k y + left + right, sent to the
//                 parent (N_SC*K multiply-and-adds);
//   downlink job: x = sum_k v_k q_k for every used subcarrier (N_SC*K MACs,
//                 written to the FFT buffer), then the IFFT into the output
//                 buffer.
// Task choice when the PE is free, in priority order: a received pilot; an
// uplink symbol whose frame's vector is the current one (before the new
// vector is ready, or at most N_UL,PB of them before the downlink symbols); the
// W/A computation; the next downlink symbol; the remaining uplink symbols. In
// CB mode the vector v = conj(h_i) comes straight from the channel estimation and
// there is no B_i or W/A; the pilot job then waits until the previous frame's
// uplink symbols are done.
//
// FFT/IFFT: radix-2 decimation in time, in place, N/2 butterflies per stage,
// LOGN stages; the array is kept in bit-reversed order, so the first stage of
// an uplink FFT reads the input buffer at bit-reversed sample addresses, and
// the precoder writes x to bit-reversed bin addresses. Unused bins read as
// zero in the first IFFT stage. Stage s pairs indices differing in bit s with
// twiddle index (b mod 2^s) * 2^(LOGN-1-s); each stage can halve its results
// (fft_scale[s]). The IFFT uses conjugated twiddles; its last stage writes the
// output buffer. Used subcarriers: N_SC/2 bins below DC (N-N_SC/2 .. N-1) and
// N_SC/2 above (1 .. N_SC/2); subcarrier 0..K-1 of the pilot carry the K
// terminals' pilots. These mappings are choices of this design.
//
// Timing: two-stage pipeline. In the issue cycle the memory addresses are
// presented and the link queues popped; in the next cycle the operands are
// valid, the PE computes and the results are written or sent. Between FFT
// stages and between tasks one idle cycle lets the last result be written
// before it is read. An operation that needs a child contribution, a free
// parent link or a downlink symbol waits (stall) until it is there.
module node_ctrl
  import mimo_pkg::*;
#(
  parameter int unsigned K       = 20,
  parameter int unsigned LOGN    = 11,
  parameter int unsigned NSC     = 1200,
  parameter int unsigned NDL     = 2,
  parameter int unsigned NUL_PB  = 0,
  parameter int unsigned NUL_BUF = 2,
  localparam int unsigned SLW = (NUL_BUF > 1) ? $clog2(NUL_BUF) : 1,
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned ND  = K * (K + 1) / 2,
  localparam int unsigned DAW = $clog2(ND)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            zf_mode,     // 1: ZF/MMSE, 0: conjugate beamforming
  input  logic            has_left,
  input  logic            has_right,
  input  logic [LOGN-1:0] fft_scale,   // halve the results of FFT stage s
  // radio events
  input  logic            sym_done,
  input  logic            sym_pilot,
  input  logic [SLW-1:0]  sym_slot,
  input  logic [1:0]      sym_frame,
  input  logic            dl_start,
  // down link
  input  logic            d_ready,
  output logic            d_release,
  output logic            d_re,
  output logic [DAW-1:0]  d_raddr,
  input  logic            sym_valid,
  output logic            sym_pop,
  // child links
  input  logic            left_valid,
  output logic            left_pop,
  input  logic            right_valid,
  output logic            right_pop,
  // parent link
  input  logic            up_ready,
  output logic            up_valid,
  output up_kind_e        up_kind,
  // sample memory
  output logic            sm_rd_fft,
  output logic            sm_re0,
  output logic [SLW+LOGN-1:0] sm_raddr0,
  output logic            sm_re1,
  output logic [SLW+LOGN-1:0] sm_raddr1,
  output logic            sm_wr_out,
  output logic            sm_out_slot,
  output logic            sm_we0,
  output logic [LOGN-1:0] sm_waddr0,
  output logic            sm_we1,
  output logic [LOGN-1:0] sm_waddr1,
  // twiddle ROM, channel-estimate and vector memories
  output logic            tw_en,
  output logic [LOGN-2:0] tw_addr,
  output logic            ce_en,
  output logic            ce_we,
  output logic [KW-1:0]   ce_addr,
  output logic            vec_en,
  output logic            vec_we,
  output logic [KW-1:0]   vec_addr,
  // PE operand selection and control (all valid in the execute cycle)
  output logic            pe_valid,
  output pe_ctrl_t        pe_ctrl,
  output wsrc_e           pe_wsrc,
  output logic            pe_a_link,   // A from the down link (D or symbol) instead of memory
  output logic            pe_a_sym,    // with pe_a_link: the symbol queue instead of D
  output logic            pe_a_zero,
  output logic            pe_b_zero,
  output logic            pe_b_left,   // B from the left child instead of memory
  output logic            pe_c_zero,
  // status
  output logic            busy,
  output logic            stall,
  output logic            error
);

  localparam int unsigned NFFT = 1 << LOGN;
  localparam int unsigned NH   = NFFT / 2;
  localparam int unsigned SCW  = $clog2(NSC);
  localparam int unsigned QD   = NUL_BUF + 1;
  localparam int unsigned QW   = $clog2(QD + 1);

  typedef enum logic [2:0] {T_IDLE, T_FFT, T_CE, T_BI, T_WA, T_YI, T_XI, T_GAP} task_e;
  typedef enum logic [1:0] {J_PILOT, J_UL, J_WA, J_DL} job_e;

  // ---------------------------------------------------------------- helpers
  function automatic logic [LOGN-1:0] sc_bin(input logic [SCW-1:0] s);
    if (s < SCW'(NSC / 2)) return LOGN'(NFFT - NSC / 2) + LOGN'(s);
    else                   return LOGN'(s) - LOGN'(NSC / 2) + LOGN'(1);
  endfunction

  function automatic logic bin_used(input logic [LOGN-1:0] b);
    return ((b >= LOGN'(1)) && (b <= LOGN'(NSC / 2))) || (b >= LOGN'(NFFT - NSC / 2));
  endfunction

  function automatic logic [LOGN-1:0] brev(input logic [LOGN-1:0] v);
    logic [LOGN-1:0] r;
    for (int i = 0; i < int'(LOGN); i++) r[i] = v[LOGN-1-i];
    return r;
  endfunction

  // index of D[r][c], r <= c, in the row-major upper triangle
  function automatic logic [DAW-1:0] tri_idx(input logic [KW-1:0] r, input logic [KW-1:0] c);
    int unsigned ri, ci;
    ri = int'(r); ci = int'(c);
    return DAW'(ri * K - (ri * (ri - 1)) / 2 + (ci - ri));
  endfunction

  // ---------------------------------------------------------------- job state
  logic            pilot_pend;
  logic [SLW-1:0]  pilot_slot;
  logic [1:0]      pilot_frame;

  logic [SLW-1:0]  ulq_slot  [QD];
  logic [1:0]      ulq_frame [QD];
  logic [QW-1:0]   ulq_cnt;
  logic            q_err;

  logic            vec_valid;
  logic [1:0]      vec_frame;
  logic            wa_pend;
  logic [1:0]      wa_frame;
  logic [$clog2(NDL+1)-1:0] dl_todo, dl_idx, dl_started;
  logic [$clog2(NUL_PB+2)-1:0] pb_cnt;

  job_e            job;
  task_e           tsk, after_gap;
  logic [SLW-1:0]  job_slot;
  logic            inverse;        // current FFT is an IFFT

  // loop counters
  logic [$clog2(LOGN+1)-1:0] stg;
  logic [LOGN-2:0]           bf;
  logic [SCW-1:0]            sc;
  logic [KW-1:0]             kj, kk;   // outer / inner terminal index

  // ---------------------------------------------------------------- job choice
  wire ulq_nonempty = (ulq_cnt != '0);
  wire ul_old  = ulq_nonempty && vec_valid && (ulq_frame[0] == vec_frame);
  wire ul_ok   = ul_old && ((dl_todo == '0) || (int'(pb_cnt) < int'(NUL_PB)));
  wire pilot_ok = pilot_pend &&
                  (zf_mode ? !wa_pend
                           : !(ulq_nonempty && vec_valid && (ulq_frame[0] == vec_frame)
                               && (vec_frame != pilot_frame)));
  wire wa_ok   = zf_mode && wa_pend && d_ready && !(ul_old && (wa_frame != vec_frame));
  wire dl_ok   = vec_valid && (dl_todo != '0);

  // the uplink queue is popped when an uplink job starts
  logic          ul_pop_now;
  logic [QW-1:0] ulq_cnt_pop;
  assign ul_pop_now  = (tsk == T_IDLE) && !pilot_ok && ul_ok;
  assign ulq_cnt_pop = ul_pop_now ? ulq_cnt - 1'b1 : ulq_cnt;

  // ---------------------------------------------------------------- issue
  logic issue, last_op, need_child, need_up, need_sym, may_go;
  logic [LOGN-1:0] top, bot;
  logic            ce_rd, vec_rd;
  logic [KW-1:0]   ce_raddr, vec_raddr;

  always_comb begin
    // butterfly operand indices of stage stg
    top = LOGN'(((int'(bf) >> stg) << (stg + 1)) | (int'(bf) & ((1 << stg) - 1)));
    bot = top | LOGN'(1 << stg);
  end

  always_comb begin
    need_child = (tsk == T_BI) || (tsk == T_YI);
    need_up    = need_child;
    need_sym   = (tsk == T_XI);
    may_go = 1'b1;
    if (need_child && has_left  && !left_valid)  may_go = 1'b0;
    if (need_child && has_right && !right_valid) may_go = 1'b0;
    if (need_up && !up_ready)                    may_go = 1'b0;
    if (need_sym && !sym_valid)                  may_go = 1'b0;
    // the output buffer holds two symbols: the IFFT of downlink symbol d may
    // start once symbol d-1 is being sent (so d-2 has left the buffer);
    // dl_started counts the downlink symbols whose transmission has begun
    if (tsk == T_FFT && inverse && stg == '0 && bf == '0 && dl_idx > 1 && (dl_started < dl_idx))
      may_go = 1'b0;
    issue = (tsk inside {T_FFT, T_CE, T_BI, T_WA, T_YI, T_XI}) && may_go;
    stall = (tsk inside {T_FFT, T_CE, T_BI, T_WA, T_YI, T_XI}) && !may_go;
    case (tsk)
      T_FFT:   last_op = (bf == (LOGN-1)'(NH - 1));
      T_CE:    last_op = (kk == KW'(K - 1));
      T_BI, T_WA: last_op = (kj == KW'(K - 1)) && (kk == KW'(K - 1));
      T_YI, T_XI: last_op = (sc == SCW'(NSC - 1)) && (kk == KW'(K - 1));
      default: last_op = 1'b0;
    endcase
  end

  // issue-cycle outputs (memory addresses, queue pops)
  always_comb begin
    sm_rd_fft = 1'b1; sm_re0 = 1'b0; sm_re1 = 1'b0; sm_raddr0 = '0; sm_raddr1 = '0;
    tw_en = 1'b0; tw_addr = '0;
    ce_rd = 1'b0; ce_raddr = '0;
    vec_rd = 1'b0; vec_raddr = '0;
    d_re = 1'b0; d_raddr = '0;
    sym_pop = 1'b0; left_pop = 1'b0; right_pop = 1'b0;
    if (issue) begin
      case (tsk)
        T_FFT: begin
          sm_re0 = 1'b1; sm_re1 = 1'b1;
          tw_en = 1'b1;
          tw_addr = (LOGN-1)'((int'(bf) & ((1 << stg) - 1)) << (int'(LOGN) - 1 - int'(stg)));
          if (stg == '0 && !inverse) begin
            sm_rd_fft = 1'b0;
            sm_raddr0 = {job_slot, brev(top)};
            sm_raddr1 = {job_slot, brev(bot)};
          end else begin
            sm_raddr0 = {SLW'(0), top};
            sm_raddr1 = {SLW'(0), bot};
          end
        end
        T_CE: begin
          sm_re1 = 1'b1;
          sm_raddr1 = {SLW'(0), sc_bin(SCW'(kk))};
        end
        T_BI: begin
          sm_re1 = 1'b1;
          sm_raddr1 = {SLW'(0), sc_bin(SCW'(kk))};
          ce_rd = 1'b1; ce_raddr = kj;
          left_pop = has_left; right_pop = has_right;
        end
        T_WA: begin
          ce_rd = 1'b1; ce_raddr = kk;
          d_re = 1'b1;
          d_raddr = (kk >= kj) ? tri_idx(kj, kk) : tri_idx(kk, kj);
        end
        T_YI: begin
          sm_re1 = 1'b1;
          sm_raddr1 = {SLW'(0), sc_bin(sc)};
          vec_rd = 1'b1; vec_raddr = kk;
          left_pop = has_left; right_pop = has_right;
        end
        T_XI: begin
          vec_rd = 1'b1; vec_raddr = kk;
          sym_pop = 1'b1;
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- execute stage
  logic            x_valid;
  pe_ctrl_t        x_ctrl;
  wsrc_e           x_wsrc;
  logic            x_a_link, x_a_sym, x_a_zero, x_b_zero, x_b_left, x_c_zero;
  logic            x_we0, x_we1, x_wr_out, x_out_slot, x_ce_we, x_vec_we, x_up;
  up_kind_e        x_up_kind;
  logic [LOGN-1:0] x_waddr0, x_waddr1;
  logic [KW-1:0]   x_kaddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0; x_ctrl <= '0; x_wsrc <= WSRC_TWIDDLE;
      x_a_link <= 1'b0; x_a_sym <= 1'b0; x_a_zero <= 1'b0; x_b_zero <= 1'b0;
      x_b_left <= 1'b0; x_c_zero <= 1'b0;
      x_we0 <= 1'b0; x_we1 <= 1'b0; x_wr_out <= 1'b0; x_ce_we <= 1'b0; x_vec_we <= 1'b0;
      x_out_slot <= 1'b0;
      x_up <= 1'b0; x_up_kind <= UP_GRAM; x_waddr0 <= '0; x_waddr1 <= '0; x_kaddr <= '0;
    end else begin
      x_valid <= issue;
      x_ctrl <= '0; x_wsrc <= WSRC_TWIDDLE;
      x_a_link <= 1'b0; x_a_sym <= 1'b0; x_a_zero <= 1'b0; x_b_zero <= 1'b0;
      x_b_left <= 1'b0; x_c_zero <= 1'b1;
      x_we0 <= 1'b0; x_we1 <= 1'b0; x_wr_out <= 1'b0; x_ce_we <= 1'b0; x_vec_we <= 1'b0;
      x_up <= 1'b0;
      if (issue) begin
        case (tsk)
          T_FFT: begin
            // butterfly: Y2 = B + W*A -> top, Y1 = B - W*A -> bottom
            x_ctrl.conj_w <= inverse;
            x_ctrl.sub    <= 1'b1;
            x_ctrl.scale  <= fft_scale[stg];
            x_wsrc <= WSRC_TWIDDLE;
            if (inverse && stg == '0) begin
              x_b_zero <= !bin_used(brev(top));
              x_a_zero <= !bin_used(brev(bot));
            end
            x_we0 <= 1'b1; x_we1 <= 1'b1;
            x_waddr0 <= top; x_waddr1 <= bot;
            x_wr_out <= inverse && (stg == ($clog2(LOGN+1))'(LOGN - 1));
            x_out_slot <= dl_idx[0];
          end
          T_CE: begin
            // h_k = y_pilot,k / p ; in CB mode the vector conj(h_k) is stored directly
            x_wsrc <= WSRC_INVP;
            x_ctrl.conj_a <= !zf_mode;
            x_b_zero <= 1'b1;
            x_ce_we  <= zf_mode;
            x_vec_we <= !zf_mode;
            x_kaddr  <= kk;
            x_we1    <= zf_mode;            // keep h_k in place for B_i
            x_waddr1 <= sc_bin(SCW'(kk));
          end
          T_BI, T_YI: begin
            // Y1 = W*A + left, Y2 = Y1 + right -> parent
            x_wsrc <= (tsk == T_BI) ? WSRC_CHEST : WSRC_VEC;
            x_ctrl.conj_w <= (tsk == T_BI);
            x_ctrl.m2_y1 <= 1'b1;
            x_ctrl.m3_c  <= 1'b1;
            x_b_left <= 1'b1;
            x_b_zero <= !has_left;
            x_c_zero <= !has_right;
            x_up <= 1'b1;
            x_up_kind <= (tsk == T_BI) ? UP_GRAM : UP_YSUM;
          end
          T_WA: begin
            // v_j = sum_k D[j][k] conj(h_k)
            x_wsrc <= WSRC_CHEST;
            x_ctrl.conj_w <= 1'b1;
            x_ctrl.conj_a <= (kk < kj);
            x_a_link <= 1'b1;
            x_ctrl.m1_reg <= (kk != '0);
            x_b_zero <= (kk == '0);
            x_ctrl.acc_en <= 1'b1;
            x_vec_we <= (kk == KW'(K - 1));
            x_kaddr  <= kj;
          end
          T_XI: begin
            // x_s = sum_k v_k q_k, written at the bit-reversed bin address
            x_wsrc <= WSRC_VEC;
            x_a_link <= 1'b1; x_a_sym <= 1'b1;
            x_ctrl.m1_reg <= (kk != '0);
            x_b_zero <= (kk == '0);
            x_ctrl.acc_en <= 1'b1;
            x_we1 <= (kk == KW'(K - 1));
            x_waddr1 <= brev(sc_bin(sc));
          end
          default: ;
        endcase
      end
    end
  end

  assign pe_valid  = x_valid;
  assign pe_ctrl   = x_ctrl;
  assign pe_wsrc   = x_wsrc;
  assign pe_a_link = x_a_link;
  assign pe_a_sym  = x_a_sym;
  assign pe_a_zero = x_a_zero;
  assign pe_b_zero = x_b_zero;
  assign pe_b_left = x_b_left;
  assign pe_c_zero = x_c_zero;
  assign sm_wr_out = x_wr_out;
  assign sm_out_slot = x_out_slot;
  assign sm_we0    = x_valid && x_we0;
  assign sm_we1    = x_valid && x_we1;
  assign sm_waddr0 = x_waddr0;
  assign sm_waddr1 = x_waddr1;
  assign up_valid  = x_valid && x_up;
  assign up_kind   = x_up_kind;

  // write side of the single-port memories: the write happens in the execute
  // cycle; within a task a memory is either only read or only written, and
  // the idle cycle between tasks keeps a read from meeting the last write
  always_comb begin
    ce_we    = x_valid && x_ce_we;
    vec_we   = x_valid && x_vec_we;
    ce_en    = ce_rd || ce_we;
    vec_en   = vec_rd || vec_we;
    ce_addr  = ce_we  ? x_kaddr : ce_raddr;
    vec_addr = vec_we ? x_kaddr : vec_raddr;
  end

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tsk <= T_IDLE; after_gap <= T_IDLE; job <= J_PILOT; job_slot <= '0; inverse <= 1'b0;
      stg <= '0; bf <= '0; sc <= '0; kj <= '0; kk <= '0;
      pilot_pend <= 1'b0; pilot_slot <= '0; pilot_frame <= '0;
      ulq_cnt <= '0; q_err <= 1'b0;
      for (int i = 0; i < int'(QD); i++) begin ulq_slot[i] <= '0; ulq_frame[i] <= '0; end
      vec_valid <= 1'b0; vec_frame <= '0; wa_pend <= 1'b0; wa_frame <= '0;
      dl_todo <= '0; dl_idx <= '0; dl_started <= '0; pb_cnt <= '0;
      d_release <= 1'b0;
    end else begin
      d_release <= 1'b0;

      // ---- events
      if (dl_start) dl_started <= dl_started + 1'b1;
      if (sym_done && sym_pilot) begin
        pilot_pend  <= 1'b1;
        pilot_slot  <= sym_slot;
        pilot_frame <= sym_frame;
        dl_started  <= '0;
      end

      // ---- uplink queue: pop (at job start) and push (on reception)
      if (ul_pop_now)
        for (int i = 0; i < int'(QD) - 1; i++) begin
          ulq_slot[i]  <= ulq_slot[i+1];
          ulq_frame[i] <= ulq_frame[i+1];
        end
      if (sym_done && !sym_pilot && ulq_cnt_pop != QW'(QD)) begin
        ulq_slot[ulq_cnt_pop]  <= sym_slot;
        ulq_frame[ulq_cnt_pop] <= sym_frame;
        ulq_cnt <= ulq_cnt_pop + 1'b1;
      end else begin
        ulq_cnt <= ulq_cnt_pop;
      end
      if (sym_done && !sym_pilot && ulq_cnt_pop == QW'(QD)) q_err <= 1'b1;

      // ---- task machine
      case (tsk)
        T_IDLE: begin
          stg <= '0; bf <= '0; sc <= '0; kj <= '0; kk <= '0;
          if (pilot_ok) begin
            job <= J_PILOT; job_slot <= pilot_slot; inverse <= 1'b0;
            pilot_pend <= 1'b0;
            tsk <= T_FFT;
          end else if (ul_ok) begin
            job <= J_UL; job_slot <= ulq_slot[0]; inverse <= 1'b0;
            if (dl_todo != '0) pb_cnt <= pb_cnt + 1'b1;
            tsk <= T_FFT;
          end else if (wa_ok) begin
            job <= J_WA;
            tsk <= T_WA;
          end else if (dl_ok) begin
            job <= J_DL; inverse <= 1'b1;
            tsk <= T_XI;
          end
        end

        T_FFT: if (issue) begin
          if (last_op) begin
            bf <= '0;
            if (stg == ($clog2(LOGN+1))'(LOGN - 1)) begin
              stg <= '0;
              tsk <= T_GAP;
              case (job)
                J_PILOT: after_gap <= T_CE;
                J_UL:    after_gap <= T_YI;
                default: after_gap <= T_IDLE;   // IFFT done: downlink symbol ready
              endcase
              if (job == J_DL) begin
                dl_todo <= dl_todo - 1'b1;
                dl_idx  <= dl_idx + 1'b1;
              end
            end else begin
              stg <= stg + 1'b1;
              tsk <= T_GAP; after_gap <= T_FFT;
            end
          end else bf <= bf + 1'b1;
        end

        T_CE: if (issue) begin
          if (last_op) begin
            kk <= '0;
            tsk <= T_GAP;
            if (zf_mode) begin
              after_gap <= T_BI;
            end else begin
              after_gap <= T_IDLE;
              vec_valid <= 1'b1; vec_frame <= pilot_frame;
              dl_todo <= NDL[$bits(dl_todo)-1:0]; dl_idx <= '0; pb_cnt <= '0;
            end
          end else kk <= kk + 1'b1;
        end

        T_BI: if (issue) begin
          if (last_op) begin
            kj <= '0; kk <= '0;
            tsk <= T_GAP; after_gap <= T_IDLE;
            wa_pend <= 1'b1; wa_frame <= pilot_frame;
          end else if (kk == KW'(K - 1)) begin
            kj <= kj + 1'b1; kk <= kj + 1'b1;
          end else kk <= kk + 1'b1;
        end

        T_WA: if (issue) begin
          if (last_op) begin
            kj <= '0; kk <= '0;
            tsk <= T_GAP; after_gap <= T_IDLE;
            wa_pend <= 1'b0; d_release <= 1'b1;
            vec_valid <= 1'b1; vec_frame <= wa_frame;
            dl_todo <= NDL[$bits(dl_todo)-1:0]; dl_idx <= '0; pb_cnt <= '0;
          end else if (kk == KW'(K - 1)) begin
            kj <= kj + 1'b1; kk <= '0;
          end else kk <= kk + 1'b1;
        end

        T_YI, T_XI: if (issue) begin
          if (last_op) begin
            sc <= '0; kk <= '0;
            tsk <= T_GAP;
            after_gap <= (tsk == T_XI) ? T_FFT : T_IDLE;
          end else if (kk == KW'(K - 1)) begin
            sc <= sc + 1'b1; kk <= '0;
          end else kk <= kk + 1'b1;
        end

        T_GAP: tsk <= after_gap;

        default: tsk <= T_IDLE;
      endcase
    end
  end

  assign busy  = (tsk != T_IDLE);
  assign error = q_err;

endmodule
