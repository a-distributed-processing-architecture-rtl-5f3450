// mimo_node: one antenna node of the distributed massive-MIMO base station.
// Nodes form a binary tree below a central control unit (CCU); each node owns
// one antenna and performs, for that antenna, the OFDM (de)modulation, the
// channel estimation, its share of the Gram matrix H^H H, its column/row of
// the decoding/precoding matrix, and the per-subcarrier decoding and
// precoding. Partial sums from the two children are added on the way up;
// the inverted Gram matrix and the downlink symbols are passed on the way down.
//
// Structure (the paper's node architecture): one processing element (pe) fed
// by a twiddle-factor ROM, a channel-estimate memory and a precoding/decoding
// vector memory on its W input; by the sample memory or the parent link on A;
// by the sample memory or the left-child link on B; by the right-child link on
// C. Y1/Y2 go back to the sample memory (and to the vector memories) and to
// the parent link. A control unit (node_ctrl) sequences the tasks; radio_if
// moves samples between the converters and the sample memory.
// Own choices: valid/ready framing on the upward links, the D memory and the
// symbol queue on the downward link, the parent link taking Y2 (the paper's
// drawing connects Y1; the three-input sum of multiply-and-add appears on Y2
// of the PE) and the configuration inputs below. The analog radio and the
// serial link PHYs are outside this module: their digital sides are ports.
// The kind bit of the children's words is carried through their queues but
// not used here (a node adds whatever its children send, in order); it is
// there for the central unit, so the lint note about it stands.
//
// Ports: adc_data is sampled and dac_data produced once per sample_strobe;
// frame_start marks the first sample of a frame. up_* carries Gram-matrix and
// decoded-symbol partial sums to the parent, one word per cycle when
// up_ready; left_*/right_* receive the same from the children; dn_* receives
// D and the symbols from the parent and dn_fwd_* forwards them to the
// children one cycle later.
module mimo_node
  import mimo_pkg::*;
#(
  parameter int unsigned K       = 20,    // terminals
  parameter int unsigned LOGN    = 11,    // log2(N_FFT), N_FFT = 2048
  parameter int unsigned NSC     = 1200,  // used subcarriers
  parameter int unsigned NCP     = 144,   // cyclic prefix (not given by the paper)
  parameter int unsigned NUL1    = 0,     // uplink symbols before the pilot
  parameter int unsigned NUL2    = 2,     // uplink symbols after the pilot
  parameter int unsigned NDL     = 2,     // downlink symbols
  parameter int unsigned NUL_PB  = 0,     // uplink symbols processed before the downlink
  parameter int unsigned NUL_BUF = 2,     // uplink symbols the input buffer holds
  parameter int unsigned LINK_DEPTH = 8,  // child receive queue depth
  parameter int unsigned SYM_DEPTH  = 16  // downlink symbol queue depth
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            zf_mode,
  input  logic            has_left,
  input  logic            has_right,
  input  logic [LOGN-1:0] fft_scale,
  input  cplx_t           inv_p,        // 1/p of the pilot
  // radio (converter side)
  input  logic            sample_strobe,
  input  logic            frame_start,
  input  adc_t            adc_data,
  output dac_t            dac_data,
  // parent link
  output logic            up_valid,
  input  logic            up_ready,
  output up_word_t        up_word,
  input  logic            dn_valid,
  input  dn_word_t        dn_word,
  // child links
  input  logic            left_valid,
  output logic            left_ready,
  input  up_word_t        left_word,
  input  logic            right_valid,
  output logic            right_ready,
  input  up_word_t        right_word,
  output logic            dn_fwd_valid,
  output dn_word_t        dn_fwd_word,
  // status
  output logic            busy,
  output logic            stall,
  output logic            error
);

  localparam int unsigned SLW = (NUL_BUF > 1) ? $clog2(NUL_BUF) : 1;
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned ND  = K * (K + 1) / 2;
  localparam int unsigned DAW = $clog2(ND);

  // ---------------------------------------------------------------- radio interface
  logic                rx_we, tx_re;
  logic [SLW+LOGN-1:0] rx_addr;
  adc_t                rx_data;
  logic [LOGN:0]       tx_addr;
  dac_t                tx_data;
  logic                sym_done, sym_pilot, dl_start;
  logic [SLW-1:0]      sym_slot;
  logic [1:0]          sym_frame;

  radio_if #(.LOGN(LOGN), .NCP(NCP), .NUL1(NUL1), .NUL2(NUL2), .NDL(NDL), .NUL_BUF(NUL_BUF)) u_radio_if (
    .clk, .rst_n, .sample_strobe, .frame_start, .adc_data, .dac_data,
    .rx_we, .rx_addr, .rx_data, .tx_re, .tx_addr, .tx_data,
    .sym_done, .sym_pilot, .sym_slot, .sym_frame, .dl_start
  );

  // ---------------------------------------------------------------- control
  logic                d_ready, d_release, d_re, sym_valid, sym_pop;
  logic [DAW-1:0]      d_raddr;
  logic                lq_valid, lq_pop, rq_valid, rq_pop, up_v;
  up_kind_e            up_kind;
  logic                sm_rd_fft, sm_re0, sm_re1, sm_wr_out, sm_out_slot, sm_we0, sm_we1;
  logic [SLW+LOGN-1:0] sm_raddr0, sm_raddr1;
  logic [LOGN-1:0]     sm_waddr0, sm_waddr1;
  logic                tw_en, ce_en, ce_we, vec_en, vec_we;
  logic [LOGN-2:0]     tw_addr;
  logic [KW-1:0]       ce_addr, vec_addr;
  logic                pe_valid, pe_a_link, pe_a_sym, pe_a_zero, pe_b_zero, pe_b_left, pe_c_zero;
  pe_ctrl_t            pe_ctrl;
  wsrc_e               pe_wsrc;
  logic                ctrl_err, dn_err, l_ovf, r_ovf;

  node_ctrl #(.K(K), .LOGN(LOGN), .NSC(NSC), .NDL(NDL), .NUL_PB(NUL_PB), .NUL_BUF(NUL_BUF)) u_ctrl (
    .clk, .rst_n, .zf_mode, .has_left, .has_right, .fft_scale,
    .sym_done, .sym_pilot, .sym_slot, .sym_frame, .dl_start,
    .d_ready, .d_release, .d_re, .d_raddr, .sym_valid, .sym_pop,
    .left_valid(lq_valid), .left_pop(lq_pop), .right_valid(rq_valid), .right_pop(rq_pop),
    .up_ready, .up_valid(up_v), .up_kind,
    .sm_rd_fft, .sm_re0, .sm_raddr0, .sm_re1, .sm_raddr1,
    .sm_wr_out, .sm_out_slot, .sm_we0, .sm_waddr0, .sm_we1, .sm_waddr1,
    .tw_en, .tw_addr, .ce_en, .ce_we, .ce_addr, .vec_en, .vec_we, .vec_addr,
    .pe_valid, .pe_ctrl, .pe_wsrc, .pe_a_link, .pe_a_sym, .pe_a_zero,
    .pe_b_zero, .pe_b_left, .pe_c_zero,
    .busy, .stall, .error(ctrl_err)
  );

  // ---------------------------------------------------------------- links
  cplx_t d_rdata, sym_data;
  down_link_rx #(.K(K), .SYM_DEPTH(SYM_DEPTH)) u_parent_in (
    .clk, .rst_n, .in_valid(dn_valid), .in_word(dn_word),
    .fwd_valid(dn_fwd_valid), .fwd_word(dn_fwd_word),
    .d_ready, .d_release, .d_re, .d_raddr, .d_rdata,
    .sym_valid, .sym_pop, .sym_data, .error(dn_err)
  );

  up_word_t lq_word, rq_word;
  link_fifo #(.WIDTH($bits(up_word_t)), .DEPTH(LINK_DEPTH)) u_left_in (
    .clk, .rst_n, .in_valid(left_valid), .in_ready(left_ready), .in_data(left_word),
    .out_valid(lq_valid), .out_pop(lq_pop), .out_data(lq_word), .overflow(l_ovf)
  );
  link_fifo #(.WIDTH($bits(up_word_t)), .DEPTH(LINK_DEPTH)) u_right_in (
    .clk, .rst_n, .in_valid(right_valid), .in_ready(right_ready), .in_data(right_word),
    .out_valid(rq_valid), .out_pop(rq_pop), .out_data(rq_word), .overflow(r_ovf)
  );

  // queue heads taken in the issue cycle, used in the execute cycle
  cplx_t sym_q, left_q, right_q;
  always_ff @(posedge clk) begin
    if (sym_pop) sym_q   <= sym_data;
    if (lq_pop)  left_q  <= lq_word.data;
    if (rq_pop)  right_q <= rq_word.data;
  end

  // ---------------------------------------------------------------- memories
  cplx_t sm_rdata0, sm_rdata1, y1, y2;
  sample_memory #(.LOGN(LOGN), .NUL_BUF(NUL_BUF)) u_sample_mem (
    .clk,
    .rx_we, .rx_addr, .rx_data,
    .tx_re, .tx_addr, .tx_data,
    .rd_src_fft(sm_rd_fft), .re0(sm_re0), .raddr0(sm_raddr0), .rdata0(sm_rdata0),
    .re1(sm_re1), .raddr1(sm_raddr1), .rdata1(sm_rdata1),
    .wr_dst_out(sm_wr_out), .wr_out_slot(sm_out_slot), .we0(sm_we0), .waddr0(sm_waddr0), .wdata0(y2),
    .we1(sm_we1), .waddr1(sm_waddr1), .wdata1(y1)
  );

  cplx_t tw_data;
  twiddle_rom #(.LOGN(LOGN)) u_twiddle (.clk, .en(tw_en), .addr(tw_addr), .data(tw_data));

  logic [2*WC-1:0] ce_rdata, vec_rdata;
  sp_ram #(.DEPTH(K), .WIDTH(2*WC)) u_chest (
    .clk, .rst_n, .en(ce_en), .we(ce_we), .addr(ce_addr), .wdata(y1), .rdata(ce_rdata)
  );
  sp_ram #(.DEPTH(K), .WIDTH(2*WC)) u_vec (
    .clk, .rst_n, .en(vec_en), .we(vec_we), .addr(vec_addr), .wdata(y1), .rdata(vec_rdata)
  );

  // ---------------------------------------------------------------- PE and operand multiplexers
  cplx_t w_op, a_op, b_op, c_op;
  always_comb begin
    unique case (pe_wsrc)
      WSRC_TWIDDLE: w_op = tw_data;
      WSRC_CHEST:   w_op = cplx_t'(ce_rdata);
      WSRC_VEC:     w_op = cplx_t'(vec_rdata);
      default:      w_op = inv_p;
    endcase
    if (pe_a_zero)      a_op = '0;
    else if (pe_a_link) a_op = pe_a_sym ? sym_q : d_rdata;
    else                a_op = sm_rdata1;
    if (pe_b_zero)      b_op = '0;
    else if (pe_b_left) b_op = left_q;
    else                b_op = sm_rdata0;
    c_op = pe_c_zero ? '0 : right_q;
  end

  pe u_pe (
    .clk, .rst_n, .valid(pe_valid), .ctrl(pe_ctrl),
    .w(w_op), .a(a_op), .b(b_op), .c(c_op), .y1, .y2
  );

  // ---------------------------------------------------------------- parent out
  assign up_valid     = up_v;
  assign up_word.kind = up_kind;
  assign up_word.data = y2;

  assign error = ctrl_err | dn_err | l_ovf | r_ovf;

endmodule
