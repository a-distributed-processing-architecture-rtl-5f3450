// sample_memory: the node's sample memory, made of three memories as in the
// paper's sample-memory drawing:
//   radio input buffer    N_UL,buffered * N_FFT words of W_ADC (6+6) bits,
//                         written by the radio, read by the PE;
//   FFT processing buffer N_FFT words of W_comp (12+12) bits, written and read
//                         by the PE (in-place FFT/IFFT, decoded/precoded data);
//   radio output buffer   2 * N_FFT words of W_DAC (6+6) bits, written by the
//                         PE (last IFFT stage), read by the radio. The paper
//                         sizes it N_FFT words; here it holds two symbols
//                         (alternating per downlink symbol) so that the next
//                         symbol can be written while the previous one is
//                         still being sent, as the paper's example schedule
//                         requires.
// Each is a two-bank memory (bank_ram) so that the two operands and the two
// results of a butterfly move in one cycle. The PE read side selects the
// input buffer or the FFT buffer (rd_src); the PE write side selects the FFT
// buffer or the output buffer (wr_dst). ADC words are widened to the
// computation format and computation words are narrowed to the DAC format
// here (conversions of this design, see mimo_pkg).
// Timing: all reads are synchronous with one cycle of latency.
module sample_memory
  import mimo_pkg::*;
#(
  parameter int unsigned LOGN   = 11,  // log2(N_FFT)
  parameter int unsigned NUL_BUF = 2,  // N_UL,buffered: symbols in the input buffer
  localparam int unsigned IAW = LOGN + ((NUL_BUF > 1) ? $clog2(NUL_BUF) : 1)
) (
  input  logic            clk,
  // radio side of the input buffer
  input  logic            rx_we,
  input  logic [IAW-1:0]  rx_addr,     // {slot, sample index}
  input  adc_t            rx_data,
  // radio side of the output buffer
  input  logic            tx_re,
  input  logic [LOGN:0]   tx_addr,     // {symbol slot, index}
  output dac_t            tx_data,
  // PE read side
  input  logic            rd_src_fft,  // 1: FFT buffer, 0: input buffer
  input  logic            re0,
  input  logic [IAW-1:0]  raddr0,      // slot bits used for the input buffer only
  output cplx_t           rdata0,
  input  logic            re1,
  input  logic [IAW-1:0]  raddr1,
  output cplx_t           rdata1,
  // PE write side
  input  logic            wr_dst_out,  // 1: output buffer, 0: FFT buffer
  input  logic            wr_out_slot, // output buffer symbol slot
  input  logic            we0,
  input  logic [LOGN-1:0] waddr0,
  input  cplx_t           wdata0,
  input  logic            we1,
  input  logic [LOGN-1:0] waddr1,
  input  cplx_t           wdata1
);

  // ---------------- radio input buffer
  adc_t in_q0, in_q1;
  bank_ram #(.LOGN(LOGN), .SLOTS(NUL_BUF), .WIDTH(2*WADC)) u_input_buf (
    .clk,
    .we0(rx_we), .waddr0(rx_addr), .wdata0(rx_data),
    .we1(1'b0),  .waddr1('0),      .wdata1('0),
    .re0(re0 && !rd_src_fft), .raddr0(raddr0), .rdata0(in_q0),
    .re1(re1 && !rd_src_fft), .raddr1(raddr1), .rdata1(in_q1)
  );

  // ---------------- FFT processing buffer
  cplx_t fb_q0, fb_q1;
  bank_ram #(.LOGN(LOGN), .SLOTS(1), .WIDTH(2*WC)) u_fft_buf (
    .clk,
    .we0(we0 && !wr_dst_out), .waddr0({1'b0, waddr0}), .wdata0(wdata0),
    .we1(we1 && !wr_dst_out), .waddr1({1'b0, waddr1}), .wdata1(wdata1),
    .re0(re0 && rd_src_fft),  .raddr0({1'b0, raddr0[LOGN-1:0]}), .rdata0(fb_q0),
    .re1(re1 && rd_src_fft),  .raddr1({1'b0, raddr1[LOGN-1:0]}), .rdata1(fb_q1)
  );

  // ---------------- radio output buffer
  dac_t ob_unused;
  bank_ram #(.LOGN(LOGN), .SLOTS(2), .WIDTH(2*WDAC)) u_output_buf (
    .clk,
    .we0(we0 && wr_dst_out), .waddr0({wr_out_slot, waddr0}), .wdata0(cplx_to_dac(wdata0)),
    .we1(we1 && wr_dst_out), .waddr1({wr_out_slot, waddr1}), .wdata1(cplx_to_dac(wdata1)),
    .re0(tx_re),  .raddr0(tx_addr), .rdata0(tx_data),
    .re1(1'b0),   .raddr1('0),              .rdata1(ob_unused)
  );

  logic src_q;
  always_ff @(posedge clk) if (re0 || re1) src_q <= rd_src_fft;

  assign rdata0 = src_q ? fb_q0 : adc_to_cplx(in_q0);
  assign rdata1 = src_q ? fb_q1 : adc_to_cplx(in_q1);

endmodule
