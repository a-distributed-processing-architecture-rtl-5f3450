// radio_if: the node's interface between the radio (ADC/DAC, running at the
// sample rate) and the sample memory, and the keeper of the frame timing.
// A frame (TDD, OFDM) is, in order: N_UL,1 uplink symbols, the uplink pilot,
// N_UL,2 uplink symbols, a guard interval, N_DL downlink symbols and a second
// guard interval, N_UL,1 + N_UL,2 + N_DL + 3 symbol periods in all. Each
// symbol period is N_CP + N_FFT samples.
//   - Uplink and pilot periods: the cyclic prefix is dropped and the N_FFT
//     samples are written to the next slot of the radio input buffer (slots
//     used round robin). At the end of the period a one-cycle event reports
//     the slot, whether it was the pilot, and the frame number.
//   - Downlink periods: the finished symbol in the radio output buffer is read
//     out to the DAC, the cyclic prefix first (the last N_CP words), then all
//     N_FFT words. Downlink symbol d of a frame is read from output-buffer
//     slot d mod 2. dl_start pulses at the first sample of each downlink symbol.
//   - Guard periods: the DAC gets zeros.
// The frame structure and the cyclic-prefix handling follow the paper; the
// cyclic-prefix length (144 samples, LTE normal prefix at 2048 points) is not
// given by the paper. The system is synchronous: sample_strobe marks one
// sample period of the node clock (f_clk is an integer multiple of
// f_sample), frame_start (sampled with a strobe) aligns the frame counter.
// Timing: dac_data changes one clock cycle after each strobe.
module radio_if
  import mimo_pkg::*;
#(
  parameter int unsigned LOGN    = 11,
  parameter int unsigned NCP     = 144,
  parameter int unsigned NUL1    = 0,
  parameter int unsigned NUL2    = 2,
  parameter int unsigned NDL     = 2,
  parameter int unsigned NUL_BUF = 2,
  localparam int unsigned SLW = (NUL_BUF > 1) ? $clog2(NUL_BUF) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample_strobe,
  input  logic            frame_start,
  input  adc_t            adc_data,
  output dac_t            dac_data,
  // input buffer write port
  output logic            rx_we,
  output logic [SLW+LOGN-1:0] rx_addr,
  output adc_t            rx_data,
  // output buffer read port
  output logic            tx_re,
  output logic [LOGN:0]   tx_addr,   // {slot, index}
  input  dac_t            tx_data,
  // events
  output logic            sym_done,
  output logic            sym_pilot,
  output logic [SLW-1:0]  sym_slot,
  output logic [1:0]      sym_frame,
  output logic            dl_start
);

  localparam int unsigned NFFT = 1 << LOGN;
  localparam int unsigned NSPS = NCP + NFFT;              // samples per symbol
  localparam int unsigned NSYM = NUL1 + NUL2 + NDL + 3;   // symbols per frame
  localparam int unsigned CW = $clog2(NSPS);
  localparam int unsigned YW = $clog2(NSYM + 1);

  typedef enum logic [1:0] {P_UL, P_PILOT, P_GUARD, P_DL} period_e;

  function automatic period_e period_of(input logic [YW-1:0] s);
    if (int'(s) < int'(NUL1))              return P_UL;
    else if (s == YW'(NUL1))               return P_PILOT;
    else if (s < YW'(NUL1 + 1 + NUL2))     return P_UL;
    else if (s == YW'(NUL1 + 1 + NUL2))    return P_GUARD;
    else if (s < YW'(NUL1 + 2 + NUL2 + NDL)) return P_DL;
    else                                   return P_GUARD;
  endfunction

  logic [CW-1:0]  samp;   // sample within the symbol period
  logic [YW-1:0]  sym;    // symbol period within the frame
  logic [SLW-1:0] wslot;
  logic           running;
  period_e        per;
  logic           tx_q;
  logic [1:0]     frame_id;   // frame number modulo 4

  always_comb begin
    per = period_of(sym);
    if (sample_strobe && frame_start) per = period_of('0);
  end

  // the sample index of this strobe (frame_start restarts the frame)
  logic [CW-1:0] cur_samp;
  assign cur_samp = frame_start ? '0 : samp;
  wire active = running || frame_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      samp <= '0; sym <= '0; wslot <= '0; running <= 1'b0; frame_id <= '0;
    end else if (sample_strobe && active) begin
      running <= 1'b1;
      if (frame_start) begin
        sym <= '0;
        // a resynchronisation in mid-frame starts a new frame number
        if (running && (samp != '0 || sym != '0)) frame_id <= frame_id + 1'b1;
      end
      if (cur_samp == CW'(NSPS - 1)) begin
        samp <= '0;
        if ((per == P_UL) || (per == P_PILOT))
          wslot <= (wslot == SLW'(NUL_BUF - 1)) ? '0 : wslot + 1'b1;
        if ((frame_start ? '0 : sym) == YW'(NSYM - 1)) begin
          sym      <= '0;
          frame_id <= frame_id + 1'b1;
        end else begin
          sym <= (frame_start ? '0 : sym) + 1'b1;
        end
      end else begin
        samp <= cur_samp + 1'b1;
      end
    end
  end

  // uplink: store samples after the cyclic prefix
  always_comb begin
    rx_we   = sample_strobe && active && ((per == P_UL) || (per == P_PILOT)) && (cur_samp >= CW'(NCP));
    rx_addr = {wslot, LOGN'(cur_samp - CW'(NCP))};
    rx_data = adc_data;
  end

  // end-of-symbol event
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym_done <= 1'b0; sym_pilot <= 1'b0; sym_slot <= '0; sym_frame <= '0; dl_start <= 1'b0;
    end else begin
      sym_done <= sample_strobe && active && ((per == P_UL) || (per == P_PILOT))
                  && (cur_samp == CW'(NSPS - 1));
      sym_pilot <= (per == P_PILOT);
      sym_slot  <= wslot;
      sym_frame <= frame_id;
      dl_start  <= sample_strobe && active && (per == P_DL) && (cur_samp == '0);
    end
  end

  // downlink: read out cyclic prefix, then the symbol
  // slot = (symbol period - first downlink period) mod 2
  logic dl_slot;
  assign dl_slot = (frame_start ? 1'b0 : sym[0]) ^ 1'((NUL1 + NUL2 + 2) % 2);
  always_comb begin
    tx_re   = sample_strobe && active && (per == P_DL);
    tx_addr = {dl_slot, (cur_samp < CW'(NCP)) ? LOGN'(CW'(NFFT - NCP) + cur_samp)
                                             : LOGN'(cur_samp - CW'(NCP))};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_q <= 1'b0; dac_data <= '0;
    end else begin
      tx_q <= tx_re;
      if (sample_strobe && active && !tx_re) dac_data <= '0;
      else if (tx_q)                         dac_data <= tx_data;
    end
  end

endmodule
