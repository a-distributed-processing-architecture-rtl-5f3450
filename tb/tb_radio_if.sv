// tb_radio_if: self-checking test of the radio interface and frame timing
// at a reduced size (16-point symbols, 4-sample cyclic prefix, one uplink
// symbol before and two after the pilot, two downlink symbols, a sample
// every 3 clock cycles, 4 frames). A model of the frame structure predicts,
// for every sample: the input-buffer write (slot used round robin, index
// after the cyclic prefix, data), the end-of-symbol events with the pilot
// flag and slot, the downlink start pulses and the DAC value (zero outside
// downlink periods; otherwise the output-buffer word of slot d mod 2 at the
// cyclic-prefix-first index, provided here by a model of the output buffer).
module tb_radio_if;
  import mimo_pkg::*;
  localparam int LOGN = 4, N = 16, NCP = 4, NUL1 = 1, NUL2 = 2, NDL = 2, NUL_BUF = 2;
  localparam int NSYM = NUL1 + NUL2 + NDL + 3, NSPS = NCP + N, R = 3, NFR = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sample_strobe = 0, frame_start = 0;
  adc_t adc_data = '0;
  dac_t dac_data, tx_data;
  logic rx_we, tx_re, sym_done, sym_pilot, dl_start;
  logic [LOGN:0] rx_addr;
  adc_t rx_data;
  logic [LOGN:0] tx_addr;
  logic sym_slot;
  logic [1:0] sym_frame;

  radio_if #(.LOGN(LOGN), .NCP(NCP), .NUL1(NUL1), .NUL2(NUL2), .NDL(NDL), .NUL_BUF(NUL_BUF)) dut (.*);

  // output buffer model: word = {slot, index} pattern
  function automatic dac_t ob(input logic [LOGN:0] a);
    dac_t d;
    d.re = 6'(int'(a) - 20);
    d.im = 6'(int'(a) * 3);
    return d;
  endfunction
  always_ff @(posedge clk) if (tx_re) tx_data <= ob(tx_addr);

  int n_done = 0, n_pilot = 0, n_dl = 0, n_wr = 0;
  int exp_done = 0, exp_pilot_at = -1, exp_slot = 0;
  int wslot = 0;
  dac_t exp_dac;

  initial begin
    exp_dac = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int g = 0; g < NFR * NSYM * NSPS; g++) begin
      int per, sp, d;
      bit ul, pil, dl;
      per = (g / NSPS) % NSYM;
      sp = g % NSPS;
      pil = (per == NUL1);
      ul  = (per < NUL1) || (per > NUL1 && per <= NUL1 + NUL2);
      dl  = (per >= NUL1 + NUL2 + 2) && (per < NUL1 + NUL2 + 2 + NDL);
      d   = per - (NUL1 + NUL2 + 2);
      @(negedge clk);
      sample_strobe = 1;
      frame_start = (g == 0);
      adc_data = adc_t'($urandom);
      #1;
      // write port in this strobe cycle
      checks++;
      if (rx_we != ((ul || pil) && sp >= NCP)) begin failures++; $display("rx_we wrong at g=%0d", g); end
      if (rx_we) begin
        n_wr++;
        checks++;
        if (rx_addr != {1'(wslot), LOGN'(sp - NCP)} || rx_data != adc_data) begin
          failures++; if (failures < 10) $display("rx addr %0h exp slot %0d idx %0d", rx_addr, wslot, sp - NCP);
        end
      end
      @(negedge clk);
      sample_strobe = 0; frame_start = 0;
      // events of the strobe (registered)
      checks++;
      if (sym_done != ((ul || pil) && sp == NSPS - 1)) begin failures++; $display("sym_done wrong at g=%0d", g); end
      if (sym_done) begin
        n_done++;
        checks++;
        if (sym_pilot != pil || int'(sym_slot) != wslot || int'(sym_frame) != (g / (NSYM * NSPS)) % 4) begin
          failures++; $display("event fields wrong at g=%0d", g);
        end
        if (pil) n_pilot++;
        wslot = (wslot + 1) % NUL_BUF;
      end
      checks++;
      if (dl_start != (dl && sp == 0)) begin failures++; $display("dl_start wrong at g=%0d", g); end
      if (dl_start) n_dl++;
      @(negedge clk);
      // DAC value of this strobe
      if (dl) begin
        int idx;
        idx = (sp < NCP) ? N - NCP + sp : sp - NCP;
        exp_dac = ob({1'(d % 2), LOGN'(idx)});
      end else exp_dac = '0;
      checks++;
      if (dac_data !== exp_dac) begin
        failures++; if (failures < 10) $display("dac %0h exp %0h at g=%0d", dac_data, exp_dac, g);
      end
      repeat (R - 3) @(negedge clk);
    end
    $display("writes=%0d symbol events=%0d pilots=%0d downlink starts=%0d", n_wr, n_done, n_pilot, n_dl);
    checks++; if (n_done != NFR * (NUL1 + NUL2 + 1)) failures++;
    checks++; if (n_pilot != NFR) failures++;
    checks++; if (n_dl != NFR * NDL) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
