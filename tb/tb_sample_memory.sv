// tb_sample_memory: self-checking test of the sample memory at the full
// size (2048-point symbols, two buffered uplink symbols, two output slots).
//   1. The radio writes random ADC samples into both input slots; the PE
//      read ports fetch them as butterfly pairs and must see them widened to
//      the computation format.
//   2. The PE writes random pairs into the FFT buffer and reads them back,
//      also while writing the same pair in the same cycle (read before write).
//   3. The PE writes both output-buffer slots; the radio read port must see
//      the words narrowed (and saturated) to the DAC format.
module tb_sample_memory;
  import mimo_pkg::*;
  localparam int LOGN = 11, N = 1 << LOGN, NUL_BUF = 2;
  localparam int IAW = LOGN + 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rx_we = 0; logic [IAW-1:0] rx_addr = '0; adc_t rx_data = '0;
  logic tx_re = 0; logic [LOGN:0] tx_addr = '0; dac_t tx_data;
  logic rd_src_fft = 0, re0 = 0, re1 = 0;
  logic [IAW-1:0] raddr0 = '0, raddr1 = '0;
  cplx_t rdata0, rdata1;
  logic wr_dst_out = 0, wr_out_slot = 0, we0 = 0, we1 = 0;
  logic [LOGN-1:0] waddr0 = '0, waddr1 = '0;
  cplx_t wdata0 = '0, wdata1 = '0;

  sample_memory #(.LOGN(LOGN), .NUL_BUF(NUL_BUF)) dut (.*);

  adc_t  in_m  [NUL_BUF * N];
  cplx_t fft_m [N];
  cplx_t out_m [2 * N];

  function automatic int dac1(input int v);
    int t = v >>> 5;
    if (t > 31) return 31;
    if (t < -32) return -32;
    return t;
  endfunction

  initial begin
    // 1. radio writes, PE reads
    for (int i = 0; i < NUL_BUF * N; i++) begin
      @(negedge clk);
      rx_we = 1; rx_addr = IAW'(i); rx_data = adc_t'($urandom); in_m[i] = rx_data;
    end
    @(negedge clk); rx_we = 0;
    for (int i = 0; i < 3000; i++) begin
      int a0, a1;
      a0 = $urandom_range(NUL_BUF * N - 1);
      a1 = a0 ^ (1 << $urandom_range(LOGN - 1));
      @(negedge clk);
      rd_src_fft = 0; re0 = 1; re1 = 1; raddr0 = IAW'(a0); raddr1 = IAW'(a1);
      @(negedge clk);
      re0 = 0; re1 = 0;
      checks++;
      if (int'(rdata0.re) != int'(in_m[a0].re) * 32 || int'(rdata0.im) != int'(in_m[a0].im) * 32 ||
          int'(rdata1.re) != int'(in_m[a1].re) * 32 || int'(rdata1.im) != int'(in_m[a1].im) * 32) begin
        failures++;
        if (failures < 10) $display("input buffer read mismatch at %0d/%0d", a0, a1);
      end
    end
    // 2. FFT buffer
    for (int i = 0; i < N; i += 2) begin
      @(negedge clk);
      wr_dst_out = 0; we0 = 1; we1 = 1; waddr0 = LOGN'(i); waddr1 = LOGN'(i + 1);
      wdata0 = cplx_t'($urandom); wdata1 = cplx_t'($urandom);
      fft_m[i] = wdata0; fft_m[i + 1] = wdata1;
    end
    @(negedge clk); we0 = 0; we1 = 0;
    for (int i = 0; i < 3000; i++) begin
      int a0, a1;
      a0 = $urandom_range(N - 1);
      a1 = a0 ^ (1 << $urandom_range(LOGN - 1));
      @(negedge clk);
      rd_src_fft = 1; re0 = 1; re1 = 1; raddr0 = IAW'(a0); raddr1 = IAW'(a1);
      we0 = 1; we1 = 1; waddr0 = LOGN'(a0); waddr1 = LOGN'(a1);
      wdata0 = cplx_t'($urandom); wdata1 = cplx_t'($urandom);
      @(negedge clk);
      re0 = 0; re1 = 0; we0 = 0; we1 = 0;
      checks++;
      if (rdata0 !== fft_m[a0] || rdata1 !== fft_m[a1]) begin
        failures++;
        if (failures < 10) $display("FFT buffer read mismatch at %0d/%0d", a0, a1);
      end
      fft_m[a0] = wdata0; fft_m[a1] = wdata1;
    end
    // 3. output buffer
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < N; i += 2) begin
        @(negedge clk);
        wr_dst_out = 1; wr_out_slot = s[0]; we0 = 1; we1 = 1;
        waddr0 = LOGN'(i); waddr1 = LOGN'(i + 1);
        wdata0 = cplx_t'($urandom); wdata1 = cplx_t'($urandom);
        out_m[s * N + i] = wdata0; out_m[s * N + i + 1] = wdata1;
      end
    @(negedge clk); we0 = 0; we1 = 0; wr_dst_out = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = $urandom_range(2 * N - 1);
      @(negedge clk); tx_re = 1; tx_addr = (LOGN+1)'(a);
      @(negedge clk); tx_re = 0;
      checks++;
      if (int'(tx_data.re) != dac1(out_m[a].re) || int'(tx_data.im) != dac1(out_m[a].im)) begin
        failures++;
        if (failures < 10) $display("output buffer mismatch at %0d: %0d exp %0d", a, tx_data.re, dac1(out_m[a].re));
      end
    end
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
