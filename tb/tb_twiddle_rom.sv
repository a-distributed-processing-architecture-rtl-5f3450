// tb_twiddle_rom: self-checking test of the twiddle-factor ROM at the full
// size (1024 entries for the 2048-point FFT). Every entry is read and compared
// with round(1024 cos(2 pi i / N)) and round(-1024 sin(2 pi i / N)); the
// output must hold while the ROM is not enabled.
module tb_twiddle_rom;
  import mimo_pkg::*;
  localparam int LOGN = 11, N = 1 << LOGN;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en = 0;
  logic [LOGN-2:0] addr = '0;
  cplx_t data;

  twiddle_rom #(.LOGN(LOGN)) dut (.clk, .en, .addr, .data);

  initial begin
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < N / 2; i++) begin
        int er, ei, idx;
        real ang;
        idx = pass == 0 ? i : $urandom_range(N / 2 - 1);
        @(negedge clk); en = 1; addr = (LOGN-1)'(idx);
        @(negedge clk); en = 0; addr = (LOGN-1)'($urandom);
        ang = 2.0 * 3.14159265358979323846 * idx / N;
        er = int'($floor(1024.0 * $cos(ang) + 0.5));
        ei = int'($floor(-1024.0 * $sin(ang) + 0.5));
        checks++;
        if (int'(data.re) != er || int'(data.im) != ei) begin
          failures++;
          if (failures < 10) $display("entry %0d: %0d,%0d exp %0d,%0d", idx, data.re, data.im, er, ei);
        end
        @(negedge clk);
        checks++; if (int'(data.re) != er) failures++;   // holds while not enabled
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
