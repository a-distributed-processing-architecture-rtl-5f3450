// tb_bank_ram: self-checking test of the two-bank memory at the full size
// (2048 words per slot, two slots). Each cycle both write ports and both read
// ports are used with address pairs that differ in one index bit, as the
// butterflies of every FFT stage do; such pairs always fall into different
// banks. Data is compared with a model array one cycle after the read.
module tb_bank_ram;
  localparam int LOGN = 11, SLOTS = 2, WIDTH = 24;
  localparam int AW = LOGN + 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we0 = 0, we1 = 0, re0 = 0, re1 = 0;
  logic [AW-1:0] waddr0 = '0, waddr1 = '0, raddr0 = '0, raddr1 = '0;
  logic [WIDTH-1:0] wdata0 = '0, wdata1 = '0, rdata0, rdata1;
  logic [WIDTH-1:0] model [1 << AW];

  bank_ram #(.LOGN(LOGN), .SLOTS(SLOTS), .WIDTH(WIDTH)) dut (
    .clk, .we0, .waddr0, .wdata0, .we1, .waddr1, .wdata1,
    .re0, .raddr0, .rdata0, .re1, .raddr1, .rdata1);

  function automatic void pair(output logic [AW-1:0] a0, output logic [AW-1:0] a1);
    int b;
    a0 = AW'($urandom);
    b = $urandom_range(LOGN - 1);
    a1 = a0 ^ AW'(1 << b);
  endfunction

  initial begin
    logic [WIDTH-1:0] e0, e1;
    logic v0, v1;
    // fill every word through both ports
    for (int i = 0; i < (1 << AW); i += 2) begin
      @(negedge clk);
      we0 = 1; we1 = 1; re0 = 0; re1 = 0;
      waddr0 = AW'(i); waddr1 = AW'(i + 1);
      wdata0 = WIDTH'($urandom); wdata1 = WIDTH'($urandom);
      model[i] = wdata0; model[i + 1] = wdata1;
    end
    v0 = 0; v1 = 0; e0 = '0; e1 = '0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (v0) begin checks++; if (rdata0 !== e0) begin failures++; if (failures < 10) $display("port0 %h exp %h", rdata0, e0); end end
      if (v1) begin checks++; if (rdata1 !== e1) begin failures++; if (failures < 10) $display("port1 %h exp %h", rdata1, e1); end end
      pair(raddr0, raddr1);
      re0 = $urandom_range(3) != 0; re1 = $urandom_range(3) != 0;
      pair(waddr0, waddr1);
      we0 = $urandom_range(1); we1 = $urandom_range(1);
      wdata0 = WIDTH'($urandom); wdata1 = WIDTH'($urandom);
      // reads see the contents before this cycle's writes
      v0 = re0; v1 = re1;
      if (re0) e0 = model[raddr0];
      if (re1) e1 = model[raddr1];
      if (we0) model[waddr0] = wdata0;
      if (we1) model[waddr1] = wdata1;
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
