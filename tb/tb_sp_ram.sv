// tb_sp_ram: self-checking test of the single-port K-word memory used for the
// channel estimates and the precoding/decoding vector. Random writes and
// reads against a model array; the read data must appear one cycle after the
// address, hold while the memory is not enabled, and the reset must clear
// every word.
module tb_sp_ram;
  localparam int DEPTH = 20, WIDTH = 24;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];

  sp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .rst_n, .en, .we, .addr, .wdata, .rdata);

  initial begin
    logic [WIDTH-1:0] expect_q;
    logic             rd_q;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // reset contents
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 0; addr = i[$clog2(DEPTH)-1:0];
      @(negedge clk); en = 0;
      checks++; if (rdata !== '0) failures++;
    end
    expect_q = '0; rd_q = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (rd_q) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          if (failures < 10) $display("read mismatch %h exp %h", rdata, expect_q);
        end
      end else if (i > 0) begin
        checks++; if (rdata !== expect_q) failures++;   // holds
      end
      en = $urandom_range(3) != 0;
      we = $urandom_range(1);
      addr = $clog2(DEPTH)'($urandom_range(DEPTH - 1));
      wdata = WIDTH'($urandom);
      rd_q = en && !we;
      if (rd_q) expect_q = model[addr];
      if (en && we) model[addr] = wdata;
    end
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
