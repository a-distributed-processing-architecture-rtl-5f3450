// bank_ram: one of the three sample memories of a node (radio input buffer,
// FFT processing buffer, radio output buffer), built, as in the paper's
// drawing of the sample memory, from two memory banks that each have one write
// and one read port. Two words can be written and two read per cycle.
//
// Bank mapping (own choice, in the spirit of the conflict-free scheme the
// paper cites): a word address is split into a symbol-slot part and an
// in-symbol index n of LOGN bits; the bank is the parity (XOR) of the bits of
// n, and the row inside the bank is {slot, n >> 1}. Two addresses whose
// in-symbol indices differ in exactly one bit, which is the case for the two
// operands of every radix-2 butterfly, always fall in different banks, so the
// two reads and the two writes of a butterfly never collide. Each logical
// port is steered to the bank its address selects; ports must not target the
// same bank in the same cycle (checked by assertions).
//
// Timing: synchronous read, data for an address given in cycle t appears in
// cycle t+1; writes take effect at the clock edge. A read of a row written in
// the same cycle returns the old word.
module bank_ram #(
  parameter int unsigned LOGN  = 11,  // log2(N_FFT)
  parameter int unsigned SLOTS = 1,   // symbols held (N_UL,buffered for the input buffer)
  parameter int unsigned WIDTH = 24,
  localparam int unsigned AW   = LOGN + ((SLOTS > 1) ? $clog2(SLOTS) : 1)  // word address width
) (
  input  logic                       clk,
  // two write ports
  input  logic                       we0,
  input  logic [AW-1:0]              waddr0,
  input  logic [WIDTH-1:0]           wdata0,
  input  logic                       we1,
  input  logic [AW-1:0]              waddr1,
  input  logic [WIDTH-1:0]           wdata1,
  // two read ports
  input  logic                       re0,
  input  logic [AW-1:0]              raddr0,
  output logic [WIDTH-1:0]           rdata0,
  input  logic                       re1,
  input  logic [AW-1:0]              raddr1,
  output logic [WIDTH-1:0]           rdata1
);

  localparam int unsigned ROWS = SLOTS << (LOGN - 1);
  localparam int unsigned RW = $clog2(ROWS);

  logic [WIDTH-1:0] bank0 [ROWS];
  logic [WIDTH-1:0] bank1 [ROWS];

  function automatic logic bank_of(input logic [AW-1:0] a);
    logic [AW-1:0] m;
    m = a & AW'((1 << LOGN) - 1);
    return ^m;
  endfunction

  function automatic logic [RW-1:0] row_of(input logic [AW-1:0] a);
    logic [AW-1:0] r;
    r = a >> 1;                                   // drop bit 0 of the index
    r = (r & AW'((1 << (LOGN-1)) - 1)) | ((a >> LOGN) << (LOGN-1));
    return RW'(r);
  endfunction

  // steer write ports to banks
  logic             bw_en   [2];
  logic [RW-1:0]    bw_row  [2];
  logic [WIDTH-1:0] bw_data [2];
  logic             br_en   [2];
  logic [RW-1:0]    br_row  [2];
  logic             rsel0_q, rsel1_q;
  logic [WIDTH-1:0] bq [2];

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      bw_en[k] = 1'b0; bw_row[k] = '0; bw_data[k] = '0;
      br_en[k] = 1'b0; br_row[k] = '0;
    end
    if (we0) begin
      bw_en[bank_of(waddr0)]   = 1'b1;
      bw_row[bank_of(waddr0)]  = row_of(waddr0);
      bw_data[bank_of(waddr0)] = wdata0;
    end
    if (we1) begin
      bw_en[bank_of(waddr1)]   = 1'b1;
      bw_row[bank_of(waddr1)]  = row_of(waddr1);
      bw_data[bank_of(waddr1)] = wdata1;
    end
    if (re0) begin
      br_en[bank_of(raddr0)]  = 1'b1;
      br_row[bank_of(raddr0)] = row_of(raddr0);
    end
    if (re1) begin
      br_en[bank_of(raddr1)]  = 1'b1;
      br_row[bank_of(raddr1)] = row_of(raddr1);
    end
  end

  always_ff @(posedge clk) begin
    if (bw_en[0]) bank0[bw_row[0]] <= bw_data[0];
    if (bw_en[1]) bank1[bw_row[1]] <= bw_data[1];
    if (br_en[0]) bq[0] <= bank0[br_row[0]];
    if (br_en[1]) bq[1] <= bank1[br_row[1]];
    if (re0) rsel0_q <= bank_of(raddr0);
    if (re1) rsel1_q <= bank_of(raddr1);
  end

  assign rdata0 = rsel0_q ? bq[1] : bq[0];
  assign rdata1 = rsel1_q ? bq[1] : bq[0];

  // the two ports of one kind must use different banks
  a_no_write_conflict: assert property (@(posedge clk)
    !(we0 && we1 && (bank_of(waddr0) == bank_of(waddr1))));
  a_no_read_conflict: assert property (@(posedge clk)
    !(re0 && re1 && (bank_of(raddr0) == bank_of(raddr1))));

endmodule
