// down_link_rx: the "Parent in" port of a node. Everything the central unit
// sends downwards, the inverted Gram matrix D and the symbol vectors q to be
// precoded, is forwarded unchanged to both children one cycle later (data is
// not processed on the way down) and is also taken in locally:
//   - D entries (kind DN_DINV) arrive as the upper triangle of the Hermitian
//     K x K matrix, row by row (D[0][0..K-1], D[1][1..K-1], ...), K(K+1)/2
//     words, and are kept in a small D memory until the node has used them to
//     compute its precoding/decoding vector. d_ready rises when all have
//     arrived; d_release empties the memory for the next frame.
//   - symbols (kind DN_SYM) are queued in a FIFO that the PE pops, one symbol
//     per multiply-accumulate, during precoding.
// Sending only the upper triangle follows the paper's communication analysis
// (K(K+1)/2 words of W_comp down per frame); the D memory, the row-major order
// and the queue depth are choices of this design (the paper lists no storage
// for D). The link has no back-pressure downwards: the sender paces the data,
// which the paper describes as a trade-off between link rate and buffer size.
// An overflowing queue or a D word arriving while the D memory is full sets a
// sticky error flag.
// Timing: the D memory has a synchronous read (data one cycle after d_raddr).
module down_link_rx
  import mimo_pkg::*;
#(
  parameter int unsigned K         = 20,
  parameter int unsigned SYM_DEPTH = 16,
  localparam int unsigned ND = K * (K + 1) / 2,
  localparam int unsigned DAW = $clog2(ND)
) (
  input  logic           clk,
  input  logic           rst_n,
  // from the parent
  input  logic           in_valid,
  input  dn_word_t       in_word,
  // forwarded to the children
  output logic           fwd_valid,
  output dn_word_t       fwd_word,
  // D memory
  output logic           d_ready,
  input  logic           d_release,
  input  logic           d_re,
  input  logic [DAW-1:0] d_raddr,
  output cplx_t          d_rdata,
  // symbol queue
  output logic           sym_valid,
  input  logic           sym_pop,
  output cplx_t          sym_data,    // already mapped to the computation format
  output logic           error
);

  // forwarding register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_valid <= 1'b0;
      fwd_word  <= '0;
    end else begin
      fwd_valid <= in_valid;
      if (in_valid) fwd_word <= in_word;
    end
  end

  // D memory
  cplx_t          dmem [ND];
  logic [DAW:0]   d_cnt;
  logic           d_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_cnt <= '0;
      d_err <= 1'b0;
    end else begin
      if (d_release) d_cnt <= '0;
      else if (in_valid && in_word.kind == DN_DINV) begin
        if (d_cnt == (DAW+1)'(ND)) d_err <= 1'b1;
        else                       d_cnt <= d_cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_word.kind == DN_DINV && d_cnt != (DAW+1)'(ND))
      dmem[d_cnt[DAW-1:0]] <= in_word.data;
    if (d_re) d_rdata <= dmem[d_raddr];
  end

  assign d_ready = (d_cnt == (DAW+1)'(ND));

  // symbol queue
  logic        q_ready_unused, q_ovf;
  logic [2*WC-1:0] q_head;
  link_fifo #(.WIDTH(2*WC), .DEPTH(SYM_DEPTH)) u_symq (
    .clk, .rst_n,
    .in_valid (in_valid && in_word.kind == DN_SYM),
    .in_ready (q_ready_unused),
    .in_data  (sym_to_cplx(in_word.data)),
    .out_valid(sym_valid),
    .out_pop  (sym_pop),
    .out_data (q_head),
    .overflow (q_ovf)
  );
  assign sym_data = cplx_t'(q_head);

  assign error = d_err | q_ovf;

endmodule
