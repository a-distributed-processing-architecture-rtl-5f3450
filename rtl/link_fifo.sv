// link_fifo: receive buffer of an inter-node link port ("Left in", "Right in"
// of the node; also used for the symbol queue of "Parent in"). A child node
// sends its partial sums (Gram-matrix entries, decoded-symbol contributions)
// upwards one word per cycle; the parent's PE consumes them when it performs
// the matching multiply-and-add. The paper requires the two rates to match
// and skews the nodes' schedules by the link latency so that data arrives in
// time; this FIFO absorbs the remaining timing difference and gives the sender
// back-pressure (own choice of handshake: valid/ready, a word moves when both
// are high; ready is low when fewer than two places are free, so a sender with
// one cycle of pipeline can still deliver the word it has in flight).
// Timing: first-word fall-through; out_data is the head whenever out_valid.
module link_fifo #(
  parameter int unsigned WIDTH = 25,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_pop,
  output logic [WIDTH-1:0] out_data,
  output logic             overflow   // sticky: a word arrived while full
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rp, wp;
  logic [PW:0]      cnt;

  wire do_push = in_valid && (cnt != (PW+1)'(DEPTH));
  wire do_pop  = out_pop && (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0; overflow <= 1'b0;
    end else begin
      if (do_push) begin
        wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) begin
        rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      end
      cnt <= cnt + (PW+1)'(do_push) - (PW+1)'(do_pop);
      if (in_valid && (cnt == (PW+1)'(DEPTH))) overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= in_data;

  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign in_ready  = (cnt + 2 <= (PW+1)'(DEPTH));

  a_pop_nonempty: assert property (@(posedge clk) out_pop |-> out_valid);

endmodule
