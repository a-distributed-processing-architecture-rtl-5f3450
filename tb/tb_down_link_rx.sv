// tb_down_link_rx: self-checking test of the parent-link receiver at K = 20.
// Three frames of traffic are sent: the K(K+1)/2 = 210 entries of D
// interleaved at random with symbol words. Checks: every word is forwarded
// one cycle later; d_ready rises exactly after the last D entry; every D
// entry reads back from its row-major address; symbols leave the queue in
// order and mapped to the levels -3, -1, +1, +3 (times 256); d_release
// empties the D memory; an extra D entry while the memory is full raises the
// error flag.
module tb_down_link_rx;
  import mimo_pkg::*;
  localparam int K = 20, ND = K * (K + 1) / 2, DAW = $clog2(ND), SYM_DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0; dn_word_t in_word = '0;
  logic fwd_valid; dn_word_t fwd_word;
  logic d_ready, d_release = 0, d_re = 0; logic [DAW-1:0] d_raddr = '0; cplx_t d_rdata;
  logic sym_valid, sym_pop = 0; cplx_t sym_data; logic error;

  down_link_rx #(.K(K), .SYM_DEPTH(SYM_DEPTH)) dut (.*);

  cplx_t dm [ND];
  cplx_t symq [$];
  logic v_q = 0; dn_word_t w_q = '0;

  always @(posedge clk) begin
    v_q <= in_valid; w_q <= in_word;
    if (rst_n && v_q) begin
      checks++;
      if (!fwd_valid || fwd_word !== w_q) failures++;
    end
  end

  // consumer of the symbol queue
  always @(negedge clk) begin
    sym_pop <= 1'b0;
    if (rst_n && sym_valid && !sym_pop && $urandom_range(1)) begin
      checks++;
      if (symq.size() == 0 || sym_data !== symq[0]) begin
        failures++;
        if (failures < 10) $display("symbol mismatch");
      end
      if (symq.size() != 0) void'(symq.pop_front());
      sym_pop <= 1'b1;
    end
  end

  function automatic cplx_t lvl(input cplx_t w);
    cplx_t r;
    r.re = 12'((2 * int'(w.re[1:0]) - 3) * 256);
    r.im = 12'((2 * int'(w.im[1:0]) - 3) * 256);
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      int nd;
      nd = 0;
      while (nd < ND) begin
        @(negedge clk);
        checks++; if (d_ready) failures++;
        in_valid = 1;
        in_word.data = cplx_t'($urandom);
        if ($urandom_range(2) == 0 && symq.size() < SYM_DEPTH - 4) begin
          in_word.kind = DN_SYM;
          symq.push_back(lvl(in_word.data));
        end else begin
          in_word.kind = DN_DINV;
          dm[nd] = in_word.data;
          nd++;
        end
      end
      @(negedge clk); in_valid = 0;
      checks++; if (!d_ready) begin failures++; $display("d_ready missing"); end
      for (int i = 0; i < ND; i++) begin
        int a;
        a = (i * 37) % ND;
        @(negedge clk); d_re = 1; d_raddr = DAW'(a);
        @(negedge clk); d_re = 0;
        checks++; if (d_rdata !== dm[a]) begin failures++; if (failures < 10) $display("D mismatch at %0d", a); end
      end
      @(negedge clk); d_release = 1;
      @(negedge clk); d_release = 0;
      checks++; if (d_ready) failures++;
      repeat (60) @(negedge clk);
      checks++; if (symq.size() != 0) begin failures++; $display("symbols left: %0d", symq.size()); end
    end
    checks++; if (error) failures++;
    // extra D entry while full
    for (int i = 0; i <= ND; i++) begin
      @(negedge clk); in_valid = 1; in_word.kind = DN_DINV;
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    checks++; if (!error) begin failures++; $display("error not flagged"); end
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
