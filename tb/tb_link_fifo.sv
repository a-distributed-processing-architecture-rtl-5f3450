// tb_link_fifo: self-checking test of the first-word-fall-through link queue.
// A producer that respects in_ready (one word may still be in flight) and a
// random consumer move words through the queue; order and contents are
// compared with a model queue. The ready threshold, the full condition and
// the sticky overflow flag (provoked at the end by ignoring in_ready) are
// checked too.
module tb_link_fifo;
  localparam int WIDTH = 25, DEPTH = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_pop = 0;
  logic in_ready, out_valid, overflow;
  logic [WIDTH-1:0] in_data = '0, out_data;
  logic [WIDTH-1:0] model [$];
  int n_full = 0, n_notready = 0;

  link_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_pop, .out_data, .overflow);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      int phase;
      phase = (i / 500) % 2;   // alternate fast producer / fast consumer
      @(negedge clk);
      checks++;
      if (out_valid != (model.size() != 0)) failures++;
      if (out_valid) begin
        checks++;
        if (out_data !== model[0]) begin failures++; if (failures < 10) $display("data %h exp %h", out_data, model[0]); end
      end
      checks++; if (in_ready != (model.size() + 2 <= DEPTH)) failures++;
      if (!in_ready) n_notready++;
      if (model.size() == DEPTH) n_full++;
      in_valid = in_ready && ($urandom_range(3) < (phase ? 1 : 3));
      in_data = WIDTH'($urandom);
      out_pop = out_valid && ($urandom_range(3) < (phase ? 3 : 1));
      if (out_pop) void'(model.pop_front());
      if (in_valid) model.push_back(in_data);
    end
    checks++; if (overflow) failures++;
    checks++; if (n_notready == 0) failures++;
    // ignore in_ready: fill up and overflow
    @(negedge clk); out_pop = 0;
    for (int i = 0; i < DEPTH + 2; i++) begin
      in_valid = 1; @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    checks++; if (!overflow) begin failures++; $display("overflow not flagged"); end
    $display("not-ready cycles=%0d", n_notready);
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
