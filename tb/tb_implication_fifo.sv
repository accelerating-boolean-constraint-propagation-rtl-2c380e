// tb_implication_fifo: random push/pop traffic against a queue model.
//
// Uses a depth of 8 so that full and empty are reached often. Random pushes and pops,
// including simultaneous ones, are applied only when legal (no push when full, no pop
// when empty); head, empty, full and count are compared with a SystemVerilog queue every
// cycle. Full and empty must each have been reached.
module tb_implication_fifo;
  import bcp_pkg::*;
  localparam int D = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, empty, full;
  impl_t din, head;
  logic [$clog2(D):0] count;

  implication_fifo #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  impl_t q[$];

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int t = 0; t < 5000; t++) begin
      int bias;
      bias = (t / 500) % 2 ? 70 : 30;   // alternate filling and draining phases
      push = !full && ($urandom_range(0, 99) < bias);
      pop  = !empty && ($urandom_range(0, 99) < 100 - bias);
      din  = impl_t'($urandom_range(0, 127));
      @(posedge clk); #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == D) ||
          (q.size() > 0 && head !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d count=%0d exp=%0d head=%h", t, count, q.size(), head);
      end
      if (full) n_full++;
      if (empty) n_empty++;
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
