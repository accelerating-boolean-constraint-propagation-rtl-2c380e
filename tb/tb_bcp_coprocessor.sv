// tb_bcp_coprocessor: end-to-end test of the coprocessor with the host model running DPLL.
//
// The coprocessor is built small here (32 clause processors, a 2-entry implication FIFO)
// so that a 170-clause, 40-variable formula needs several partitions and hot swaps, and
// the FIFO fills up while the host is polling. The host model solves the formula and
// checks every implication, every conflict and the final assignment independently. This
// bench also watches the engine and counts how often each mechanism happened: decisions,
// propagated implications, cycles with several unit clauses at once (the implication
// selector choosing), conflicts, backtracks, hot swaps and FIFO-full stalls. A mechanism
// that never happened counts as a failure.
module tb_bcp_coprocessor;
  import bcp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [4:0]  awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        done, complete;
  int          h_checks, h_failures, n_dec, n_impl, n_conf, n_bt, n_clr, n_swap, n_stall;
  longint      n_cyc;

  bcp_coprocessor #(.NUM_CP(32), .FIFO_DEPTH(2)) dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp)
  );

  host_model #(.NUM_CP(32), .NV(40), .NC(170), .SEED(7), .VERBOSE(1)) host (
    .clk, .rst_n,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wstrb(wstrb),
    .m_bvalid(bvalid), .m_bready(bready), .m_bresp(bresp),
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rresp(rresp),
    .done, .complete, .checks(h_checks), .failures(h_failures),
    .n_decisions(n_dec), .n_implications(n_impl), .n_conflicts(n_conf), .n_backtracks(n_bt), .n_clear_alls(n_clr),
    .n_swaps(n_swap), .n_stall_cycles(n_stall), .n_engine_cycles(n_cyc)
  );

  // engine-side counters
  int e_dec = 0, e_impl = 0, e_multi = 0, e_conf = 0, e_bt = 0, e_load = 0, e_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_engine.u_cu.accept && dut.cmd.op == OP_DECIDE)    e_dec++;
    if (dut.u_engine.u_cu.accept && dut.cmd.op == OP_BACKTRACK) e_bt++;
    if (dut.u_engine.load)                                     e_load++;
    if (dut.u_engine.fifo_push)                                e_impl++;
    if (dut.u_engine.fifo_push && $countones(dut.u_engine.unit) > 1) e_multi++;
    if (dut.u_engine.u_cu.stall)                               e_stall++;
    if (dut.u_engine.u_cu.state_q == 1'b1 && dut.u_engine.conflict_any) e_conf++;
  end

  int checks = 0, failures = 0;
  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    @(posedge clk);
    checks += h_checks;
    failures += h_failures;
    checks++;
    if (!complete) begin failures++; $display("FAIL solve did not complete"); end
    checks++;
    if (e_impl != n_impl || e_dec < n_dec) begin
      failures++; $display("FAIL host and engine disagree on implication count %0d/%0d", e_impl, n_impl);
    end
    checks++;
    if (e_conf != n_conf) begin failures++; $display("FAIL conflict count engine %0d host %0d", e_conf, n_conf); end
    checks++;
    if (e_stall != n_stall) begin failures++; $display("FAIL stall count engine %0d host %0d", e_stall, n_stall); end
    need("decision", e_dec);
    need("implication", e_impl);
    need("selection among several unit clauses", e_multi);
    need("conflict", e_conf);
    need("backtrack", e_bt);
    need("hot swap", n_swap > 1 ? n_swap : 0);
    need("FIFO-full stall", e_stall);
    $display("engine: decisions=%0d implications=%0d multi-unit=%0d conflicts=%0d backtracks=%0d clause loads=%0d stall cycles=%0d",
             e_dec, e_impl, e_multi, e_conf, e_bt, e_load, e_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
