// tb_bcp_full: the coprocessor at its default size (224 clause processors, 63 variables,
// 64-entry implication FIFO) solving one whole formula of the largest size that fits on
// chip without hot swapping: 224 three-literal clauses over 63 variables.
//
// The host model generates a satisfiable random formula, loads it, runs DPLL to a
// satisfying assignment and checks every implication, every conflict, the BCP fixed
// point after every decision and the final assignment. The bench also checks the
// engine's cycle budget: over the whole run, engine cycles = implications + stall cycles
// + 2 per DECIDE command, i.e. one cycle per propagated implication.
module tb_bcp_full;
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

  bcp_coprocessor dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp)
  );

  host_model #(.NUM_CP(224), .NV(63), .NC(224), .SEED(11), .VERBOSE(1)) host (
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

  int e_decide = 0;
  always @(posedge clk) if (rst_n && dut.u_engine.u_cu.accept && dut.cmd.op == OP_DECIDE) e_decide++;

  int checks = 0, failures = 0;
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
    if (n_swap != 1) begin failures++; $display("FAIL formula should stay on chip (swaps=%0d)", n_swap); end
    checks++;
    if (n_cyc != longint'(n_impl) + longint'(n_stall) + 2 * longint'(e_decide)) begin
      failures++; $display("FAIL engine cycles %0d, expected %0d", n_cyc, n_impl + n_stall + 2 * e_decide);
    end
    $display("BCP: %0d implications in %0d engine cycles over %0d decide commands", n_impl, n_cyc, e_decide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
