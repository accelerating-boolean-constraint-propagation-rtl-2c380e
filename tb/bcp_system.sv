// bcp_system: one default-size coprocessor driven by one host model, for workload runs.
//
// Wraps bcp_coprocessor (all parameters at their defaults) and a host_model solving a
// random satisfiable formula of NV variables and NC clauses, so a testbench can run
// several formula sizes side by side. Results come out of the host model's counters.
module bcp_system #(
  parameter int NV      = 63,
  parameter int NC      = 224,
  parameter int SEED    = 1,
  parameter int MAX_DEC = 100000
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   done,
  output logic   complete,
  output int     checks,
  output int     failures,
  output int     n_decisions,
  output int     n_implications,
  output int     n_swaps,
  output longint n_engine_cycles
);
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [4:0]  awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  int          n_conf, n_bt, n_clr, n_stall;

  bcp_coprocessor dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp)
  );

  host_model #(.NUM_CP(224), .NV(NV), .NC(NC), .SEED(SEED), .MAX_DEC(MAX_DEC), .VERBOSE(1)) host (
    .clk, .rst_n,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wstrb(wstrb),
    .m_bvalid(bvalid), .m_bready(bready), .m_bresp(bresp),
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rresp(rresp),
    .done, .complete, .checks, .failures,
    .n_decisions, .n_implications, .n_conflicts(n_conf), .n_backtracks(n_bt), .n_clear_alls(n_clr),
    .n_swaps, .n_stall_cycles(n_stall), .n_engine_cycles
  );
endmodule
