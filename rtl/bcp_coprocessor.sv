// bcp_coprocessor: FPGA Boolean constraint propagation coprocessor (top level).
//
// The host processor runs DPLL (decisions, backtracking, partitioning) and uses this
// block for BCP over the partition of the formula that is currently on chip. The top
// joins the AXI4-Lite register interface, the BCP engine (control unit, NUM_CP clause
// processors, implication selector) and the implication FIFO:
//
//   AXI4-Lite --> axi_lite_regs --cmd--> bcp_engine --push--> implication_fifo
//                      ^   ^                 |                        |
//                      |   +----status-------+                        |
//                      +-------------- oldest implication ------------+
//
// Interface: an AXI4-Lite subordinate with a 5-bit byte address and 32-bit data (register
// map in axi_lite_regs). Timing: a decision is accepted when its CMD write completes; BCP
// then takes one engine cycle per implication plus one, and the host polls STATUS and
// pops IMPL until busy is low and the FIFO is empty.
//
// From the paper: the block diagram of its Figure 1, 224 clause processors and 63
// variables. The FIFO depth (64, enough for every variable to be implied once per
// decision) and the register map are this design's choices.
module bcp_coprocessor
  import bcp_pkg::*;
#(
  parameter int unsigned NUM_CP     = 224,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [4:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [4:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp
);

  localparam int unsigned FIFO_CW = $clog2(FIFO_DEPTH) + 1;

  logic               cmd_valid, cmd_ready;
  cmd_t               cmd;
  cu_status_t         cu_status;
  logic               sat_all;
  logic               fifo_push, fifo_pop, fifo_empty, fifo_full;
  impl_t              fifo_din, fifo_head;
  logic [FIFO_CW-1:0] fifo_count;

  axi_lite_regs #(.ADDR_W(5), .FIFO_CW(FIFO_CW)) u_regs (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_wstrb,
    .s_bvalid, .s_bready, .s_bresp,
    .s_arvalid, .s_arready, .s_araddr, .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .cmd_valid, .cmd_ready, .cmd,
    .cu_status, .sat_all,
    .fifo_head, .fifo_empty, .fifo_full, .fifo_count, .fifo_pop
  );

  bcp_engine #(.NUM_CP(NUM_CP)) u_engine (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .fifo_push, .fifo_din, .fifo_full,
    .status(cu_status),
    .sat_all
  );

  implication_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push (fifo_push),
    .din  (fifo_din),
    .pop  (fifo_pop),
    .head (fifo_head),
    .empty(fifo_empty),
    .full (fifo_full),
    .count(fifo_count)
  );

endmodule
