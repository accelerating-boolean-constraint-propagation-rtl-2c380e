// implication_fifo: queue of the implications the engine propagated, read by the host.
//
// Every implication the control unit broadcasts is also pushed here, so the host can
// record it and forward it to the partitions that are not on chip. The host pops the
// oldest entry through the register interface. The storage is a small register array
// (a distributed-RAM FIFO on an FPGA) with read and write pointers one bit wider than the
// address, so full and empty are told apart. `head` shows the oldest entry whenever
// `empty` is low; a pop in the same cycle as a push is allowed. A push into a full FIFO
// or a pop from an empty one is ignored and flagged by an assertion.
//
// From the paper: an implication FIFO between the implication selector and the
// interface. Depth, the data layout and the first-in-first-out read order are this
// design's choices.
module implication_fifo
  import bcp_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  impl_t                    din,
  input  logic                     pop,
  output impl_t                    head,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  impl_t mem [DEPTH];
  logic [AW:0] wr_q, rd_q;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_q[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_q <= '0;
      rd_q <= '0;
    end else begin
      if (do_push) wr_q <= wr_q + 1'b1;
      if (do_pop)  rd_q <= rd_q + 1'b1;
    end
  end

  assign count = wr_q - rd_q;
  assign empty = (wr_q == rd_q);
  assign full  = (wr_q[AW-1:0] == rd_q[AW-1:0]) && (wr_q[AW] != rd_q[AW]);
  assign head  = mem[rd_q[AW-1:0]];

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("implication_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("implication_fifo: pop while empty");

endmodule
