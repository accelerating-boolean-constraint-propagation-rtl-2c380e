// bcp_engine: the BCP engine of the coprocessor.
//
// Connects the control unit (1), the array of clause processors (2) and the implication
// selector (3). The control unit's broadcast goes to every clause processor; their unit
// flags and implications go to the selector, whose choice returns to the control unit to
// be broadcast next and, through `fifo_push`/`fifo_din`, to the implication FIFO outside
// the engine. The OR of the clause processors' conflict flags returns to the control unit
// as their status.
//
// Timing: see control_unit. After a decision is accepted, BCP takes one cycle per
// implication plus one; the loop broadcast -> clause evaluation -> selection -> broadcast
// closes in a single clock cycle.
//
// From the paper: the block structure and the connections of its Figure 1 inside the BCP
// engine box, with 224 clause processors in the evaluated configuration.
module bcp_engine
  import bcp_pkg::*;
#(
  parameter int unsigned NUM_CP = 224
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  cmd_t       cmd,
  output logic       fifo_push,
  output impl_t      fifo_din,
  input  logic       fifo_full,
  output cu_status_t status,
  output logic       sat_all
);

  logic                load;
  logic [CP_IDX_W-1:0] load_idx;
  clause_t             load_clause;
  bcast_t              bcast;
  logic [NUM_CP-1:0]   unit;
  impl_t [NUM_CP-1:0]  impl;
  logic                conflict_any;
  logic                sel_valid;
  impl_t               sel_impl;

  control_unit u_cu (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .load, .load_idx, .load_clause, .bcast, .conflict_any,
    .sel_valid, .sel_impl,
    .fifo_push, .fifo_din, .fifo_full,
    .status
  );

  clause_array #(.NUM_CP(NUM_CP)) u_array (
    .clk, .rst_n,
    .load, .load_idx, .load_clause, .bcast,
    .unit, .impl, .conflict_any, .sat_all
  );

  implication_selector #(.NUM_CP(NUM_CP)) u_sel (
    .unit, .impl,
    .valid (sel_valid),
    .chosen(sel_impl)
  );

endmodule
