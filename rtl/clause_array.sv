// clause_array: the array of NUM_CP clause processors.
//
// All processors see the same assignment broadcast and evaluate their clauses in parallel
// in the same cycle. A load writes one processor, selected by `load_idx`. The array
// flattens the per-processor results into three vectors for the rest of the engine: a
// unit flag and implication per processor, and the OR of all conflict flags.
//
// Timing: as clause_processor; results are valid one cycle after a broadcast or load.
//
// From the paper: the array of clause processors evaluated in parallel (224 of them in the
// evaluated configuration). The vector-based interface is this design's choice.
module clause_array
  import bcp_pkg::*;
#(
  parameter int unsigned NUM_CP = 224
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [CP_IDX_W-1:0] load_idx,
  input  clause_t             load_clause,
  input  bcast_t              bcast,
  output logic [NUM_CP-1:0]   unit,
  output impl_t [NUM_CP-1:0]  impl,
  output logic                conflict_any,
  output logic                sat_all        // every non-empty clause satisfied
);

  clause_status_t [NUM_CP-1:0] status;
  logic [NUM_CP-1:0] conflict, unresolved;

  for (genvar g = 0; g < NUM_CP; g++) begin : g_cp
    clause_processor u_cp (
      .clk        (clk),
      .rst_n      (rst_n),
      .load       (load && (load_idx == CP_IDX_W'(g))),
      .load_clause(load_clause),
      .bcast      (bcast),
      .status     (status[g]),
      .implication(impl[g])
    );
    assign unit[g]       = (status[g] == CL_UNIT);
    assign conflict[g]   = (status[g] == CL_CONFLICT);
    assign unresolved[g] = (status[g] == CL_UNIT) || (status[g] == CL_UNRESOLVED);
  end

  assign conflict_any = |conflict;
  assign sat_all      = ~|conflict && ~|unresolved;

endmodule
