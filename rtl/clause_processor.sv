// clause_processor: one clause of the formula, evaluated in place.
//
// The clause processor stores up to LITS literals and, next to each, a local copy of the
// value of that literal's variable. The host overwrites the whole clause with `load`
// (this is how partitions are hot-swapped in), giving the literals together with the
// current values of their variables. Afterwards every assignment broadcast by the control
// unit (a decision, a chosen implication or, with value VAL_UNASSIGNED, a backtrack) is
// compared with the three variable indices and copied into each matching slot. There is
// no clause look-up: each processor only watches the broadcast bus. A retraction of
// variable index 0 (which no literal uses) clears every slot's value at once.
//
// From the stored values the processor derives, combinationally, the clause status:
// EMPTY if no slot holds a literal (an unused processor), SAT if a literal is true,
// CONFLICT if every literal is false, UNIT if exactly one is unassigned and the others
// false (the unit implication rule; `implication` then names that variable and the value
// that makes the literal true), UNRESOLVED otherwise.
//
// Timing: a broadcast in cycle N is stored at the end of cycle N; status reflects it in
// cycle N+1. Load takes priority over a broadcast in the same cycle.
//
// From the paper: one clause per processor, three literals with three local variable
// assignments feeding a clause status block, updates on decisions and BCP, clearing on
// backtrack. This design's choices: the slot encoding, index 0 as an empty slot and as
// the clear-all address, loading the values together with the literals, and the status
// encoding.
module clause_processor
  import bcp_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  clause_t        load_clause,
  input  bcast_t         bcast,
  output clause_status_t status,
  output impl_t          implication
);

  clause_t cl_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cl_q <= '0;
    end else if (load) begin
      cl_q <= load_clause;
    end else if (bcast.valid && bcast.v == '0 && bcast.val == VAL_UNASSIGNED) begin
      for (int i = 0; i < LITS; i++) cl_q[i].a <= VAL_UNASSIGNED;    // clear all
    end else if (bcast.valid && bcast.v != '0) begin
      for (int i = 0; i < LITS; i++)
        if (cl_q[i].l.v == bcast.v) cl_q[i].a <= bcast.val;
    end
  end

  always_comb begin
    logic any_present, any_true;
    logic [1:0] n_unassigned;
    any_present  = 1'b0;
    any_true     = 1'b0;
    n_unassigned = 0;
    implication  = '0;
    for (int i = 0; i < LITS; i++) begin
      if (cl_q[i].l.v != '0) begin
        any_present = 1'b1;
        if (cl_q[i].a == VAL_UNASSIGNED) begin
          n_unassigned++;
          implication.v     = cl_q[i].l.v;
          implication.value = ~cl_q[i].l.neg;
        end else if ((cl_q[i].a == VAL_TRUE) != cl_q[i].l.neg) begin
          any_true = 1'b1;
        end
      end
    end
    if (!any_present)           status = CL_EMPTY;
    else if (any_true)          status = CL_SAT;
    else if (n_unassigned == 0) status = CL_CONFLICT;
    else if (n_unassigned == 1) status = CL_UNIT;
    else                        status = CL_UNRESOLVED;
    if (status != CL_UNIT) implication = '0;
  end

endmodule
