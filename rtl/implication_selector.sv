// implication_selector: picks one implication when several clauses are unit at once.
//
// Fixed priority: the unit clause processor with the lowest index wins. The selector is
// purely combinational so that the control unit can broadcast the chosen implication in
// the same cycle the clause statuses become valid. Two processors that imply opposite
// values for the same variable are not detected here: once the chosen value is
// broadcast, the other clause turns into a conflict and is caught at the next evaluation.
//
// From the paper: a selector that chooses a single implication to propagate, with no
// separate conflict detector. The lowest-index priority is this design's choice.
module implication_selector
  import bcp_pkg::*;
#(
  parameter int unsigned NUM_CP = 224
) (
  input  logic [NUM_CP-1:0]   unit,
  input  impl_t [NUM_CP-1:0]  impl,
  output logic                valid,
  output impl_t               chosen
);

  always_comb begin
    valid      = 1'b0;
    chosen     = '0;
    for (int i = NUM_CP - 1; i >= 0; i--) begin
      if (unit[i]) begin
        valid      = 1'b1;
        chosen     = impl[i];
      end
    end
  end

endmodule
