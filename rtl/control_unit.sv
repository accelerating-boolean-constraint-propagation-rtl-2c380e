// control_unit: the sequencer of the BCP engine.
//
// It takes one host command at a time (valid/ready handshake) and drives the assignment
// broadcast that every clause processor listens to.
//   UPDATE    loads the command's clause into clause processor `cp_idx` (one cycle).
//   BACKTRACK broadcasts the variable with value VAL_UNASSIGNED (one cycle); variable 0
//             clears every assignment in every clause processor.
//   DECIDE    broadcasts the decided value and enters EVAL. In EVAL, each cycle looks at
//             the clause statuses the previous broadcast produced:
//               any conflict          -> flag conflict, back to IDLE;
//               a unit clause         -> broadcast the selector's chosen implication and
//                                        push it into the implication FIFO, stay in EVAL;
//               FIFO full             -> hold (a stall) until the host pops an entry;
//               no unit clause left   -> done, back to IDLE.
// So a decision costs one cycle to accept and broadcast, one cycle per implication, and
// one final evaluation cycle: a decision that implies nothing is done two cycles after it
// is accepted, as in the paper's execution-step comparison (receive, process, done).
//
// Status: `status.busy` is high from the accepting edge until BCP ends; `conflict` holds
// the outcome of the last decision until the next decision or backtrack; `cycles` counts
// the cycles of the last decision, `stalls` the cycles spent waiting on a full FIFO.
//
// From the paper: the control unit loads clauses, broadcasts decisions, clears
// assignments on backtrack, and loops until unit clauses are exhausted, propagating one
// chosen implication at a time and finding conflicts during evaluation. This design's
// choices: the command encoding and handshake, per-variable and clear-all backtrack,
// one implication per cycle, stalling on a full FIFO, and the status counters.
//
// `load_idx` and `load_clause` are the command's fields passed straight through (only
// `load` is qualified), so synthesis sees them as outputs with no logic of their own.
module control_unit
  import bcp_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // host command
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_t                cmd,
  // clause processor array
  output logic                load,
  output logic [CP_IDX_W-1:0] load_idx,
  output clause_t             load_clause,
  output bcast_t              bcast,
  input  logic                conflict_any,
  // implication selector
  input  logic                sel_valid,
  input  impl_t               sel_impl,
  // implication FIFO
  output logic                fifo_push,
  output impl_t               fifo_din,
  input  logic                fifo_full,
  // host status
  output cu_status_t          status
);

  typedef enum logic {S_IDLE, S_EVAL} state_t;
  state_t state_q;

  logic        conflict_q;
  logic [15:0] stalls_q, cycles_q;

  logic accept, propagate, stall;
  assign cmd_ready = (state_q == S_IDLE);
  assign accept    = cmd_valid && cmd_ready;
  assign propagate = (state_q == S_EVAL) && !conflict_any && sel_valid && !fifo_full;
  assign stall     = (state_q == S_EVAL) && !conflict_any && sel_valid && fifo_full;

  always_comb begin
    load        = accept && (cmd.op == OP_UPDATE);
    load_idx    = cmd.cp_idx;
    load_clause = cmd.clause;
    bcast       = '0;
    if (accept && cmd.op == OP_DECIDE) begin
      bcast.valid = 1'b1;
      bcast.v     = cmd.v;
      bcast.val   = cmd.value ? VAL_TRUE : VAL_FALSE;
    end else if (accept && cmd.op == OP_BACKTRACK) begin
      bcast.valid = 1'b1;
      bcast.v     = cmd.v;
      bcast.val   = VAL_UNASSIGNED;
    end else if (propagate) begin
      bcast.valid = 1'b1;
      bcast.v     = sel_impl.v;
      bcast.val   = sel_impl.value ? VAL_TRUE : VAL_FALSE;
    end
    fifo_push = propagate;
    fifo_din  = sel_impl;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      conflict_q <= 1'b0;
      stalls_q   <= '0;
      cycles_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (accept && cmd.op == OP_DECIDE) begin
            state_q    <= S_EVAL;
            conflict_q <= 1'b0;
            stalls_q   <= '0;
            cycles_q   <= 16'd1;
          end else if (accept && cmd.op == OP_BACKTRACK) begin
            conflict_q <= 1'b0;
          end
        end
        S_EVAL: begin
          if (cycles_q != '1) cycles_q <= cycles_q + 1'b1;
          if (stall && stalls_q != '1) stalls_q <= stalls_q + 1'b1;
          if (conflict_any) begin
            conflict_q <= 1'b1;
            state_q    <= S_IDLE;
          end else if (!sel_valid) begin
            state_q    <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign status.busy     = (state_q == S_EVAL);
  assign status.conflict = conflict_q;
  assign status.stalls   = stalls_q;
  assign status.cycles   = cycles_q;

  // A host command must stay stable until it is accepted.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd))
    else $error("control_unit: command changed before it was accepted");
  // The broadcast never carries an implication and a host command in the same cycle.
  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) !(accept && propagate))
    else $error("control_unit: two broadcast sources at once");

endmodule
