// tb_clause_array: a 16-processor array against a whole-formula reference.
//
// Loads random clauses over 8 variables into random processors (leaving some empty),
// then broadcasts random assignments, single retractions and clear-all retractions. A
// reference keeps the formula and a global assignment and computes, per processor,
// whether the clause is unit and what it implies, whether any clause is false and
// whether all loaded clauses are satisfied.
module tb_clause_array;
  import bcp_pkg::*;
  localparam int N = 16;
  localparam int NV = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load;
  logic [CP_IDX_W-1:0] load_idx;
  clause_t load_clause;
  bcast_t bcast;
  logic [N-1:0] unit;
  impl_t [N-1:0] impl;
  logic conflict_any, sat_all;

  clause_array #(.NUM_CP(N)) dut (.*);

  int checks = 0, failures = 0;
  int cv[N][3], cn[N][3];      // reference clauses
  int asg[NV+1];               // 0 unassigned, 1 false, 2 true
  int n_unit = 0, n_conf = 0, n_sat = 0;

  function automatic logic [1:0] enc(int a);
    return a == 0 ? 2'b00 : (a == 1 ? 2'b10 : 2'b11);
  endfunction

  task automatic check_all();
    logic exp_conf, exp_sat;
    exp_conf = 0; exp_sat = 1;
    for (int c = 0; c < N; c++) begin
      int np = 0, nt = 0, nu = 0, uv = 0, uval = 0;
      for (int i = 0; i < 3; i++) if (cv[c][i] != 0) begin
        int a;
        a = asg[cv[c][i]];
        np++;
        if (a == 0) begin nu++; uv = cv[c][i]; uval = cn[c][i] ? 0 : 1; end
        else if ((a == 2) != (cn[c][i] == 1)) nt++;
      end
      checks++;
      if (np > 0 && nt == 0 && nu == 0) begin exp_conf = 1; exp_sat = 0; end
      if (np > 0 && nt == 0 && nu > 0) exp_sat = 0;
      if (np > 0 && nt == 0 && nu == 1) begin
        n_unit++;
        if (!unit[c] || int'(impl[c].v) != uv || int'(impl[c].value) != uval) begin
          failures++; if (failures < 10) $display("FAIL cp %0d unit", c);
        end
      end else if (unit[c]) begin
        failures++; if (failures < 10) $display("FAIL cp %0d spurious unit", c);
      end
    end
    checks++;
    if (conflict_any != exp_conf || sat_all != exp_sat) begin
      failures++; if (failures < 10) $display("FAIL conflict/sat %b%b exp %b%b", conflict_any, sat_all, exp_conf, exp_sat);
    end
    if (exp_conf) n_conf++;
    if (exp_sat) n_sat++;
  endtask

  initial begin
    load = 0; load_idx = '0; load_clause = '0; bcast = '0;
    for (int c = 0; c < N; c++) for (int i = 0; i < 3; i++) begin cv[c][i] = 0; cn[c][i] = 0; end
    for (int v = 0; v <= NV; v++) asg[v] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check_all();
    for (int round = 0; round < 60; round++) begin
      // reload a random subset of processors with clauses consistent with the assignment
      for (int k = 0; k < N; k++) begin
        int c;
        c = $urandom_range(0, N-1);
        for (int i = 0; i < 3; i++) begin
          cv[c][i] = ($urandom_range(0, 7) == 0) ? 0 : $urandom_range(1, NV);
          cn[c][i] = $urandom_range(0, 1);
          load_clause[i].l.v   = var_t'(cv[c][i]);
          load_clause[i].l.neg = cn[c][i][0];
          load_clause[i].a     = val_t'(cv[c][i] == 0 ? 2'b00 : enc(asg[cv[c][i]]));
        end
        load_idx = CP_IDX_W'(c);
        load = 1;
        @(posedge clk); #1;
        load = 0;
        check_all();
      end
      for (int k = 0; k < 12; k++) begin
        int v, a;
        v = $urandom_range(1, NV);
        a = (k % 4 == 3) ? 0 : $urandom_range(1, 2);
        bcast = '{valid: 1'b1, v: var_t'(v), val: val_t'(enc(a))};
        @(posedge clk); #1;
        bcast = '0;
        asg[v] = a;
        check_all();
      end
      if (round % 10 == 4) begin
        bcast = '{valid: 1'b1, v: '0, val: VAL_UNASSIGNED};       // clear all
        @(posedge clk); #1;
        bcast = '0;
        for (int v = 1; v <= NV; v++) asg[v] = 0;
        check_all();
      end
      if (round % 10 == 9) begin
        for (int v = 1; v <= NV; v++) begin
          bcast = '{valid: 1'b1, v: var_t'(v), val: VAL_UNASSIGNED};
          @(posedge clk); #1;
          asg[v] = 0;
        end
        bcast = '0;
        check_all();
      end
    end
    checks++;
    if (n_unit == 0 || n_conf == 0 || n_sat == 0) begin failures++; $display("FAIL a status never seen"); end
    $display("units=%0d conflicts=%0d all-sat=%0d", n_unit, n_conf, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
