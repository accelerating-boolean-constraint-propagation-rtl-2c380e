// tb_clause_processor: random test of one clause processor.
//
// Loads random clauses (random literals, empty slots, repeated variables and random
// starting values), then applies random broadcasts of decisions and retractions, some on
// variables the clause contains and some not. A reference model kept as plain integer
// arrays tracks the clause and computes the expected status and implication by counting
// true, false and unassigned literals. A retraction of variable 0 must clear all values. Checked every cycle after each operation.
module tb_clause_processor;
  import bcp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load;
  clause_t load_clause;
  bcast_t bcast;
  clause_status_t status;
  impl_t implication;

  clause_processor dut (.*);

  int checks = 0, failures = 0;

  // reference: var index, negation, value (0 unassigned, 1 false, 2 true)
  int rv[3], rn[3], ra[3];

  function automatic logic [1:0] enc(int a);
    return a == 0 ? 2'b00 : (a == 1 ? 2'b10 : 2'b11);
  endfunction

  task automatic check(string what);
    int n_present = 0, n_true = 0, n_unas = 0, uv = 0, uval = 0;
    clause_status_t exp_s;
    for (int i = 0; i < 3; i++) if (rv[i] != 0) begin
      n_present++;
      if (ra[i] == 0) begin n_unas++; uv = rv[i]; uval = rn[i] ? 0 : 1; end
      else if ((ra[i] == 2 && rn[i] == 0) || (ra[i] == 1 && rn[i] == 1)) n_true++;
    end
    if (n_present == 0)   exp_s = CL_EMPTY;
    else if (n_true > 0)  exp_s = CL_SAT;
    else if (n_unas == 0) exp_s = CL_CONFLICT;
    else if (n_unas == 1) exp_s = CL_UNIT;
    else                  exp_s = CL_UNRESOLVED;
    checks++;
    if (status !== exp_s || (exp_s == CL_UNIT && (int'(implication.v) != uv || int'(implication.value) != uval))) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: status %0d exp %0d impl %0d/%0d exp %0d/%0d", what, status, exp_s,
                 implication.v, implication.value, uv, uval);
    end
  endtask

  int hist[5];
  int n_clear = 0;
  initial begin
    load = 0; load_clause = '0; bcast = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    rv = '{0,0,0}; rn = '{0,0,0}; ra = '{0,0,0};
    check("after reset");
    for (int t = 0; t < 400; t++) begin
      // load a random clause over variables 1..5 (many overlaps), sometimes with empty slots
      for (int i = 0; i < 3; i++) begin
        rv[i] = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(1, 5);
        if (t % 50 == 0) rv[i] = 0;
        rn[i] = $urandom_range(0, 1);
        ra[i] = (rv[i] == 0) ? 0 : $urandom_range(0, 2);
        load_clause[i].l.v   = var_t'(rv[i]);
        load_clause[i].l.neg = rn[i][0];
        load_clause[i].a     = val_t'(enc(ra[i]));
      end
      // same variable must carry the same value in every slot
      for (int i = 1; i < 3; i++) for (int j = 0; j < i; j++)
        if (rv[i] == rv[j] && rv[i] != 0) begin ra[i] = ra[j]; load_clause[i].a = val_t'(enc(ra[j])); end
      load <= 1; @(posedge clk); #1; load <= 0;
      check("after load");
      hist[status]++;
      for (int k = 0; k < 8; k++) begin
        int v, a;
        v = $urandom_range(0, 6);   // 0 and 6 never match a loaded literal
        a = $urandom_range(0, 2);
        bcast.valid <= ($urandom_range(0, 7) != 0);
        bcast.v     <= var_t'(v);
        bcast.val   <= val_t'(enc(a));
        @(posedge clk); #1;
        if (bcast.valid && v != 0) for (int i = 0; i < 3; i++) if (rv[i] == v) ra[i] = a;
        if (bcast.valid && v == 0 && a == 0) begin ra = '{0, 0, 0}; n_clear++; end
        bcast.valid <= 0;
        check("after broadcast");
        hist[status]++;
      end
    end
    // every status must have been seen
    for (int s = 0; s < 5; s++) begin
      checks++;
      if (hist[s] == 0) begin failures++; $display("FAIL status %0d never seen", s); end
    end
    checks++;
    if (n_clear == 0) begin failures++; $display("FAIL clear-all never applied"); end
    $display("status histogram empty=%0d unres=%0d sat=%0d unit=%0d conflict=%0d",
             hist[0], hist[1], hist[2], hist[3], hist[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
