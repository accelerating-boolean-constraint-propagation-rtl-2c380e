// tb_bcp_engine: the BCP engine at its default 224 clause processors, checked against an
// independent software evaluation of the formula.
//
// A random formula of 224 clauses over 63 variables (a mix of two- and three-literal
// clauses, so that implications chain) is loaded, and random decisions are made until a
// conflict, at which point every assigned variable is retracted, alternately one backtrack
// command per variable and one clear-all backtrack, and a few clause processors are overwritten with fresh clauses (a hot swap). The FIFO
// full input is raised at random to make the engine stall. Checked for every decision:
//   - each propagated implication is forced by some clause at the moment it is pushed;
//   - when BCP ends without conflict, no clause is unit or false (a fixed point);
//   - when it ends with a conflict, some clause is false;
//   - the reported cycle count is implications + stall cycles + 2.
module tb_bcp_engine;
  import bcp_pkg::*;
  localparam int N  = 224;
  localparam int NV = 63;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, fifo_push, fifo_full, sat_all;
  cmd_t cmd;
  impl_t fifo_din;
  cu_status_t status;

  bcp_engine dut (.*);

  int checks = 0, failures = 0;
  int cv[N][3], cn[N][3];
  int asg[NV+1];
  int n_impl = 0, n_conf = 0, n_done = 0, n_stall = 0, n_swap = 0, n_bt = 0, n_multi = 0, n_clear = 0;

  function automatic logic [1:0] enc(int a);
    return a == 0 ? 2'b00 : (a == 1 ? 2'b10 : 2'b11);
  endfunction

  // clause status under the reference assignment: 0 sat/other, 1 unit, 2 false, 3 unresolved/empty
  function automatic int cstat(int c, output int uv, output int uval);
    int np = 0, nt = 0, nu = 0;
    uv = 0; uval = 0;
    for (int i = 0; i < 3; i++) if (cv[c][i] != 0) begin
      int a;
      a = asg[cv[c][i]];
      np++;
      if (a == 0) begin nu++; uv = cv[c][i]; uval = cn[c][i] ? 0 : 1; end
      else if ((a == 2) != (cn[c][i] == 1)) nt++;
    end
    if (np == 0 || nt > 0) return 0;
    if (nu == 0) return 2;
    if (nu == 1) return 1;
    return 3;
  endfunction

  function automatic int count_units();
    int n = 0, uv, uval;
    for (int c = 0; c < N; c++) if (cstat(c, uv, uval) == 1) n++;
    return n;
  endfunction

  task automatic fail(string s);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", s, $time);
  endtask

  task automatic send(cmd_t c);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic new_clause(int c);
    int width;
    width = ($urandom_range(0, 2) == 0) ? 2 : 3;
    for (int i = 0; i < 3; i++) begin
      cv[c][i] = (i < width) ? $urandom_range(1, NV) : 0;
      cn[c][i] = $urandom_range(0, 1);
    end
  endtask

  task automatic load_clause_cp(int c);
    cmd_t k;
    k = '0;
    k.op = OP_UPDATE;
    k.cp_idx = CP_IDX_W'(c);
    for (int i = 0; i < 3; i++) begin
      k.clause[i].l.v   = var_t'(cv[c][i]);
      k.clause[i].l.neg = cn[c][i][0];
      k.clause[i].a     = val_t'(cv[c][i] == 0 ? 2'b00 : enc(asg[cv[c][i]]));
    end
    send(k);
  endtask

  // implication monitor: check each push against the reference, then apply it
  always @(posedge clk) begin
    if (rst_n && fifo_push) begin
      int ok, uv, uval;
      ok = 0;
      for (int c = 0; c < N; c++)
        if (cstat(c, uv, uval) == 1 && uv == int'(fifo_din.v) && uval == int'(fifo_din.value)) ok = 1;
      checks++;
      if (!ok) fail($sformatf("implication x%0d=%0d not forced", fifo_din.v, fifo_din.value));
      if (count_units() > 1) n_multi++;
      asg[fifo_din.v] = fifo_din.value ? 2 : 1;
      n_impl++;
    end
    if (rst_n && status.busy && fifo_full && count_units() > 0) begin
      int any_false, uv, uval;
      any_false = 0;
      for (int c = 0; c < N; c++) if (cstat(c, uv, uval) == 2) any_false = 1;
      if (!any_false) n_stall++;
    end
  end

  initial begin
    cmd_valid = 0; cmd = '0; fifo_full = 0;
    for (int v = 0; v <= NV; v++) asg[v] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int c = 0; c < N; c++) begin new_clause(c); load_clause_cp(c); end
    for (int t = 0; t < 400; t++) begin
      int v, impl0, stall0, exp_cyc, uv, uval;
      cmd_t k;
      // pick an unassigned variable
      v = 0;
      for (int tries = 0; tries < 200 && v == 0; tries++) begin
        int x;
        x = $urandom_range(1, NV);
        if (asg[x] == 0) v = x;
      end
      if (v == 0) begin
        // everything assigned without conflict: the loaded formula is satisfied
        checks++;
        if (!sat_all) fail("all assigned but not satisfied");
      end else begin
        k = '0; k.op = OP_DECIDE; k.v = var_t'(v); k.value = 1'($urandom_range(0, 1));
        impl0 = n_impl; stall0 = n_stall;
        send(k);
        asg[v] = k.value ? 2 : 1;
        while (status.busy) begin
          fifo_full = ($urandom_range(0, 4) == 0);
          @(posedge clk); #1;
        end
        fifo_full = 0;
        exp_cyc = (n_impl - impl0) + (n_stall - stall0) + 2;
        checks++;
        if (int'(status.cycles) != exp_cyc) fail($sformatf("cycles %0d exp %0d", status.cycles, exp_cyc));
        checks++;
        if (int'(status.stalls) != n_stall - stall0) fail("stall count");
        if (status.conflict) begin
          int any_false;
          any_false = 0;
          for (int c = 0; c < N; c++) if (cstat(c, uv, uval) == 2) any_false = 1;
          checks++;
          if (!any_false) fail("conflict reported but no clause false");
          n_conf++;
        end else begin
          checks++;
          for (int c = 0; c < N; c++) if (cstat(c, uv, uval) inside {1, 2}) begin
            fail($sformatf("not a fixed point: clause %0d", c));
            break;
          end
          n_done++;
        end
      end
      if (status.conflict || v == 0) begin
        // backtrack everything, then hot-swap a few clauses
        if (t % 2 == 0) begin
          for (int x = 1; x <= NV; x++) if (asg[x] != 0) begin
            k = '0; k.op = OP_BACKTRACK; k.v = var_t'(x);
            send(k);
            asg[x] = 0;
            n_bt++;
          end
        end else begin
          k = '0; k.op = OP_BACKTRACK; k.v = '0;     // clear all
          send(k);
          for (int x = 1; x <= NV; x++) asg[x] = 0;
          n_clear++;
        end
        @(posedge clk); #1;
        checks++;
        if (count_units() == 0 && status.conflict) fail("conflict flag not cleared by backtrack");
        for (int s = 0; s < 8; s++) begin
          int c;
          c = $urandom_range(0, N-1);
          new_clause(c);
          load_clause_cp(c);
          n_swap++;
        end
      end
    end
    checks++;
    if (n_impl == 0 || n_conf == 0 || n_done == 0 || n_stall == 0 || n_swap == 0 || n_bt == 0 || n_multi == 0 || n_clear == 0)
      fail("a mechanism never happened");
    $display("implications=%0d (with several units pending %0d) conflicts=%0d clean=%0d stalls=%0d backtracks=%0d clear-alls=%0d swaps=%0d",
             n_impl, n_multi, n_conf, n_done, n_stall, n_bt, n_clear, n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
