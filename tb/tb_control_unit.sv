// tb_control_unit: the control unit against a scripted clause-array model.
//
// For each decision the model holds a random list of K implications that the "array"
// will report one after another (each one disappears once the control unit broadcasts
// it) and may end in a conflict. The FIFO-full input is raised at random. Checked:
// the decision broadcast, the order and values of broadcast implications and FIFO
// pushes, the conflict flag, that nothing is propagated while the FIFO is full, and the
// latency: a decision with K implications and S stall cycles takes K+S+2 cycles. Update
// and backtrack commands are checked for their single-cycle load or retraction.
module tb_control_unit;
  import bcp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_t cmd;
  logic load;
  logic [CP_IDX_W-1:0] load_idx;
  clause_t load_clause;
  bcast_t bcast;
  logic conflict_any, sel_valid, fifo_push, fifo_full;
  impl_t sel_impl, fifo_din;
  cu_status_t status;

  control_unit dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_conflict = 0, n_done = 0, n_impl = 0;

  impl_t pend[$];
  logic  end_conflict;
  logic  in_run;
  logic  rand_full;

  // array model: the head of `pend` is the current unit clause; called after every change
  task automatic upd();
    sel_valid    = in_run && pend.size() > 0;
    sel_impl     = pend.size() > 0 ? pend[0] : '0;
    conflict_any = in_run && pend.size() == 0 && end_conflict;
    fifo_full    = rand_full;
  endtask

  task automatic fail(string s);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", s, $time);
  endtask

  task automatic send(cmd_t c);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; in_run = 0; end_conflict = 0; rand_full = 0; upd();
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int t = 0; t < 300; t++) begin
      cmd_t c;
      c = '0;
      c.op = op_t'($urandom_range(1, 3));
      if (t % 3 == 0) c.op = OP_DECIDE;
      c.v = var_t'($urandom_range(1, 63));
      c.value = 1'($urandom_range(0, 1));
      c.cp_idx = 8'($urandom_range(0, 223));
      c.clause = clause_t'({$urandom(), $urandom()});
      if (c.op == OP_UPDATE || c.op == OP_BACKTRACK) begin
        cmd = c; cmd_valid = 1; #1;
        checks++;
        if (c.op == OP_UPDATE && !(load && load_idx == c.cp_idx && load_clause == c.clause && !bcast.valid))
          fail("update load");
        if (c.op == OP_BACKTRACK && !(bcast.valid && bcast.v == c.v && bcast.val == VAL_UNASSIGNED && !load))
          fail("backtrack broadcast");
        @(posedge clk); #1 cmd_valid = 0;
        #1;
        checks++;
        if (load || bcast.valid || status.busy) fail("single cycle");
      end else begin
        int k, stalls, got, cyc;
        k = $urandom_range(0, 6);
        pend.delete();
        for (int i = 0; i < k; i++) pend.push_back(impl_t'({6'($urandom_range(1, 63)), 1'($urandom_range(0, 1))}));
        end_conflict = $urandom_range(0, 2) == 0;
        cmd = c; cmd_valid = 1; #1;
        checks++;
        if (!(bcast.valid && bcast.v == c.v && bcast.val == (c.value ? VAL_TRUE : VAL_FALSE))) fail("decision broadcast");
        @(posedge clk); #1 cmd_valid = 0; in_run = 1; upd();
        stalls = 0; got = 0; cyc = 1;
        while (status.busy) begin
          rand_full = ($urandom_range(0, 3) == 0); upd();
          #1;
          cyc++;
          if (pend.size() > 0) begin
            if (rand_full) begin
              stalls++; n_stall++;
              checks++;
              if (bcast.valid || fifo_push) fail("propagated while FIFO full");
            end else begin
              checks++;
              if (!(bcast.valid && bcast.v == pend[0].v && bcast.val == (pend[0].value ? VAL_TRUE : VAL_FALSE) &&
                    fifo_push && fifo_din == pend[0])) fail("implication broadcast/push");
            end
          end else begin
            checks++;
            if (bcast.valid || fifo_push) fail("broadcast after units exhausted");
          end
          @(posedge clk);
          #1;
          if (pend.size() > 0 && !rand_full) begin void'(pend.pop_front()); got++; n_impl++; end
          upd();
          if (cyc > 100) break;
        end
        in_run = 0; rand_full = 0; upd();
        checks++;
        if (got != k) fail("implication count");
        checks++;
        if (status.conflict != end_conflict) fail("conflict flag");
        checks++;
        if (int'(status.cycles) != k + stalls + 2) begin
          fail("latency");
          $display("  cycles=%0d exp=%0d", status.cycles, k + stalls + 2);
        end
        checks++;
        if (int'(status.stalls) != stalls) fail("stall count");
        if (end_conflict) n_conflict++; else n_done++;
      end
    end
    checks++;
    if (n_stall == 0 || n_conflict == 0 || n_done == 0 || n_impl == 0) fail("a mechanism never happened");
    $display("decisions done=%0d conflict=%0d implications=%0d stall cycles=%0d", n_done, n_conflict, n_impl, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
