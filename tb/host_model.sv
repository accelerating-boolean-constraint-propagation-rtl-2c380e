// host_model: behavioural model of the host processor that runs DPLL around the
// coprocessor. It is not hardware; testbenches use it as the AXI4-Lite master.
//
// At start it generates a random satisfiable CNF formula (NC clauses over NV variables,
// three distinct variables per clause, kept only if a hidden random assignment satisfies
// it, so the formula is satisfiable by construction). It splits the formula into
// partitions of consecutive clauses, each with at most NUM_CP clauses and at most 63
// distinct variables, and numbers each partition's variables locally from 1.
//
// DPLL: decide the lowest-numbered free variable (true first), propagate, and on a
// conflict undo assignments back to the newest decision not yet flipped and flip it.
// Propagating a variable means: for every partition that holds it (other than the one
// that implied it), hot-swap that partition in if it is not on chip (UPDATE every clause
// with the current values of its variables and empty the processors it does not use),
// send DECIDE, then poll STATUS and pop IMPL until the coprocessor is idle and the FIFO
// is empty. Each popped implication becomes a global assignment and is propagated in
// turn. Undone variables that are on chip are retracted with BACKTRACK, or all at once
// with a clear-all BACKTRACK when the search returns to the root.
//
// Independent checks, counted in `checks`/`failures`: each implication is forced by a
// clause of the formula under the host's assignment; after each conflict-free
// propagation no clause of the formula is unit or false; each reported conflict has a
// false clause; the final assignment satisfies every clause. MAX_DEC bounds the number of
// decisions; a run that hits it ends early (`complete` low) without counting a failure.
module host_model
  import bcp_pkg::*;
#(
  parameter int NUM_CP   = 224,
  parameter int NV       = 63,
  parameter int NC       = 224,
  parameter int SEED     = 1,
  parameter int MAX_DEC  = 100000,
  parameter bit VERBOSE  = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [4:0]  m_awaddr,
  output logic        m_wvalid,
  input  logic        m_wready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  input  logic        m_bvalid,
  output logic        m_bready,
  input  logic [1:0]  m_bresp,
  output logic        m_arvalid,
  input  logic        m_arready,
  output logic [4:0]  m_araddr,
  input  logic        m_rvalid,
  output logic        m_rready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  output logic        done,
  output logic        complete,
  output int          checks,
  output int          failures,
  output int          n_decisions,
  output int          n_implications,
  output int          n_conflicts,
  output int          n_backtracks,
  output int          n_clear_alls,
  output int          n_swaps,
  output int          n_stall_cycles,
  output longint      n_engine_cycles
);

  localparam logic [4:0] A_CLAUSE = 5'h00, A_CMD = 5'h04, A_STATUS = 5'h08, A_IMPL = 5'h0C, A_CYCLES = 5'h10;

  int cl_v[NC][3], cl_n[NC][3];
  int hidden[NV+1];
  int asg[NV+1];            // 0 unassigned, 1 false, 2 true
  int src[NV+1];            // partition that implied the variable, -1 for a decision
  int occ[NV+1][$];         // clauses holding each variable
  int vparts[NV+1][$];      // partitions holding each variable
  int p_start[$], p_len[$];
  int p_loc2glob[$][64];
  int p_glob2loc[$];        // flattened [partition*(NV+1) + var]
  int num_parts;
  int loaded, loaded_len;
  int trail[$];
  int lvl_var[$], lvl_flip[$], lvl_lim[$];

  // ------------------------------------------------------------------ AXI master
  task automatic axi_write(logic [4:0] a, logic [31:0] d);
    m_awaddr = a; m_wdata = d; m_wstrb = 4'hF; m_awvalid = 1; m_wvalid = 1; m_bready = 1;
    do @(posedge clk); while (!(m_awready && m_wready));
    #1 m_awvalid = 0; m_wvalid = 0;
    while (!m_bvalid) begin @(posedge clk); #1; end
    @(posedge clk); #1 m_bready = 0;
  endtask

  task automatic axi_read(logic [4:0] a, output logic [31:0] d);
    m_araddr = a; m_arvalid = 1; m_rready = 1;
    do @(posedge clk); while (!m_arready);
    #1 m_arvalid = 0;
    while (!m_rvalid) begin @(posedge clk); #1; end
    d = m_rdata;
    @(posedge clk); #1 m_rready = 0;
  endtask

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL host(NV=%0d NC=%0d): %s at %0t", NV, NC, s, $time);
  endtask

  // ------------------------------------------------------------------ formula
  function automatic int lit_state(int c, int i);   // 0 unassigned, 1 false, 2 true
    int a;
    a = asg[cl_v[c][i]];
    if (a == 0) return 0;
    return ((a == 2) != (cl_n[c][i] == 1)) ? 2 : 1;
  endfunction

  // 0 satisfied, 1 unit, 2 false, 3 unresolved
  function automatic int clause_state(int c);
    int nf, nt;
    nf = 0; nt = 0;
    for (int i = 0; i < 3; i++) begin
      int s;
      s = lit_state(c, i);
      if (s == 2) nt++;
      else if (s == 1) nf++;
    end
    if (nt > 0) return 0;
    if (nf == 3) return 2;
    if (nf == 2) return 1;
    return 3;
  endfunction

  task automatic gen_formula();
    void'($urandom(SEED));
    for (int v = 1; v <= NV; v++) hidden[v] = $urandom_range(1, 2);
    for (int c = 0; c < NC; c++) begin
      bit ok;
      ok = 0;
      while (!ok) begin
        cl_v[c][0] = $urandom_range(1, NV);
        do cl_v[c][1] = $urandom_range(1, NV); while (cl_v[c][1] == cl_v[c][0]);
        do cl_v[c][2] = $urandom_range(1, NV); while (cl_v[c][2] == cl_v[c][0] || cl_v[c][2] == cl_v[c][1]);
        for (int i = 0; i < 3; i++) begin
          cl_n[c][i] = $urandom_range(0, 1);
          if ((hidden[cl_v[c][i]] == 2) != (cl_n[c][i] == 1)) ok = 1;
        end
      end
      for (int i = 0; i < 3; i++) occ[cl_v[c][i]].push_back(c);
    end
  endtask

  // consecutive clauses, at most NUM_CP clauses and 63 distinct variables per partition
  task automatic partition();
    int c, p;
    c = 0; p = 0;
    while (c < NC) begin
      int nloc;
      int l2g[64];
      p_start.push_back(c);
      for (int i = 0; i < 64; i++) l2g[i] = 0;
      for (int v = 0; v <= NV; v++) p_glob2loc.push_back(0);
      nloc = 0;
      while (c < NC && c - p_start[p] < NUM_CP) begin
        int newv;
        newv = 0;
        for (int i = 0; i < 3; i++)
          if (p_glob2loc[p*(NV+1) + cl_v[c][i]] == 0) newv++;
        if (nloc + newv > int'(NUM_VARS)) break;
        for (int i = 0; i < 3; i++)
          if (p_glob2loc[p*(NV+1) + cl_v[c][i]] == 0) begin
            nloc++;
            p_glob2loc[p*(NV+1) + cl_v[c][i]] = nloc;
            l2g[nloc] = cl_v[c][i];
            vparts[cl_v[c][i]].push_back(p);
          end
        c++;
      end
      p_len.push_back(c - p_start[p]);
      p_loc2glob.push_back(l2g);
      p++;
    end
    num_parts = p;
  endtask

  function automatic int g2l(int p, int g);
    return p_glob2loc[p*(NV+1) + g];
  endfunction

  // ------------------------------------------------------------------ coprocessor use
  task automatic hot_swap(int p);
    for (int k = 0; k < p_len[p]; k++) begin
      int c;
      logic [31:0] w;
      c = p_start[p] + k;
      w = '0;
      for (int i = 0; i < 3; i++) begin
        slot_t s;
        s.l.v   = var_t'(g2l(p, cl_v[c][i]));
        s.l.neg = cl_n[c][i][0];
        s.a     = asg[cl_v[c][i]] == 0 ? VAL_UNASSIGNED : (asg[cl_v[c][i]] == 2 ? VAL_TRUE : VAL_FALSE);
        w[9*i +: 9] = s;
      end
      axi_write(A_CLAUSE, w);
      axi_write(A_CMD, {8'h0, 8'(k), 14'h0, OP_UPDATE});
    end
    if (loaded_len > p_len[p]) begin
      axi_write(A_CLAUSE, '0);
      for (int k = p_len[p]; k < loaded_len; k++) axi_write(A_CMD, {8'h0, 8'(k), 14'h0, OP_UPDATE});
    end
    loaded = p;
    loaded_len = p_len[p];
    n_swaps++;
  endtask

  // a popped implication: check it is forced, then record it
  task automatic take_implication(int p, int l, bit val, ref int wl[$]);
    int g;
    bit forced;
    g = p_loc2glob[p][l];
    forced = 0;
    foreach (occ[g][j]) begin
      int c;
      c = occ[g][j];
      if (clause_state(c) == 1)
        for (int i = 0; i < 3; i++)
          if (cl_v[c][i] == g && lit_state(c, i) == 0 && ((val == 1) != (cl_n[c][i] == 1))) forced = 1;
    end
    checks++;
    if (g == 0 || !forced) fail($sformatf("implication x%0d=%0d is not forced", g, val));
    n_implications++;
    if (g != 0 && asg[g] == 0) begin
      asg[g] = val ? 2 : 1;
      src[g] = p;
      trail.push_back(g);
      wl.push_back(g);
    end else if (g != 0 && asg[g] != (val ? 2 : 1)) begin
      fail("implication contradicts an assignment");
    end
  endtask

  // propagate variable x through every partition; returns 1 on conflict
  task automatic propagate(int x, output bit conflict);
    int wl[$];
    conflict = 0;
    wl.push_back(x);
    while (wl.size() > 0 && !conflict) begin
      int y;
      y = wl.pop_front();
      foreach (vparts[y][k]) begin
        int p;
        logic [31:0] st, d;
        p = vparts[y][k];
        if (p == src[y]) continue;
        if (loaded != p) hot_swap(p);
        axi_write(A_CMD, {8'h0, 8'h0, 7'h0, 6'(g2l(p, y)), asg[y] == 2 ? 1'b1 : 1'b0, OP_DECIDE});
        forever begin
          axi_read(A_STATUS, st);
          forever begin
            axi_read(A_IMPL, d);
            if (!d[31]) break;
            take_implication(p, int'(d[6:1]), d[0], wl);
          end
          if (!st[0]) break;
        end
        axi_read(A_CYCLES, d);
        n_engine_cycles += longint'(d[15:0]);
        n_stall_cycles += int'(st[31:16]);
        if (st[1]) begin
          bit any_false;
          any_false = 0;
          for (int k2 = 0; k2 < p_len[p]; k2++) if (clause_state(p_start[p] + k2) == 2) any_false = 1;
          checks++;
          if (!any_false) fail("conflict reported without a false clause");
          conflict = 1;
          n_conflicts++;
          break;
        end
      end
    end
    if (!conflict) begin
      int bad;
      bad = -1;
      for (int c = 0; c < NC; c++) if (clause_state(c) inside {1, 2}) bad = c;
      checks++;
      if (bad >= 0) fail($sformatf("BCP stopped short: clause %0d is %0s", bad, clause_state(bad) == 1 ? "unit" : "false"));
    end
  endtask

  task automatic undo_to(int lim);
    if (lim == 0 && trail.size() > 0 && loaded >= 0) begin
      // back to the root: one clear-all backtrack instead of one per variable
      axi_write(A_CMD, {8'h0, 8'h0, 7'h0, 6'h0, 1'b0, OP_BACKTRACK});
      n_backtracks++;
      n_clear_alls++;
      while (trail.size() > 0) begin
        int g;
        g = trail.pop_back();
        asg[g] = 0;
        src[g] = -1;
      end
    end
    while (trail.size() > lim) begin
      int g;
      g = trail.pop_back();
      asg[g] = 0;
      src[g] = -1;
      if (loaded >= 0 && g2l(loaded, g) != 0) begin
        axi_write(A_CMD, {8'h0, 8'h0, 7'h0, 6'(g2l(loaded, g)), 1'b0, OP_BACKTRACK});
        n_backtracks++;
      end
    end
  endtask

  // ------------------------------------------------------------------ DPLL
  initial begin
    bit conflict, sat, unsat;
    m_awvalid = 0; m_wvalid = 0; m_arvalid = 0; m_bready = 0; m_rready = 0;
    m_awaddr = '0; m_araddr = '0; m_wdata = '0; m_wstrb = '0;
    done = 0; complete = 0; checks = 0; failures = 0;
    n_decisions = 0; n_implications = 0; n_conflicts = 0; n_backtracks = 0; n_clear_alls = 0; n_swaps = 0;
    n_stall_cycles = 0; n_engine_cycles = 0;
    for (int v = 0; v <= NV; v++) begin asg[v] = 0; src[v] = -1; end
    loaded = -1; loaded_len = NUM_CP;   // empty every processor on the first swap
    gen_formula();
    partition();
    if (VERBOSE) $display("host: %0d variables, %0d clauses, %0d partitions", NV, NC, num_parts);
    wait (rst_n);
    repeat (3) @(posedge clk);
    #1;
    conflict = 0; sat = 0; unsat = 0;
    while (!sat && !unsat && n_decisions < MAX_DEC) begin
      int g, val;
      if (conflict) begin
        while (lvl_var.size() > 0 && lvl_flip[lvl_flip.size()-1] != 0) begin
          undo_to(lvl_lim[lvl_lim.size()-1]);
          void'(lvl_var.pop_back()); void'(lvl_flip.pop_back()); void'(lvl_lim.pop_back());
        end
        if (lvl_var.size() == 0) begin unsat = 1; break; end
        g = lvl_var[lvl_var.size()-1];
        undo_to(lvl_lim[lvl_lim.size()-1]);
        lvl_flip[lvl_flip.size()-1] = 1;
        val = 1;                       // flipped: false
      end else begin
        g = 0;
        for (int v = NV; v >= 1; v--) if (asg[v] == 0) g = v;
        if (g == 0) begin sat = 1; break; end
        lvl_var.push_back(g); lvl_flip.push_back(0); lvl_lim.push_back(trail.size());
        val = 2;                       // first try: true
      end
      asg[g] = val;
      src[g] = -1;
      trail.push_back(g);
      n_decisions++;
      propagate(g, conflict);
    end
    if (sat) begin
      int bad;
      bad = 0;
      for (int c = 0; c < NC; c++) if (clause_state(c) != 0) bad++;
      checks++;
      if (bad != 0) fail("final assignment leaves clauses unsatisfied");
    end
    checks++;
    if (unsat) fail("a satisfiable formula was reported unsatisfiable");
    complete = sat;
    if (VERBOSE)
      $display("host NV=%0d NC=%0d parts=%0d: %s after %0d decisions, %0d implications, %0d conflicts, %0d backtracks (%0d clear-all), %0d swaps, %0d stall cycles, %0d engine cycles",
               NV, NC, num_parts, sat ? "SAT" : (unsat ? "UNSAT" : "stopped"), n_decisions, n_implications,
               n_conflicts, n_backtracks, n_clear_alls, n_swaps, n_stall_cycles, n_engine_cycles);
    done = 1;
  end

endmodule
