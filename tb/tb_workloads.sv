// tb_workloads: the clause/variable combinations of the evaluation, each on its own
// default-size coprocessor with a host model, run side by side.
//
// Sizes (variables x clauses): 63x224 (fits on chip, solved completely), 63x448 (two
// partitions, solved completely), 126x448 (16 partitions, first 150 decisions), 225x2240
// and 630x2240 (about 100 partitions, first 12 and 40 decisions) and 63x22400 (100
// partitions, first 2 decisions; every variable appears in every partition, so each
// propagated variable costs 100 hot swaps). Runs are capped to keep simulation short.
// Formulas are random satisfiable 3-CNF, not the original instances. Every implication,
// conflict and fixed point is checked by the host models; the complete runs must end
// with a satisfying assignment.
module tb_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int W = 6;
  logic   done[W], complete[W];
  int     chk[W], fl[W], dec[W], imp[W], swp[W];
  longint cyc[W];
  localparam int NVS[W]  = '{63, 63, 126, 225, 630, 63};
  localparam int NCS[W]  = '{224, 448, 448, 2240, 2240, 22400};
  localparam int CAPS[W] = '{100000, 100000, 150, 12, 40, 2};

  for (genvar i = 0; i < W; i++) begin : g_w
    bcp_system #(.NV(NVS[i]), .NC(NCS[i]), .SEED(20 + i), .MAX_DEC(CAPS[i])) u_sys (
      .clk, .rst_n,
      .done(done[i]), .complete(complete[i]), .checks(chk[i]), .failures(fl[i]),
      .n_decisions(dec[i]), .n_implications(imp[i]), .n_swaps(swp[i]), .n_engine_cycles(cyc[i])
    );
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < W; i++) wait (done[i]);
    @(posedge clk);
    for (int i = 0; i < W; i++) begin
      checks += chk[i];
      failures += fl[i];
      $display("workload %0d vars x %0d clauses: %0s, %0d decisions, %0d implications, %0d hot swaps, %0d engine cycles",
               NVS[i], NCS[i], complete[i] ? "solved" : "partial run", dec[i], imp[i], swp[i], cyc[i]);
      if (CAPS[i] > 1000) begin
        checks++;
        if (!complete[i]) begin failures++; $display("FAIL workload %0d not solved", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
