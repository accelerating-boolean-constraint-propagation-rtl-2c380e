// tb_implication_selector: random unit vectors at the default 224 processors.
//
// Drives random unit flags (sparse, dense, single bit, none) with random implications and
// checks that the selector reports the implication of the lowest-index unit processor,
// found here by a separate scan, and reports no implication when no flag is set.
module tb_implication_selector;
  import bcp_pkg::*;
  localparam int N = 224;

  logic [N-1:0] unit;
  impl_t [N-1:0] impl;
  logic valid;
  impl_t chosen;

  implication_selector #(.NUM_CP(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int first;
      for (int i = 0; i < N; i++) begin
        impl[i] = impl_t'($urandom_range(0, 127));
        case (t % 4)
          0: unit[i] = ($urandom_range(0, 99) == 0);
          1: unit[i] = $urandom_range(0, 1);
          2: unit[i] = 1'b0;
          default: unit[i] = 1'b0;
        endcase
      end
      if (t % 4 == 3) unit[$urandom_range(0, N-1)] = 1'b1;
      if (t == 5) unit = '0;
      if (t == 6) begin unit = '0; unit[N-1] = 1'b1; end
      #1;
      first = -1;
      for (int i = N - 1; i >= 0; i--) if (unit[i]) first = i;
      checks++;
      if (first < 0) begin
        if (valid !== 1'b0) begin failures++; $display("FAIL valid with no unit"); end
      end else if (valid !== 1'b1 || chosen !== impl[first]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d first=%0d chosen=%h exp=%h", t, first, chosen, impl[first]);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
