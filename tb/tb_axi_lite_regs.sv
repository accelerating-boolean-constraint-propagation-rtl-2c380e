// tb_axi_lite_regs: the register interface against a bus-functional AXI4-Lite master.
//
// A stub control unit accepts commands after a random delay and a stub FIFO holds a
// queue of implications. Checked: CLAUSE write with byte strobes and read-back; that a
// CMD write produces a command with the right fields and that its write response only
// arrives after the command is accepted; the STATUS bit mapping; that IMPL returns the
// FIFO head with the valid bit and pops exactly once per read, and returns valid=0 when
// empty; the CYCLES register.
module tb_axi_lite_regs;
  import bcp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready, s_rvalid, s_rready;
  logic [4:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic cmd_valid, cmd_ready, sat_all, fifo_empty, fifo_full, fifo_pop;
  cmd_t cmd;
  cu_status_t cu_status;
  impl_t fifo_head;
  logic [6:0] fifo_count;

  axi_lite_regs dut (.*);

  int checks = 0, failures = 0;
  impl_t q[$];
  int accept_delay = 0;
  int n_accepted = 0;
  cmd_t last_cmd;

  task automatic fail(string s);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", s, $time);
  endtask

  // stub FIFO
  always_comb begin
    fifo_empty = (q.size() == 0);
    fifo_head  = fifo_empty ? '0 : q[0];
    fifo_count = 7'(q.size());
    fifo_full  = (q.size() == 64);
  end
  always @(posedge clk) if (fifo_pop) void'(q.pop_front());

  // stub control unit: accept after accept_delay cycles
  int wait_cnt = 0;
  always @(posedge clk) begin
    if (!rst_n) begin n_accepted <= 0; wait_cnt <= 0; end
    else if (cmd_valid && cmd_ready) begin last_cmd <= cmd; n_accepted <= n_accepted + 1; wait_cnt <= 0; end
    else if (cmd_valid) wait_cnt <= wait_cnt + 1;
  end
  assign cmd_ready = cmd_valid && (wait_cnt >= accept_delay);

  task automatic axi_write(logic [4:0] a, logic [31:0] d, logic [3:0] strb, output int lat);
    s_awaddr = a; s_wdata = d; s_wstrb = strb; s_awvalid = 1; s_wvalid = 1; s_bready = 1;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!(s_awready && s_wready));
    #1 s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) begin @(posedge clk); #1; lat++; end
    checks++;
    if (s_bresp != 2'b00) fail("bresp");
    @(posedge clk); #1 s_bready = 0;
  endtask

  task automatic axi_read(logic [4:0] a, output logic [31:0] d);
    s_araddr = a; s_arvalid = 1; s_rready = 0;
    do @(posedge clk); while (!s_arready);
    #1 s_arvalid = 0;
    while (!s_rvalid) begin @(posedge clk); #1; end
    // keep RREADY low one cycle to exercise the hold rule
    @(posedge clk); #1;
    d = s_rdata;
    s_rready = 1;
    @(posedge clk); #1 s_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    int lat;
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0; s_wstrb = '0;
    cu_status = '0; sat_all = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    // CLAUSE register with strobes
    axi_write(5'h00, 32'h0123_4567, 4'hF, lat);
    axi_write(5'h00, 32'hAABB_CCDD, 4'b0101, lat);
    axi_read(5'h00, d);
    checks++; if (d != 32'h01BB_45DD) fail($sformatf("clause readback %h", d));
    // commands with random acceptance delays
    for (int t = 0; t < 200; t++) begin
      logic [31:0] w, cl;
      cl = $urandom() & 32'h07FF_FFFF;
      axi_write(5'h00, cl, 4'hF, lat);
      accept_delay = $urandom_range(0, 6);
      w = '0;
      w[1:0] = 2'($urandom_range(1, 3));
      w[2] = 1'($urandom_range(0, 1));
      w[8:3] = 6'($urandom_range(1, 63));
      w[23:16] = 8'($urandom_range(0, 223));
      axi_write(5'h04, w, 4'hF, lat);
      checks++;
      if (last_cmd.op != op_t'(w[1:0]) || last_cmd.value != w[2] || last_cmd.v != w[8:3] ||
          last_cmd.cp_idx != w[23:16] || last_cmd.clause != cl[26:0]) fail("command fields");
      checks++;
      if (n_accepted != t + 1) fail("command count");
      checks++;
      // address+data handshake, then accept_delay cycles of waiting, then BVALID
      if (lat < accept_delay + 2) fail($sformatf("write response before accept (lat %0d delay %0d)", lat, accept_delay));
    end
    // STATUS mapping
    for (int t = 0; t < 50; t++) begin
      cu_status.busy = 1'($urandom_range(0, 1));
      cu_status.conflict = 1'($urandom_range(0, 1));
      cu_status.stalls = 16'($urandom());
      cu_status.cycles = 16'($urandom());
      sat_all = 1'($urandom_range(0, 1));
      q.delete();
      repeat ($urandom_range(0, 5)) q.push_back(impl_t'($urandom_range(0, 127)));
      #1;
      axi_read(5'h08, d);
      checks++;
      if (d[0] != cu_status.busy || d[1] != cu_status.conflict || d[2] != (q.size() == 0) ||
          d[3] != 1'b0 || d[4] != sat_all || d[15:8] != 8'(q.size()) || d[31:16] != cu_status.stalls)
        fail($sformatf("status %h", d));
      axi_read(5'h10, d);
      checks++;
      if (d != {16'h0, cu_status.cycles}) fail("cycles");
    end
    // IMPL pops
    q.delete();
    cu_status = '0;
    for (int i = 0; i < 20; i++) q.push_back(impl_t'($urandom_range(0, 127)));
    for (int i = 0; i < 22; i++) begin
      impl_t e;
      int sz;
      sz = q.size();
      e = sz > 0 ? q[0] : '0;
      axi_read(5'h0C, d);
      checks++;
      if (sz > 0 && (d[31] != 1'b1 || d[6:0] != e || q.size() != sz - 1)) fail("impl pop");
      if (sz == 0 && (d[31] != 1'b0 || q.size() != 0)) fail("impl empty");
    end
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
