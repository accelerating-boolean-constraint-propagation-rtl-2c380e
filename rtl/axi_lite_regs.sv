// axi_lite_regs: AXI4-Lite subordinate through which the host drives the coprocessor.
//
// The host writes a clause and commands into registers and polls status and implications:
//
//   0x00 CLAUSE  R/W  [26:0] three literal slots, slot i at [9i+8:9i] =
//                     {value[1:0] (00 unassigned, 10 false, 11 true), negated, variable[5:0]}
//   0x04 CMD     W    [1:0] op (1 update clause, 2 decide, 3 backtrack; backtrack of
//                     variable 0 clears all assignments), [2] value,
//                     [8:3] variable, [23:16] clause processor index.
//                     Reads back the last word written.
//   0x08 STATUS  R    [0] busy (a command pending or BCP running), [1] conflict,
//                     [2] FIFO empty, [3] FIFO full, [4] every loaded clause satisfied,
//                     [15:8] FIFO fill level, [31:16] stall cycles of the last decision
//   0x0C IMPL    R    [31] valid, [6:1] variable, [0] value of the oldest implication;
//                     reading pops it when valid.
//   0x10 CYCLES  R    [15:0] cycles the last decision took inside the engine
//
// A write to CMD becomes a command (clause taken from CLAUSE) that is offered to the
// control unit with a valid/ready handshake; the write response is held back until the
// control unit accepts it, so a host that waits for BRESP never overruns the engine.
// Write address and data are accepted together, one transaction at a time; reads return
// data one cycle after the address. Responses are always OKAY. Byte strobes apply to
// CLAUSE; a CMD write always uses the whole word.
//
// From the paper: an AXI4-Lite subordinate to the processor, register writes for
// instructions and data, polling for status and new implications. The register map,
// bit layout, pop-on-read and the held-back write response are this design's choices.
module axi_lite_regs
  import bcp_pkg::*;
#(
  parameter int unsigned ADDR_W  = 5,
  parameter int unsigned FIFO_CW = 7     // width of the FIFO fill level
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite write address / data / response
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [ADDR_W-1:0]  s_awaddr,
  input  logic               s_wvalid,
  output logic               s_wready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  output logic               s_bvalid,
  input  logic               s_bready,
  output logic [1:0]         s_bresp,
  // AXI4-Lite read address / data
  input  logic               s_arvalid,
  output logic               s_arready,
  input  logic [ADDR_W-1:0]  s_araddr,
  output logic               s_rvalid,
  input  logic               s_rready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  // command to the control unit
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output cmd_t               cmd,
  // status from the engine and the implication FIFO
  input  cu_status_t         cu_status,
  input  logic               sat_all,
  input  impl_t              fifo_head,
  input  logic               fifo_empty,
  input  logic               fifo_full,
  input  logic [FIFO_CW-1:0] fifo_count,
  output logic               fifo_pop
);

  localparam logic [ADDR_W-1:0] A_CLAUSE = ADDR_W'(5'h00);
  localparam logic [ADDR_W-1:0] A_CMD    = ADDR_W'(5'h04);
  localparam logic [ADDR_W-1:0] A_STATUS = ADDR_W'(5'h08);
  localparam logic [ADDR_W-1:0] A_IMPL   = ADDR_W'(5'h0C);
  localparam logic [ADDR_W-1:0] A_CYCLES = ADDR_W'(5'h10);

  logic [31:0] clause_q, cmd_word_q;
  logic        cmd_pend_q;

  // ---------------------------------------------------------------- write channel
  logic wr_fire;
  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid && !cmd_pend_q;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clause_q   <= '0;
      cmd_word_q <= '0;
      cmd_pend_q <= 1'b0;
      s_bvalid   <= 1'b0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (cmd_pend_q && cmd_ready) begin
        cmd_pend_q <= 1'b0;
        s_bvalid   <= 1'b1;
      end
      if (wr_fire) begin
        if (s_awaddr == A_CMD) begin
          cmd_word_q <= s_wdata;
          cmd_pend_q <= 1'b1;
        end else begin
          if (s_awaddr == A_CLAUSE)
            for (int b = 0; b < 4; b++)
              if (s_wstrb[b]) clause_q[8*b +: 8] <= s_wdata[8*b +: 8];
          s_bvalid <= 1'b1;
        end
      end
    end
  end

  assign cmd_valid     = cmd_pend_q;
  assign cmd.op        = op_t'(cmd_word_q[1:0]);
  assign cmd.value     = cmd_word_q[2];
  assign cmd.v         = cmd_word_q[3 +: VAR_W];
  assign cmd.cp_idx    = cmd_word_q[16 +: CP_IDX_W];
  assign cmd.clause    = clause_q[$bits(clause_t)-1:0];

  // ---------------------------------------------------------------- read channel
  logic rd_fire;
  assign rd_fire   = s_arvalid && !s_rvalid;
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;

  logic [31:0] rd_mux;
  always_comb begin
    rd_mux = '0;
    unique case (s_araddr)
      A_CLAUSE: rd_mux = clause_q;
      A_CMD:    rd_mux = cmd_word_q;
      A_STATUS: begin
        rd_mux[0]     = cmd_pend_q || cu_status.busy;
        rd_mux[1]     = cu_status.conflict;
        rd_mux[2]     = fifo_empty;
        rd_mux[3]     = fifo_full;
        rd_mux[4]     = sat_all;
        rd_mux[15:8]  = 8'(fifo_count);
        rd_mux[31:16] = cu_status.stalls;
      end
      A_IMPL: begin
        rd_mux[31]        = !fifo_empty;
        rd_mux[1 +: VAR_W] = fifo_head.v;
        rd_mux[0]         = fifo_head.value;
      end
      A_CYCLES: rd_mux[15:0] = cu_status.cycles;
      default:  rd_mux = '0;
    endcase
  end

  assign fifo_pop = rd_fire && (s_araddr == A_IMPL) && !fifo_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_mux;
      end
    end
  end

  // AXI rule: a response, once valid, is held until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid)
    else $error("axi_lite_regs: BVALID dropped before BREADY");
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata))
    else $error("axi_lite_regs: RVALID/RDATA changed before RREADY");

endmodule
