// dd_cmd_arbiter: shares one bank's command bus between host traffic and
// the DNN-Defender swap engine.
//
// The paper's swaps are memory-controller commands (RowClone ACT-ACT-PRE)
// on the same bus as normal accesses, so normal traffic must pause while a
// round runs. How that hand-over works is this design's choice: when the
// engine raises def_req the host is stalled (host_ready low); if the host
// left a row open the arbiter closes it with a PRE; once the bank has been
// precharged for T_RP cycles the engine gets def_gnt and owns the bus until
// it drops def_req. The engine only drops def_req after its last copy's
// precharge time has elapsed, so the host may issue ACT at once.
//
// Interface: host_cmd/row/col with host_ready (a command is taken in a cycle
// where host_ready is high), def_req/def_gnt with def_cmd/def_row, and the
// bank bus dram_cmd/row/col. host_stall pulses when the host offers a
// command that is held back; close_pre pulses when the arbiter closes a row.
// Timing: combinational pass-through of the owner's command. Hand-over to
// the engine takes 1 cycle if the bank has been idle for T_RP cycles; if a
// row is open, the PRE goes out in the request cycle and the grant T_RP
// cycles later, so the engine's first ACT respects tRP. The host gets the
// bus back one cycle after def_req drops.
module dd_cmd_arbiter
  import dd_pkg::*;
#(
  parameter int unsigned ROW_W = 16,
  parameter int unsigned COL_W = 10,
  parameter int unsigned T_RP  = T_RP_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  dram_cmd_e        host_cmd,
  input  logic [ROW_W-1:0] host_row,
  input  logic [COL_W-1:0] host_col,
  output logic             host_ready,
  input  logic             def_req,
  output logic             def_gnt,
  input  dram_cmd_e        def_cmd,
  input  logic [ROW_W-1:0] def_row,
  output dram_cmd_e        dram_cmd,
  output logic [ROW_W-1:0] dram_row,
  output logic [COL_W-1:0] dram_col,
  output logic             host_stall,
  output logic             close_pre
);

  localparam int unsigned RP_W = $clog2(T_RP + 1);

  logic             own_def;   // engine owns the bus
  logic             open_q;    // a host row is open
  logic [ROW_W-1:0] open_row;
  logic [RP_W-1:0]  rp_cnt;    // cycles since the last PRE, saturating

  wire host_take = !def_req && !own_def;
  wire need_close = def_req && !own_def && open_q;

  assign host_ready = host_take;
  assign def_gnt    = own_def;
  assign host_stall = !host_take && (host_cmd != CMD_NOP);
  assign close_pre  = need_close;

  always_comb begin
    dram_cmd = CMD_NOP;
    dram_row = '0;
    dram_col = '0;
    if (own_def) begin
      dram_cmd = def_cmd;
      dram_row = def_row;
    end else if (need_close) begin
      dram_cmd = CMD_PRE;
      dram_row = open_row;
    end else if (host_take) begin
      dram_cmd = host_cmd;
      dram_row = host_row;
      dram_col = host_col;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_def  <= 1'b0;
      open_q   <= 1'b0;
      open_row <= '0;
      rp_cnt   <= RP_W'(T_RP);
    end else begin
      if (dram_cmd == CMD_PRE)               rp_cnt <= '0;
      else if (rp_cnt != RP_W'(T_RP))        rp_cnt <= rp_cnt + 1'b1;
      if (!own_def) begin
        if (dram_cmd == CMD_ACT) begin
          open_q   <= 1'b1;
          open_row <= dram_row;
        end else if (dram_cmd == CMD_PRE) begin
          open_q <= 1'b0;
        end
      end
      if (!def_req)
        own_def <= 1'b0;
      else if (!own_def && !open_q && dram_cmd != CMD_PRE && rp_cnt >= RP_W'(T_RP - 1))
        own_def <= 1'b1;
    end
  end

  // The host never drives the bus while the engine owns it.
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    own_def |-> !host_ready)
    else $error("dd_cmd_arbiter: host and engine both own the bus");

  initial assert (T_RP >= 1) else $error("dd_cmd_arbiter: T_RP must be at least 1");

endmodule
