// tb_dd_cmd_arbiter: host commands pass through while the engine is idle;
// a defense request with a host row open makes the arbiter close the row,
// wait T_RP, and then grant; the host is stalled while the engine owns the
// bus and the engine's commands appear on the bus; the host gets the bus
// back when the request drops. A request with the bank idle is granted
// after one cycle.
`timescale 1ns/1ps
module tb_dd_cmd_arbiter;
  import dd_pkg::*;
  localparam int unsigned ROW_W = 8, COL_W = 4, T_RP = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  dram_cmd_e        host_cmd = CMD_NOP, def_cmd = CMD_NOP, dram_cmd;
  logic [ROW_W-1:0] host_row = '0, def_row = '0, dram_row;
  logic [COL_W-1:0] host_col = '0, dram_col;
  logic host_ready, def_req = 0, def_gnt, host_stall, close_pre;

  dd_cmd_arbiter #(.ROW_W(ROW_W), .COL_W(COL_W), .T_RP(T_RP)) u_dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int waited;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    host_cmd = CMD_ACT; host_row = 8'h42;
    #0.1;
    check(host_ready && dram_cmd == CMD_ACT && dram_row == 8'h42, "host ACT passes");
    @(negedge clk);
    host_cmd = CMD_RD; host_col = 4'h7;
    #0.1;
    check(dram_cmd == CMD_RD && dram_col == 4'h7, "host RD passes");
    @(negedge clk);
    host_cmd = CMD_NOP;
    // defense request with row 0x42 open
    def_req = 1;
    host_cmd = CMD_WR;
    #0.1;
    check(!host_ready && host_stall, "host stalled on request");
    check(close_pre && dram_cmd == CMD_PRE && dram_row == 8'h42, "open row closed");
    check(!def_gnt, "no grant before precharge time");
    waited = 0;
    while (!def_gnt) begin @(negedge clk); waited++; #0.1; end
    check(waited == T_RP + 1, $sformatf("grant after T_RP (%0d cycles)", waited));
    def_cmd = CMD_ACT; def_row = 8'h10;
    #0.1;
    check(dram_cmd == CMD_ACT && dram_row == 8'h10, "engine command on bus");
    check(!host_ready, "host still stalled");
    @(negedge clk);
    def_cmd = CMD_NOP;
    def_req = 0;
    @(negedge clk);
    #0.1;
    check(host_ready && dram_cmd == CMD_WR, "host resumes one cycle after release");
    @(negedge clk);
    host_cmd = CMD_NOP;
    @(negedge clk);
    // request with the bank idle: no PRE, grant next cycle (T_RP long past)
    repeat (T_RP + 2) @(negedge clk);
    def_req = 1;
    #0.1;
    check(!close_pre && dram_cmd == CMD_NOP, "no PRE when idle");
    @(negedge clk);
    #0.1;
    check(def_gnt, "grant after one cycle when idle");
    def_req = 0;
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
