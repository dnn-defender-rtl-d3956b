// tb_dd_aap_issuer: sends three copies back to back and one after a gap and
// checks every command and its cycle: ACT(src) the cycle after acceptance,
// ACT(dst) T_ACT2ACT later, PRE T_ACT2PRE after that, and one copy per
// T_AAP = 90 cycles when requests are waiting.
`timescale 1ns/1ps
module tb_dd_aap_issuer;
  import dd_pkg::*;
  localparam int unsigned ROW_W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic req_valid = 0, req_ready, busy, copy_done;
  logic [ROW_W-1:0] req_src = '0, req_dst = '0, cmd_row;
  dram_cmd_e cmd;

  dd_aap_issuer #(.ROW_W(ROW_W)) u_dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // log of commands seen on the bus
  longint    ev_t   [$];
  dram_cmd_e ev_c   [$];
  int        ev_r   [$];
  longint    acc_t  [$];
  int        n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (cmd != CMD_NOP) begin ev_t.push_back(cyc); ev_c.push_back(cmd); ev_r.push_back(int'(cmd_row)); end
    if (req_valid && req_ready) acc_t.push_back(cyc);
    if (copy_done) n_done++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int s, input int d);
    @(negedge clk);
    req_valid = 1; req_src = ROW_W'(s); req_dst = ROW_W'(d);
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
  endtask

  int srcs [4] = '{10, 20, 30, 40};
  int dsts [4] = '{11, 21, 31, 41};

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      begin
        for (int i = 0; i < 3; i++) send(srcs[i], dsts[i]);
        repeat (200) @(posedge clk);
        send(srcs[3], dsts[3]);
      end
    join
    wait (!busy);
    repeat (3) @(posedge clk);
    checks++; if (ev_c.size() != 12) begin failures++; $display("FAIL: %0d commands", ev_c.size()); end
    checks++; if (n_done != 4) begin failures++; $display("FAIL: %0d copy_done", n_done); end
    for (int i = 0; i < 4 && 3 * i + 2 < ev_c.size(); i++) begin
      longint t0;
      t0 = acc_t[i] + 1;
      checks++;
      if (!(ev_c[3*i] == CMD_ACT && ev_r[3*i] == srcs[i] && ev_t[3*i] == t0)) begin
        failures++; $display("FAIL: copy %0d ACT src at %0d (exp %0d)", i, ev_t[3*i], t0);
      end
      checks++;
      if (!(ev_c[3*i+1] == CMD_ACT && ev_r[3*i+1] == dsts[i] && ev_t[3*i+1] == t0 + 35)) begin
        failures++; $display("FAIL: copy %0d ACT dst at %0d", i, ev_t[3*i+1]);
      end
      checks++;
      if (!(ev_c[3*i+2] == CMD_PRE && ev_t[3*i+2] == t0 + 70)) begin
        failures++; $display("FAIL: copy %0d PRE at %0d", i, ev_t[3*i+2]);
      end
      if (i > 0 && i < 3) begin
        checks++;
        if (ev_t[3*i] - ev_t[3*(i-1)] != 90) begin
          failures++; $display("FAIL: copy %0d spacing %0d", i, ev_t[3*i] - ev_t[3*(i-1)]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
