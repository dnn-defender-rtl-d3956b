// tb_dd_round_timer: with T_RH = 10 and T_ACT = 3 (window 30 cycles) checks
// that start pulses at enable, that the gap from round_done to the next
// start is exactly the window, that a round longer than the window raises
// overrun exactly once, and that the interrupt stops new rounds.
`timescale 1ns/1ps
module tb_dd_round_timer;
  localparam int unsigned WINDOW = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;
  logic enable = 0, dd_interrupt = 0, round_done = 0;
  logic start, overrun, waiting;

  dd_round_timer #(.T_RH(10), .T_ACT(3)) u_dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint start_t [$];
  int n_over = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) start_t.push_back(cyc);
    if (overrun) n_over++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic finish_round_after(input int n);
    repeat (n) @(negedge clk);
    round_done = 1;
    @(negedge clk);
    round_done = 0;
  endtask

  longint done_t;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    check(start_t.size() == 0, "no start while disabled");
    enable = 1;
    @(negedge clk);
    check(start_t.size() == 0, "start is registered");
    @(negedge clk);
    check(start_t.size() == 1, "start right after enable");
    // short round (10 cycles)
    finish_round_after(10);
    done_t = cyc - 1;
    check(waiting, "waiting between rounds");
    wait (start_t.size() == 2);
    check(start_t[1] - done_t == longint'(WINDOW), $sformatf("gap = window (%0d)", start_t[1] - done_t));
    check(n_over == 0, "no overrun for a short round");
    // long round (45 cycles > window)
    finish_round_after(45);
    check(n_over == 1, $sformatf("one overrun for a long round (%0d)", n_over));
    wait (start_t.size() == 3);
    // interrupt while waiting: no more starts
    finish_round_after(5);
    dd_interrupt = 1;
    repeat (3 * WINDOW) @(negedge clk);
    check(start_t.size() == 3, "no start while interrupted");
    check(!waiting, "timer idle while interrupted");
    dd_interrupt = 0;
    repeat (3) @(negedge clk);
    check(start_t.size() == 4, "start again when interrupt clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
