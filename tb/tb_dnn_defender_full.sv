// tb_dnn_defender_full: end-to-end run of the DNN-Defender bank controller
// with every parameter at its default (128 sub-arrays of 512 rows,
// T_RH = 4800, T_ACT = 45 cycles, T_AAP = 90 cycles, 2048-entry table)
// against the behavioural DRAM bank.
//  1. No defense: the attacker hammers the neighbour of a target row
//     T_RH+1 times at one activation per T_ACT; the target row flips.
//  2. Defense on, 5 targets in two sub-arrays: two full rounds with a
//     white-box attacker that follows target 0 and hammers at the full rate
//     for the whole threshold window between rounds. Each round issues
//     3n+1 copies per chain at one per T_AAP; all protected data must be
//     intact afterwards and the bank must see no protocol error.
`timescale 1ns/1ps
module tb_dnn_defender_full;
  import dd_pkg::*;

  localparam int unsigned SA      = SUBARRAYS_DEF;
  localparam int unsigned RPS     = ROWS_PER_SA_DEF;
  localparam int unsigned DEPTH   = TABLE_DEPTH_DEF;
  localparam int unsigned T_RH    = T_RH_DEF;
  localparam int unsigned T_ACT   = T_ACT_DEF;
  localparam int unsigned T_AAP   = T_AAP_DEF;
  localparam int unsigned NROUNDS = 2;
  localparam int unsigned WDOG    = 2_000_000;
  localparam int unsigned NROWS   = SA * RPS;
  localparam int unsigned ROW_W   = $clog2(NROWS);
  localparam int unsigned IDX_W   = $clog2(DEPTH);
  localparam int unsigned WINDOW  = T_RH * T_ACT;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic             dd_enable = 1'b0, dd_interrupt = 1'b0;
  logic             tbl_wr_en = 1'b0, tbl_cnt_wr = 1'b0;
  logic [IDX_W-1:0] tbl_wr_idx = '0, tbl_rd_idx = '0;
  logic [ROW_W-1:0] tbl_wr_tgt = '0, tbl_wr_nt = '0;
  logic [IDX_W:0]   tbl_cnt = '0;
  logic [ROW_W-1:0] tbl_rd_tgt, tbl_rd_nt;
  logic [IDX_W:0]   tbl_count;
  dram_cmd_e        host_cmd = CMD_NOP;
  logic [ROW_W-1:0] host_row = '0;
  logic [9:0]       host_col = '0;
  logic             host_ready;
  dram_cmd_e        dram_cmd;
  logic [ROW_W-1:0] dram_row;
  logic [9:0]       dram_col;
  logic             reloc_valid;
  logic [ROW_W-1:0] reloc_a, reloc_b;
  logic round_busy, round_start, round_done, round_aborted, round_overrun;
  logic chain_start, swap_done, copy_start, rng_retry, host_stall, close_pre;
  logic round_waiting;
  swap_step_e copy_step;

  dnn_defender u_dut (.*);

  dram_bank_model #(.SUBARRAYS(SA), .ROWS_PER_SA(RPS), .ROW_BITS(32), .T_RH(T_RH))
    u_mem (.clk, .cmd(dram_cmd), .row(dram_row));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pattern(input int unsigned r);
    return (r * 32'h9E37_79B1) ^ 32'h5A5A_0000;
  endfunction

  task automatic init_mem();
    for (int unsigned r = 0; r < NROWS; r++) begin
      u_mem.mem[r] = pattern(r);
      u_mem.disturb[r] = 0;
    end
  endtask

  // ---------------- event counters ----------------
  int n_round = 0, n_done = 0, n_chain = 0, n_swap = 0, n_copy = 0;
  int n_retry = 0, n_stall = 0, n_close = 0, n_reloc = 0, n_over = 0, n_abort = 0;
  int r_chain = 0, r_swap = 0, r_copy = 0;
  longint last_copy_t = -1, round_t0 = 0;
  int spacing_err = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (round_start) begin n_round++; r_chain = 0; r_swap = 0; r_copy = 0;
                           last_copy_t = -1; round_t0 = cyc; end
    if (round_done)  n_done++;
    if (chain_start) begin n_chain++; r_chain++; end
    if (swap_done)   begin n_swap++;  r_swap++;  end
    if (copy_start) begin
      n_copy++; r_copy++;
      if (last_copy_t >= 0 && copy_step != STEP_RANDOM_TO_RES &&
          cyc - last_copy_t != T_AAP) spacing_err++;
      last_copy_t = cyc;
    end
    if (rng_retry)     n_retry++;
    if (host_stall)    n_stall++;
    if (close_pre)     n_close++;
    if (reloc_valid)   n_reloc++;
    if (round_overrun) n_over++;
    if (round_aborted) n_abort++;
  end

  // ---------------- host helpers ----------------
  task automatic host_issue(input dram_cmd_e c, input int unsigned r);
    @(negedge clk);
    host_cmd = c;
    host_row = ROW_W'(r);
    do @(posedge clk); while (!host_ready);
    @(negedge clk);
    host_cmd = CMD_NOP;
  endtask

  // One activation per T_ACT when the bus is free: ACT, PRE, idle.
  task automatic hammer_once(input int unsigned r);
    host_issue(CMD_ACT, r);
    host_issue(CMD_PRE, r);
    repeat (T_ACT - 2) @(posedge clk);
  endtask

  task automatic tbl_write(input int i, input int unsigned t, input int unsigned n);
    @(negedge clk);
    tbl_wr_en = 1'b1; tbl_wr_idx = IDX_W'(i);
    tbl_wr_tgt = ROW_W'(t); tbl_wr_nt = ROW_W'(n);
    @(negedge clk);
    tbl_wr_en = 1'b0;
  endtask

  task automatic tbl_set_count(input int c);
    @(negedge clk);
    tbl_cnt_wr = 1'b1; tbl_cnt = (IDX_W+1)'(c);
    @(negedge clk);
    tbl_cnt_wr = 1'b0;
  endtask

  function automatic int unsigned aggressor_of(input int unsigned t);
    return ((t % RPS) == 0) ? t + 1 : t - 1 + 2 * int'((t % RPS) < RPS - 2);
  endfunction

  int unsigned tgt0 [5] = '{516, 530, 600, 1030, 1100};
  int unsigned nt0  [5] = '{518, 532, 602, 1032, 1102};
  logic [31:0] tval [8], nval [8];
  int unsigned cur_t, cur_n;
  int d0;

  initial begin
    init_mem();
    repeat (5) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // ---- 1. no defense: the target row flips ----
    for (int i = 0; i <= int'(T_RH); i++) hammer_once(tgt0[0] + 1);
    repeat (3) @(posedge clk);
    check(u_mem.mem[tgt0[0]] == (pattern(tgt0[0]) ^ 32'h1),
          "unprotected target row takes a RowHammer flip");
    check(u_mem.flips >= 1, "model counted the flip");
    init_mem();

    // ---- 2. defense on, two chains, tracking attacker ----
    for (int i = 0; i < 5; i++) begin
      tbl_write(i, tgt0[i], nt0[i]);
      tval[i] = pattern(tgt0[i]);
      nval[i] = pattern(nt0[i]);
    end
    tbl_set_count(5);
    @(negedge clk);
    tbl_rd_idx = '0;
    #0.1;
    check(tbl_count == 5 && tbl_rd_tgt == ROW_W'(tgt0[0]) && tbl_rd_nt == ROW_W'(nt0[0]),
          "table readback");
    // leave a host row open so the arbiter has to close it
    host_issue(CMD_ACT, 3000);
    @(negedge clk);
    dd_enable = 1'b1;
    wait (n_done == 1);
    for (int rnd = 0; rnd < int'(NROUNDS); rnd++) begin
      @(posedge clk); #0.1;
      check(r_chain == 2, $sformatf("round %0d: two chains (%0d)", rnd, r_chain));
      check(r_swap == 5,  $sformatf("round %0d: five swaps (%0d)", rnd, r_swap));
      check(r_copy == 17, $sformatf("round %0d: 3n+1 copies per chain = 17 (%0d)", rnd, r_copy));
      // attacker follows target 0 and hammers until the next round is over
      tbl_rd_idx = '0;
      #0.1;
      cur_t = tbl_rd_tgt;
      d0 = n_done;
      while (n_done == d0) hammer_once(aggressor_of(cur_t));
    end
    @(negedge clk);
    dd_enable = 1'b0;
    repeat (5) @(posedge clk);
    check(spacing_err == 0, "copies follow each other every T_AAP inside a chain");
    check(n_over == 0, "no overrun with 5 targets");
    check(u_mem.proto_err == 0, "no DRAM protocol errors");
    for (int i = 0; i < 5; i++) begin
      tbl_rd_idx = IDX_W'(i);
      #0.1;
      cur_t = tbl_rd_tgt; cur_n = tbl_rd_nt;
      check(u_mem.mem[cur_t] == tval[i], $sformatf("target %0d data intact at row %0d", i, cur_t));
      check(u_mem.mem[cur_n] == nval[i], $sformatf("non-target %0d data intact at row %0d", i, cur_n));
      check(cur_t / RPS == tgt0[i] / RPS, $sformatf("target %0d stays in its sub-array", i));
    end
    tbl_rd_idx = '0;
    #0.1;
    check(tbl_rd_tgt != ROW_W'(tgt0[0]) || n_reloc > 0, "target 0 relocated");

    // ---- mechanism coverage ----
    $display("events: rounds=%0d chains=%0d swaps=%0d copies=%0d rng_retry=%0d stall=%0d close=%0d reloc=%0d overrun=%0d abort=%0d flips=%0d",
             n_round, n_chain, n_swap, n_copy, n_retry, n_stall, n_close, n_reloc, n_over, n_abort, u_mem.flips);
    check(n_round > 0 && n_round == n_done, "rounds happened and completed");
    check(n_chain > 0, "chains happened");
    check(n_swap > 0, "swaps happened");
    check(n_copy == 3 * n_swap + n_chain, "copies = 3 x swaps + 1 per chain");
    // RNG rejections are rare at 511 data rows per sub-array; the reduced
    // end-to-end test covers them.
    check(n_stall > 0, "host stall happened");
    check(n_close > 0, "open host row closed");
    check(n_reloc == n_swap, "one relocation per swap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
