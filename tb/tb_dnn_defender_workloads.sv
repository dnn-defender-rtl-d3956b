// tb_dnn_defender_workloads: one protection round of the default-size
// controller for each protected-set size the evaluation uses, taken per
// bank (16 banks, one protected bit per row in the worst case):
//   ResNet-20 / CIFAR-10, 1150 bits  ->  72 targets
//   VGG-11 / CIFAR-10, 2k, 4k, 8k    -> 125, 250, 500 targets
//   VGG-11 / CIFAR-10, 14k           -> 875 targets (longer than the window)
// Targets are spread 64 per sub-array (stride 4: target, aggressor,
// non-target, spare). For each size the test checks the number of chains
// and copies (3n+1 per chain), the round length against
// (copies x T_AAP), whether the round overruns the T_RH x T_ACT window
// exactly when that arithmetic says it must, and that every protected row's
// data is found where the table says after the round.
`timescale 1ns/1ps
module tb_dnn_defender_workloads;
  import dd_pkg::*;

  localparam int unsigned SA     = SUBARRAYS_DEF;
  localparam int unsigned RPS    = ROWS_PER_SA_DEF;
  localparam int unsigned DEPTH  = TABLE_DEPTH_DEF;
  localparam int unsigned NROWS  = SA * RPS;
  localparam int unsigned ROW_W  = $clog2(NROWS);
  localparam int unsigned IDX_W  = $clog2(DEPTH);
  localparam int unsigned WINDOW = T_RH_DEF * T_ACT_DEF;
  localparam int unsigned PER_SA = 64;
  localparam int unsigned NW     = 5;

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

  dram_bank_model #(.SUBARRAYS(SA), .ROWS_PER_SA(RPS), .ROW_BITS(32), .T_RH(T_RH_DEF))
    u_mem (.clk, .cmd(dram_cmd), .row(dram_row));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pattern(input int unsigned r);
    return (r * 32'h9E37_79B1) ^ 32'h0F0F_1234;
  endfunction

  int n_chain = 0, n_copy = 0, n_over = 0, n_done = 0;
  longint cyc = 0, t_start = 0, t_done = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (round_start) t_start = cyc;
      if (round_done) begin t_done = cyc; n_done++; end
      if (chain_start) n_chain++;
      if (copy_start) n_copy++;
      if (round_overrun) n_over++;
    end
  end

  function automatic int unsigned tgt_row(input int i);
    return (1 + i / PER_SA) * RPS + 4 * (i % PER_SA);
  endfunction

  int sizes [NW] = '{72, 125, 250, 500, 875};
  string names [NW] = '{"ResNet-20 1150 bits", "VGG-11 2k bits", "VGG-11 4k bits",
                        "VGG-11 8k bits", "VGG-11 14k bits"};
  int n, chains, copies, d0;
  bit expect_over;
  longint len;

  initial begin
    for (int unsigned r = 0; r < NROWS; r++) u_mem.mem[r] = pattern(r);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < NW; w++) begin
      n = sizes[w];
      for (int unsigned r = 0; r < NROWS; r++) u_mem.mem[r] = pattern(r);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        tbl_wr_en = 1'b1; tbl_wr_idx = IDX_W'(i);
        tbl_wr_tgt = ROW_W'(tgt_row(i)); tbl_wr_nt = ROW_W'(tgt_row(i) + 2);
      end
      @(negedge clk);
      tbl_wr_en = 1'b0;
      tbl_cnt_wr = 1'b1; tbl_cnt = (IDX_W+1)'(n);
      @(negedge clk);
      tbl_cnt_wr = 1'b0;
      chains = (n + PER_SA - 1) / PER_SA;
      copies = 3 * n + chains;
      expect_over = (longint'(copies) * T_AAP_DEF > WINDOW);
      n_chain = 0; n_copy = 0; n_over = 0;
      d0 = n_done;
      dd_enable = 1'b1;
      wait (n_done == d0 + 1);
      @(negedge clk);
      dd_enable = 1'b0;
      len = t_done - t_start;
      $display("%s: %0d targets, %0d chains, %0d copies, round %0d cycles (window %0d)%s",
               names[w], n, n_chain, n_copy, len, WINDOW, (n_over > 0) ? ", OVERRUN" : "");
      check(n_chain == chains, $sformatf("%s: chains %0d", names[w], n_chain));
      check(n_copy == copies, $sformatf("%s: copies %0d (expected %0d)", names[w], n_copy, copies));
      check(len >= longint'(copies) * T_AAP_DEF && len < longint'(copies) * T_AAP_DEF + 4 * n + 200,
            $sformatf("%s: round length %0d close to copies x T_AAP", names[w], len));
      check((n_over > 0) == expect_over, $sformatf("%s: overrun flag %0d, expected %0d", names[w], n_over, expect_over));
      for (int i = 0; i < n; i++) begin
        tbl_rd_idx = IDX_W'(i);
        #0.01;
        check(u_mem.mem[tbl_rd_tgt] == pattern(tgt_row(i)) &&
              u_mem.mem[tbl_rd_nt] == pattern(tgt_row(i) + 2),
              $sformatf("%s: entry %0d data intact", names[w], i));
      end
      check(u_mem.proto_err == 0, $sformatf("%s: no DRAM protocol errors", names[w]));
      // wait for the timer to settle back to idle
      repeat (10) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
