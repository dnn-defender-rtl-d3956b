// tb_dd_swap_engine: drives the swap engine (with the target table) through
// two protection rounds and compares every copy with an independently built
// list from the four-step swap of the paper.
//  * Round 1: two chains (3 targets in sub-array 1, 2 in sub-array 2). The
//    random source first offers the reserved row, then a row equal to a
//    target, then a free row; the engine must reject the first two. The
//    accepted copies, their order and step tags, the relocation reports and
//    the table updates are checked, and a shadow memory that applies every
//    copy must show all protected data at the addresses the table holds.
//  * Round 2: the interrupt is raised after the first swap; the round must
//    end after the second swap (a swap boundary) with data consistent.
// The copy consumer accepts one copy every third cycle and holds
// issuer_busy for a few cycles, so the handshakes are exercised.
`timescale 1ns/1ps
module tb_dd_swap_engine;
  import dd_pkg::*;
  localparam int unsigned SA = 4, RPS = 16, DEPTH = 8;
  localparam int unsigned ROW_W = 6, IDX_W = 3, NROWS = SA * RPS;
  localparam int unsigned GOOD = 10, COLLIDE = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic start = 0, dd_interrupt = 0, busy, bus_req, bus_gnt = 0;
  logic [IDX_W:0] count;
  logic [IDX_W-1:0] rd_idx, wr_tgt_idx, wr_nt_idx;
  logic [ROW_W-1:0] rd_tgt, rd_nt, wr_tgt, wr_nt;
  logic wr_tgt_en, wr_nt_en;
  logic [15:0] rnd;
  logic copy_valid, copy_ready, issuer_busy;
  logic [ROW_W-1:0] copy_src, copy_dst;
  swap_step_e copy_step;
  logic reloc_valid;
  logic [ROW_W-1:0] reloc_a, reloc_b;
  logic done, aborted, chain_start, swap_done, rng_retry;

  // host side of the table
  logic host_wr_en = 0, host_cnt_wr = 0;
  logic [IDX_W-1:0] host_wr_idx = '0, host_rd_idx = '0;
  logic [ROW_W-1:0] host_wr_tgt = '0, host_wr_nt = '0, host_rd_tgt, host_rd_nt;
  logic [IDX_W:0] host_cnt = '0;

  dd_swap_engine #(.SUBARRAYS(SA), .ROWS_PER_SA(RPS), .RESERVED(1), .DEPTH(DEPTH)) u_dut (.*);

  dd_target_table #(.DEPTH(DEPTH), .ROW_W(ROW_W)) u_tbl (
    .clk, .rst_n, .host_wr_en, .host_wr_idx, .host_wr_tgt, .host_wr_nt,
    .host_cnt_wr, .host_cnt, .host_rd_idx, .host_rd_tgt, .host_rd_nt, .count,
    .eng_busy(busy), .eng_rd_idx(rd_idx), .eng_rd_tgt(rd_tgt), .eng_rd_nt(rd_nt),
    .eng_wr_tgt_en(wr_tgt_en), .eng_wr_tgt_idx(wr_tgt_idx), .eng_wr_tgt(wr_tgt),
    .eng_wr_nt_en(wr_nt_en), .eng_wr_nt_idx(wr_nt_idx), .eng_wr_nt(wr_nt));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- environment models ----
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign copy_ready = (cyc % 3 == 0);
  int busy_left = 0;
  assign issuer_busy = (busy_left > 0);
  always @(posedge clk) bus_gnt <= bus_req;   // grant one cycle after request

  int retries = 0;
  always @(posedge clk) if (rng_retry) retries++;
  bit alt = 0;  // round 2: a value that changes every cycle
  assign rnd = alt ? 16'(cyc * 7) :
               (retries < 2) ? 16'hFF0F :          // local row 15: reserved
               (retries < 3) ? 16'h1230 | COLLIDE : // equals a target row
                               16'h4560 | GOOD;

  // shadow memory: every accepted copy is applied
  int unsigned shadow [NROWS];
  int unsigned got_src [$], got_dst [$], got_step [$];
  int unsigned rel_a [$], rel_b [$];
  int n_swap = 0, n_chain = 0, n_done = 0, n_abort = 0;
  always @(posedge clk) if (rst_n) begin
    if (busy_left > 0) busy_left <= busy_left - 1;
    if (copy_valid && copy_ready) begin
      shadow[copy_dst] = shadow[copy_src];
      got_src.push_back(copy_src); got_dst.push_back(copy_dst); got_step.push_back(copy_step);
      busy_left <= 4;
    end
    if (reloc_valid) begin rel_a.push_back(reloc_a); rel_b.push_back(reloc_b); end
    if (swap_done) n_swap++;
    if (chain_start) n_chain++;
    if (done) n_done++;
    if (aborted) n_abort++;
  end

  // ---- table content ----
  int unsigned T [5] = '{18, 23, 27, 33, 44};
  int unsigned N [5] = '{20, 25, 29, 35, 46};

  // expected copies, built directly from the four-step description
  int unsigned ex_src [$], ex_dst [$], ex_step [$], ex_ra [$], ex_rb [$];
  int unsigned exp_t [5], exp_n [5];
  task automatic build_expected();
    int first_of_group [2] = '{0, 3};
    int last_of_group  [2] = '{2, 4};
    for (int g = 0; g < 2; g++) begin
      int unsigned sa, res, rand_row, freed;
      sa = T[first_of_group[g]] / RPS;
      res = sa * RPS + RPS - 1;
      rand_row = sa * RPS + GOOD;
      for (int k = first_of_group[g]; k <= last_of_group[g]; k++) begin
        if (k == first_of_group[g]) begin
          ex_src.push_back(rand_row); ex_dst.push_back(res); ex_step.push_back(0);
          freed = rand_row;
        end
        ex_src.push_back(T[k]); ex_dst.push_back(freed); ex_step.push_back(1);
        ex_src.push_back(res);  ex_dst.push_back(T[k]);  ex_step.push_back(2);
        ex_src.push_back(N[k]); ex_dst.push_back(res);   ex_step.push_back(3);
        ex_ra.push_back(T[k]); ex_rb.push_back(freed);
        exp_t[k] = freed;
        if (k != first_of_group[g]) exp_n[k-1] = T[k];
        exp_n[k] = N[k];
        freed = N[k];
      end
    end
  endtask

  int unsigned t_now, n_now;
  initial begin
    for (int r = 0; r < int'(NROWS); r++) shadow[r] = 1000 + r;
    build_expected();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      host_wr_en = 1; host_wr_idx = IDX_W'(i);
      host_wr_tgt = ROW_W'(T[i]); host_wr_nt = ROW_W'(N[i]);
      @(negedge clk);
    end
    host_wr_en = 0;
    host_cnt_wr = 1; host_cnt = 4'd5;
    @(negedge clk);
    host_cnt_wr = 0;

    // ---- round 1 ----
    start = 1;
    @(negedge clk);
    start = 0;
    wait (n_done == 1);
    @(negedge clk);
    check(got_src.size() == ex_src.size(), $sformatf("copy count %0d (expected %0d = 3n+1 per chain)",
          got_src.size(), ex_src.size()));
    for (int i = 0; i < ex_src.size() && i < got_src.size(); i++)
      check(got_src[i] == ex_src[i] && got_dst[i] == ex_dst[i] && got_step[i] == ex_step[i],
            $sformatf("copy %0d: %0d->%0d step %0d (expected %0d->%0d step %0d)", i,
                      got_src[i], got_dst[i], got_step[i] + 1, ex_src[i], ex_dst[i], ex_step[i] + 1));
    check(retries >= 2, $sformatf("reserved and colliding random rows rejected (%0d retries)", retries));
    check(n_chain == 2 && n_swap == 5 && n_abort == 0, "two chains, five swaps, no abort");
    check(rel_a.size() == 5, "one relocation report per swap");
    for (int i = 0; i < rel_a.size() && i < 5; i++)
      check(rel_a[i] == ex_ra[i] && rel_b[i] == ex_rb[i], $sformatf("relocation %0d", i));
    for (int i = 0; i < 5; i++) begin
      host_rd_idx = IDX_W'(i);
      #0.01;
      t_now = host_rd_tgt; n_now = host_rd_nt;
      check(t_now == exp_t[i] && n_now == exp_n[i], $sformatf("table entry %0d updated", i));
      check(shadow[t_now] == 1000 + T[i], $sformatf("target %0d data at its new row", i));
      check(shadow[n_now] == 1000 + N[i], $sformatf("non-target %0d data at its new row", i));
    end
    check(shadow[T[0]] == 1000 + 16 + GOOD, "random row's data kept at the old target row");

    // ---- round 2: interrupt after the first swap ----
    alt = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (n_swap == 6);
    @(negedge clk);
    dd_interrupt = 1;
    wait (n_done == 2);
    @(negedge clk);
    dd_interrupt = 0;
    check(n_abort == 1 && n_swap == 7, $sformatf("abort after second swap (%0d swaps)", n_swap - 5));
    for (int i = 0; i < 5; i++) begin
      host_rd_idx = IDX_W'(i);
      #0.01;
      t_now = host_rd_tgt; n_now = host_rd_nt;
      check(shadow[t_now] == 1000 + T[i] && shadow[n_now] == 1000 + N[i],
            $sformatf("after abort: entry %0d consistent", i));
    end
    check(!busy, "engine idle after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
