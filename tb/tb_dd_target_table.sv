// tb_dd_target_table: fills the table from the host port, reads it back on
// both read ports, checks the count clamp, and checks that the two engine
// write ports update target and non-target fields of different entries in
// the same cycle without disturbing the other fields.
`timescale 1ns/1ps
module tb_dd_target_table;
  localparam int unsigned DEPTH = 16, ROW_W = 12, IDX_W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic             host_wr_en = 0, host_cnt_wr = 0, eng_busy = 0;
  logic [IDX_W-1:0] host_wr_idx = '0, host_rd_idx = '0, eng_rd_idx = '0;
  logic [ROW_W-1:0] host_wr_tgt = '0, host_wr_nt = '0;
  logic [IDX_W:0]   host_cnt = '0, count;
  logic [ROW_W-1:0] host_rd_tgt, host_rd_nt, eng_rd_tgt, eng_rd_nt;
  logic             eng_wr_tgt_en = 0, eng_wr_nt_en = 0;
  logic [IDX_W-1:0] eng_wr_tgt_idx = '0, eng_wr_nt_idx = '0;
  logic [ROW_W-1:0] eng_wr_tgt = '0, eng_wr_nt = '0;

  dd_target_table #(.DEPTH(DEPTH), .ROW_W(ROW_W)) u_dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROW_W-1:0] tv(input int i); return ROW_W'(i * 37 + 5);  endfunction
  function automatic logic [ROW_W-1:0] nv(input int i); return ROW_W'(i * 53 + 11); endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(count == 0, "count resets to 0");
    for (int i = 0; i < int'(DEPTH); i++) begin
      host_wr_en = 1; host_wr_idx = IDX_W'(i); host_wr_tgt = tv(i); host_wr_nt = nv(i);
      @(negedge clk);
    end
    host_wr_en = 0;
    host_cnt_wr = 1; host_cnt = 5'd20;   // above DEPTH: clamped
    @(negedge clk);
    host_cnt_wr = 0;
    check(count == 16, "count clamps to DEPTH");
    host_cnt_wr = 1; host_cnt = 5'd7;
    @(negedge clk);
    host_cnt_wr = 0;
    check(count == 7, "count written");
    for (int i = 0; i < int'(DEPTH); i++) begin
      host_rd_idx = IDX_W'(i); eng_rd_idx = IDX_W'(DEPTH - 1 - i);
      #0.1;
      check(host_rd_tgt == tv(i) && host_rd_nt == nv(i), $sformatf("host read %0d", i));
      check(eng_rd_tgt == tv(DEPTH - 1 - i) && eng_rd_nt == nv(DEPTH - 1 - i),
            $sformatf("engine read %0d", DEPTH - 1 - i));
    end
    // engine updates: target of entry 3 and non-target of entry 2 together
    @(negedge clk);
    eng_busy = 1;
    eng_wr_tgt_en = 1; eng_wr_tgt_idx = 4'd3; eng_wr_tgt = 12'hABC;
    eng_wr_nt_en  = 1; eng_wr_nt_idx  = 4'd2; eng_wr_nt  = 12'h123;
    @(negedge clk);
    eng_wr_tgt_en = 0; eng_wr_nt_en = 0;
    eng_busy = 0;
    host_rd_idx = 4'd3; eng_rd_idx = 4'd2;
    #0.1;
    check(host_rd_tgt == 12'hABC, "engine target write");
    check(host_rd_nt == nv(3), "entry 3 non-target untouched");
    check(eng_rd_nt == 12'h123, "engine non-target write");
    check(eng_rd_tgt == tv(2), "entry 2 target untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
