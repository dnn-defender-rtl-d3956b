// dd_target_table: register file of the rows DNN-Defender protects in one
// bank.
//
// Each entry is a pair of physical bank rows: the target row, which holds
// high-priority DNN weight bits found by the offline priority-protection
// search, and the non-target row, the other victim of the same aggressor
// (Fig. 5 of the paper draws target row, aggressor row, non-target row as
// neighbours). Software loads the entries grouped by sub-array (all entries
// of one sub-array consecutive) and writes the entry count; that ordering is
// this design's own convention and lets the swap engine walk the table once
// per round. During a round the swap engine rewrites the addresses as the
// rows move, so the table always tells where the protected data lives.
//
// Interface: a host write port (whole entry) and count register, usable
// while the engine is idle; a host read port; an engine read port; two
// engine write ports, one for a target field and one for a non-target
// field, which may hit different entries in the same cycle.
// Timing: reads are combinational, writes take effect at the next edge.
module dd_target_table #(
  parameter int unsigned DEPTH = dd_pkg::TABLE_DEPTH_DEF,
  parameter int unsigned ROW_W = 16,
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host configuration port
  input  logic             host_wr_en,
  input  logic [IDX_W-1:0] host_wr_idx,
  input  logic [ROW_W-1:0] host_wr_tgt,
  input  logic [ROW_W-1:0] host_wr_nt,
  input  logic             host_cnt_wr,
  input  logic [IDX_W:0]   host_cnt,
  input  logic [IDX_W-1:0] host_rd_idx,
  output logic [ROW_W-1:0] host_rd_tgt,
  output logic [ROW_W-1:0] host_rd_nt,
  output logic [IDX_W:0]   count,
  // engine ports
  input  logic             eng_busy,
  input  logic [IDX_W-1:0] eng_rd_idx,
  output logic [ROW_W-1:0] eng_rd_tgt,
  output logic [ROW_W-1:0] eng_rd_nt,
  input  logic             eng_wr_tgt_en,
  input  logic [IDX_W-1:0] eng_wr_tgt_idx,
  input  logic [ROW_W-1:0] eng_wr_tgt,
  input  logic             eng_wr_nt_en,
  input  logic [IDX_W-1:0] eng_wr_nt_idx,
  input  logic [ROW_W-1:0] eng_wr_nt
);

  logic [ROW_W-1:0] tgt_mem [DEPTH];
  logic [ROW_W-1:0] nt_mem  [DEPTH];

  always_ff @(posedge clk) begin
    if (host_wr_en && !eng_busy) begin
      tgt_mem[host_wr_idx] <= host_wr_tgt;
      nt_mem[host_wr_idx]  <= host_wr_nt;
    end
    if (eng_wr_tgt_en) tgt_mem[eng_wr_tgt_idx] <= eng_wr_tgt;
    if (eng_wr_nt_en)  nt_mem[eng_wr_nt_idx]   <= eng_wr_nt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         count <= '0;
    else if (host_cnt_wr && !eng_busy)  count <= (32'(host_cnt) > DEPTH) ? (IDX_W+1)'(DEPTH) : host_cnt;
  end

  assign host_rd_tgt = tgt_mem[host_rd_idx];
  assign host_rd_nt  = nt_mem[host_rd_idx];
  assign eng_rd_tgt  = tgt_mem[eng_rd_idx];
  assign eng_rd_nt   = nt_mem[eng_rd_idx];

  // The host may only reconfigure the table between rounds.
  a_no_host_wr_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(eng_busy && (host_wr_en || host_cnt_wr)))
    else $error("dd_target_table: host write during a protection round ignored");

endmodule
