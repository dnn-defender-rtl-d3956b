// dnn_defender: per-bank DNN-Defender controller (top level).
//
// DNN-Defender protects the DRAM rows that hold the most attack-sensitive
// bits of a quantized DNN against targeted RowHammer bit flips. Instead of
// counting aggressor activations it moves the victims: at a fixed rhythm
// every protected target row is swapped with another row of its sub-array
// using in-DRAM RowClone copies, which both refreshes it and moves it away
// from the row the attacker is hammering; the non-target victim of the same
// aggressor is refreshed on the way at almost no cost.
//
// Blocks and data flow:
//   dd_round_timer  -> start pulse every T_RH x T_ACT after the last round
//   dd_swap_engine  -> walks dd_target_table, picks one random row per
//                      sub-array chain from dd_lfsr_rng, emits row copies
//   dd_aap_issuer   -> turns each copy into ACT(src), ACT(dst), PRE
//   dd_cmd_arbiter  -> stalls host traffic while a round owns the bus
// The DRAM bank itself is outside this module (dram_cmd/row/col ports).
//
// Interface: table configuration port (write between rounds), host command
// port with host_ready, bank command port, relocation report (reloc_valid:
// rows reloc_a and reloc_b have exchanged their contents), status pulses.
// Timing: a round over n targets of one sub-array takes (3n+1) x T_AAP plus
// a few cycles per entry; with default parameters T_AAP = 90 cycles = 90 ns
// at the assumed 1 GHz controller clock.
module dnn_defender
  import dd_pkg::*;
#(
  parameter int unsigned SUBARRAYS   = SUBARRAYS_DEF,
  parameter int unsigned ROWS_PER_SA = ROWS_PER_SA_DEF,
  parameter int unsigned RESERVED    = RESERVED_DEF,
  parameter int unsigned DEPTH       = TABLE_DEPTH_DEF,
  parameter int unsigned COL_W       = 10,
  parameter int unsigned T_RH        = T_RH_DEF,
  parameter int unsigned T_ACT       = T_ACT_DEF,
  parameter int unsigned T_AAP       = T_AAP_DEF,
  parameter int unsigned T_ACT2ACT   = T_ACT2ACT_DEF,
  parameter int unsigned T_ACT2PRE   = T_ACT2PRE_DEF,
  parameter int unsigned T_RP        = T_RP_DEF,
  parameter logic [15:0] RNG_SEED    = 16'hACE1,
  localparam int unsigned ROW_W = $clog2(SUBARRAYS * ROWS_PER_SA),
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // defense control
  input  logic             dd_enable,
  input  logic             dd_interrupt,
  // target table configuration
  input  logic             tbl_wr_en,
  input  logic [IDX_W-1:0] tbl_wr_idx,
  input  logic [ROW_W-1:0] tbl_wr_tgt,
  input  logic [ROW_W-1:0] tbl_wr_nt,
  input  logic             tbl_cnt_wr,
  input  logic [IDX_W:0]   tbl_cnt,
  input  logic [IDX_W-1:0] tbl_rd_idx,
  output logic [ROW_W-1:0] tbl_rd_tgt,
  output logic [ROW_W-1:0] tbl_rd_nt,
  output logic [IDX_W:0]   tbl_count,
  // host command port
  input  dram_cmd_e        host_cmd,
  input  logic [ROW_W-1:0] host_row,
  input  logic [COL_W-1:0] host_col,
  output logic             host_ready,
  // bank command bus
  output dram_cmd_e        dram_cmd,
  output logic [ROW_W-1:0] dram_row,
  output logic [COL_W-1:0] dram_col,
  // relocation report
  output logic             reloc_valid,
  output logic [ROW_W-1:0] reloc_a,
  output logic [ROW_W-1:0] reloc_b,
  // status and event pulses
  output logic             round_busy,
  output logic             round_start,
  output logic             round_done,
  output logic             round_aborted,
  output logic             round_overrun,
  output logic             chain_start,
  output logic             swap_done,
  output logic             copy_start,
  output swap_step_e       copy_step,
  output logic             round_waiting,
  output logic             rng_retry,
  output logic             host_stall,
  output logic             close_pre
);

  logic [15:0]      rnd;
  logic [IDX_W-1:0] eng_rd_idx, wr_tgt_idx, wr_nt_idx;
  logic [ROW_W-1:0] eng_rd_tgt, eng_rd_nt, wr_tgt, wr_nt;
  logic             wr_tgt_en, wr_nt_en;
  logic             bus_req, bus_gnt;
  logic             copy_valid, copy_ready;
  logic [ROW_W-1:0] copy_src, copy_dst;
  logic             issuer_busy;
  dram_cmd_e        def_cmd;
  logic [ROW_W-1:0] def_row;

  dd_round_timer #(.T_RH(T_RH), .T_ACT(T_ACT)) u_timer (
    .clk, .rst_n,
    .enable     (dd_enable),
    .dd_interrupt,
    .round_done,
    .start      (round_start),
    .overrun    (round_overrun),
    .waiting    (round_waiting)
  );

  dd_lfsr_rng #(.SEED(RNG_SEED)) u_rng (
    .clk, .rst_n, .rnd
  );

  dd_target_table #(.DEPTH(DEPTH), .ROW_W(ROW_W)) u_table (
    .clk, .rst_n,
    .host_wr_en    (tbl_wr_en),
    .host_wr_idx   (tbl_wr_idx),
    .host_wr_tgt   (tbl_wr_tgt),
    .host_wr_nt    (tbl_wr_nt),
    .host_cnt_wr   (tbl_cnt_wr),
    .host_cnt      (tbl_cnt),
    .host_rd_idx   (tbl_rd_idx),
    .host_rd_tgt   (tbl_rd_tgt),
    .host_rd_nt    (tbl_rd_nt),
    .count         (tbl_count),
    .eng_busy      (round_busy),
    .eng_rd_idx,
    .eng_rd_tgt,
    .eng_rd_nt,
    .eng_wr_tgt_en (wr_tgt_en),
    .eng_wr_tgt_idx(wr_tgt_idx),
    .eng_wr_tgt    (wr_tgt),
    .eng_wr_nt_en  (wr_nt_en),
    .eng_wr_nt_idx (wr_nt_idx),
    .eng_wr_nt     (wr_nt)
  );

  dd_swap_engine #(
    .SUBARRAYS(SUBARRAYS), .ROWS_PER_SA(ROWS_PER_SA),
    .RESERVED(RESERVED), .DEPTH(DEPTH)
  ) u_engine (
    .clk, .rst_n,
    .start       (round_start),
    .dd_interrupt,
    .busy        (round_busy),
    .bus_req,
    .bus_gnt,
    .count       (tbl_count),
    .rd_idx      (eng_rd_idx),
    .rd_tgt      (eng_rd_tgt),
    .rd_nt       (eng_rd_nt),
    .wr_tgt_en, .wr_tgt_idx, .wr_tgt,
    .wr_nt_en,  .wr_nt_idx,  .wr_nt,
    .rnd,
    .copy_valid, .copy_ready, .copy_src, .copy_dst, .copy_step,
    .issuer_busy,
    .reloc_valid, .reloc_a, .reloc_b,
    .done        (round_done),
    .aborted     (round_aborted),
    .chain_start,
    .swap_done,
    .rng_retry
  );

  dd_aap_issuer #(
    .ROW_W(ROW_W), .T_AAP(T_AAP), .T_ACT2ACT(T_ACT2ACT), .T_ACT2PRE(T_ACT2PRE)
  ) u_issuer (
    .clk, .rst_n,
    .req_valid (copy_valid),
    .req_ready (copy_ready),
    .req_src   (copy_src),
    .req_dst   (copy_dst),
    .cmd       (def_cmd),
    .cmd_row   (def_row),
    .busy      (issuer_busy),
    .copy_done ()
  );

  dd_cmd_arbiter #(.ROW_W(ROW_W), .COL_W(COL_W), .T_RP(T_RP)) u_arb (
    .clk, .rst_n,
    .host_cmd, .host_row, .host_col, .host_ready,
    .def_req   (bus_req),
    .def_gnt   (bus_gnt),
    .def_cmd,
    .def_row,
    .dram_cmd, .dram_row, .dram_col,
    .host_stall,
    .close_pre
  );

  assign copy_start = copy_valid && copy_ready;

  // The swap engine only issues copies while it owns the bus.
  a_copy_owns_bus: assert property (@(posedge clk) disable iff (!rst_n)
    copy_valid |-> bus_gnt)
    else $error("dnn_defender: copy requested without the command bus");

endmodule
