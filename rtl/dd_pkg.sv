// dd_pkg: types and default constants shared by the DNN-Defender bank
// controller.
//
// The controller drives one DRAM bank command bus with the four commands a
// memory controller uses for ordinary traffic and for RowClone: ACT, PRE, RD
// and WR (NOP when idle). A RowClone copy is ACT(source), ACT(destination),
// PRE with no precharge between the two activations; its whole duration is
// T_AAP = 90 ns, and one swap costs three of them (T_swap = 3 x T_AAP).
//
// Geometry and timing defaults follow the paper where it gives a number
// (T_RH = 4800 for LPDDR4, T_AAP = 90 ns). The rest are this design's own
// choices for a DDR4-like bank: a 1 GHz controller clock (1 cycle = 1 ns),
// 128 sub-arrays of 512 rows (65536 rows per bank), one reserved row at the
// top of each sub-array, T_ACT = 45 ns (tRC), and a 2048-entry target table.
package dd_pkg;

  // Bank command bus encoding.
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } dram_cmd_e;

  // The four steps of one DNN-Defender swap.
  typedef enum logic [1:0] {
    STEP_RANDOM_TO_RES = 2'd0,  // step 1: random row  -> reserved row
    STEP_TARGET_TO_FREE = 2'd1, // step 2: target row  -> random / freed row
    STEP_RES_TO_TARGET = 2'd2,  // step 3: reserved    -> old target location
    STEP_NONTGT_TO_RES = 2'd3   // step 4: non-target  -> reserved row
  } swap_step_e;

  // Default geometry (design choice, see header).
  localparam int unsigned SUBARRAYS_DEF   = 128;
  localparam int unsigned ROWS_PER_SA_DEF = 512;
  localparam int unsigned RESERVED_DEF    = 1;
  localparam int unsigned TABLE_DEPTH_DEF = 2048;

  // Default timing in controller cycles at 1 ns per cycle.
  localparam int unsigned T_RH_DEF       = 4800; // paper: LPDDR4 threshold
  localparam int unsigned T_ACT_DEF      = 45;   // assumed tRC
  localparam int unsigned T_AAP_DEF      = 90;   // paper: T_AAP = 90 ns
  localparam int unsigned T_ACT2ACT_DEF  = 35;   // assumed: ACT src -> ACT dst
  localparam int unsigned T_ACT2PRE_DEF  = 35;   // assumed: ACT dst -> PRE
  localparam int unsigned T_RP_DEF       = 20;   // assumed precharge time

endpackage
