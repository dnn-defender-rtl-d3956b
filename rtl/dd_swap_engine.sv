// dd_swap_engine: sequencer of DNN-Defender's victim-focused row swaps.
//
// One protection round walks the target table. Entries of one sub-array
// form a chain that is handled with a single random row, following the
// four-step swap and the overlapped timeline of the paper:
//
//   swap 1 of a chain (target T1, non-target N1, random row R, reserved X):
//     step 1  R  -> X        copy the random row to the reserved row
//     step 2  T1 -> R        the target moves to the random row's place
//     step 3  X  -> T1       the random row's data fills the old target row
//     step 4  N1 -> X        the non-target row is refreshed into X
//   swap k > 1 (target Tk, non-target Nk):
//     step 1 is step 4 of swap k-1: X already holds N(k-1), whose row is
//     now free and serves as swap k's random row
//     step 2  Tk -> N(k-1)   step 3  X -> Tk   step 4  Nk -> X
//
// A chain of n targets therefore costs 3n+1 RowClone copies, i.e. one
// T_swap = 3 x T_AAP per target plus one T_AAP. After step 3 of each swap
// the two rows involved have exchanged contents; the engine writes the new
// target address (and, for k > 1, the new address of N(k-1)) back into the
// table and reports the exchanged pair on the reloc_* outputs so the system
// can follow the data. The last non-target row of a chain stays in place,
// with a refreshed copy in the reserved row.
//
// Where the paper is silent, this design chooses: the random row is drawn
// from the LFSR by rejection, retried while it falls in the reserved region
// or equals any target or non-target row of the chain; the reserved row is
// the top row of the sub-array; a single-target chain still performs step 4
// (text and Fig. 5/6) although Algorithm 1 stops after step 3 when
// Target_rows == 1; DD_Interrupt is honoured only at a swap boundary, after
// step 4, so no data is left only in the reserved row.
//
// Interface: start pulse begins a round; bus_req/bus_gnt obtain the bank
// command bus from the arbiter; copy_* is a valid/ready stream of copies to
// the RowClone issuer; done pulses when the last copy has finished.
// Timing: a few cycles per table entry for the scan, then one copy per
// T_AAP as set by the issuer.
module dd_swap_engine
  import dd_pkg::*;
#(
  parameter int unsigned SUBARRAYS   = SUBARRAYS_DEF,
  parameter int unsigned ROWS_PER_SA = ROWS_PER_SA_DEF,
  parameter int unsigned RESERVED    = RESERVED_DEF,
  parameter int unsigned DEPTH       = TABLE_DEPTH_DEF,
  localparam int unsigned LROW_W = $clog2(ROWS_PER_SA),
  localparam int unsigned SA_W   = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned ROW_W  = $clog2(SUBARRAYS * ROWS_PER_SA),
  localparam int unsigned IDX_W  = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             dd_interrupt,
  output logic             busy,
  output logic             bus_req,
  input  logic             bus_gnt,
  // target table
  input  logic [IDX_W:0]   count,
  output logic [IDX_W-1:0] rd_idx,
  input  logic [ROW_W-1:0] rd_tgt,
  input  logic [ROW_W-1:0] rd_nt,
  output logic             wr_tgt_en,
  output logic [IDX_W-1:0] wr_tgt_idx,
  output logic [ROW_W-1:0] wr_tgt,
  output logic             wr_nt_en,
  output logic [IDX_W-1:0] wr_nt_idx,
  output logic [ROW_W-1:0] wr_nt,
  // random source
  input  logic [15:0]      rnd,
  // copy stream to the RowClone issuer
  output logic             copy_valid,
  input  logic             copy_ready,
  output logic [ROW_W-1:0] copy_src,
  output logic [ROW_W-1:0] copy_dst,
  output swap_step_e       copy_step,
  input  logic             issuer_busy,
  // data movement report and events
  output logic             reloc_valid,
  output logic [ROW_W-1:0] reloc_a,
  output logic [ROW_W-1:0] reloc_b,
  output logic             done,
  output logic             aborted,
  output logic             chain_start,
  output logic             swap_done,
  output logic             rng_retry
);

  localparam int unsigned DATA_ROWS = ROWS_PER_SA - RESERVED;

  typedef enum logic [3:0] {
    S_IDLE, S_REQ, S_GROUP, S_DRAW, S_SCAN, S_LOAD, S_COPY, S_DRAIN
  } state_e;

  state_e           state;
  logic [IDX_W:0]   k, g_start, g_end, scan_idx;
  logic [SA_W-1:0]  cur_sa;
  logic [ROW_W-1:0] cand, cur_tgt, cur_nt, prev_nt;
  swap_step_e       step;
  logic             abort_q;

  function automatic logic [SA_W-1:0] sa_of(input logic [ROW_W-1:0] r);
    return SA_W'(r >> LROW_W);
  endfunction

  function automatic logic [ROW_W-1:0] mk_row(input logic [SA_W-1:0] sa,
                                              input logic [LROW_W-1:0] lr);
    return ROW_W'((ROW_W'(sa) << LROW_W) | ROW_W'(lr));
  endfunction

  wire [LROW_W-1:0] rnd_l     = rnd[LROW_W-1:0];
  wire [ROW_W-1:0]  res_row   = mk_row(cur_sa, LROW_W'(ROWS_PER_SA - 1));
  wire              first     = (k == g_start);
  wire [ROW_W-1:0]  free_loc  = first ? cand : prev_nt;
  wire              in_group  = (scan_idx < count) && (sa_of(rd_tgt) == cur_sa);
  wire              collide   = (cand == rd_tgt) || (cand == rd_nt);
  wire              accept    = copy_valid && copy_ready;

  always_comb begin
    rd_idx = IDX_W'(k);
    if (state == S_SCAN) rd_idx = IDX_W'(scan_idx);
  end

  always_comb begin
    copy_src = '0;
    copy_dst = '0;
    unique case (step)
      STEP_RANDOM_TO_RES:  begin copy_src = cand;    copy_dst = res_row;  end
      STEP_TARGET_TO_FREE: begin copy_src = cur_tgt; copy_dst = free_loc; end
      STEP_RES_TO_TARGET:  begin copy_src = res_row; copy_dst = cur_tgt;  end
      STEP_NONTGT_TO_RES:  begin copy_src = cur_nt;  copy_dst = res_row;  end
      default: ;
    endcase
  end

  assign copy_valid = (state == S_COPY);
  assign copy_step  = step;
  assign busy       = (state != S_IDLE);
  assign bus_req    = busy;

  // Table updates and relocation report at the acceptance of step 3.
  wire step3_acc = accept && (step == STEP_RES_TO_TARGET);
  assign wr_tgt_en   = step3_acc;
  assign wr_tgt_idx  = IDX_W'(k);
  assign wr_tgt      = free_loc;
  assign wr_nt_en    = step3_acc && !first;
  assign wr_nt_idx   = IDX_W'(k - 1'b1);
  assign wr_nt       = cur_tgt;
  assign reloc_valid = step3_acc;
  assign reloc_a     = cur_tgt;
  assign reloc_b     = free_loc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      k           <= '0;
      g_start     <= '0;
      g_end       <= '0;
      scan_idx    <= '0;
      cur_sa      <= '0;
      cand        <= '0;
      cur_tgt     <= '0;
      cur_nt      <= '0;
      prev_nt     <= '0;
      step        <= STEP_RANDOM_TO_RES;
      abort_q     <= 1'b0;
      done        <= 1'b0;
      aborted     <= 1'b0;
      chain_start <= 1'b0;
      swap_done   <= 1'b0;
      rng_retry   <= 1'b0;
    end else begin
      done        <= 1'b0;
      aborted     <= 1'b0;
      chain_start <= 1'b0;
      swap_done   <= 1'b0;
      rng_retry   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k       <= '0;
          g_start <= '0;
          abort_q <= 1'b0;
          state   <= S_REQ;
        end
        S_REQ: if (bus_gnt) state <= (count == '0) ? S_DRAIN : S_GROUP;
        S_GROUP: begin
          cur_sa      <= sa_of(rd_tgt);
          chain_start <= 1'b1;
          state       <= S_DRAW;
        end
        S_DRAW: begin
          if (32'(rnd_l) >= DATA_ROWS) begin
            rng_retry <= 1'b1;
          end else begin
            cand     <= mk_row(cur_sa, rnd_l);
            scan_idx <= g_start;
            state    <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (in_group) begin
            if (collide) begin
              rng_retry <= 1'b1;
              state     <= S_DRAW;
            end else begin
              scan_idx <= scan_idx + 1'b1;
            end
          end else begin
            g_end <= scan_idx;
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          cur_tgt <= rd_tgt;
          cur_nt  <= rd_nt;
          step    <= first ? STEP_RANDOM_TO_RES : STEP_TARGET_TO_FREE;
          state   <= S_COPY;
        end
        S_COPY: if (accept) begin
          unique case (step)
            STEP_RANDOM_TO_RES:  step <= STEP_TARGET_TO_FREE;
            STEP_TARGET_TO_FREE: step <= STEP_RES_TO_TARGET;
            STEP_RES_TO_TARGET:  step <= STEP_NONTGT_TO_RES;
            STEP_NONTGT_TO_RES: begin
              prev_nt   <= cur_nt;
              k         <= k + 1'b1;
              swap_done <= 1'b1;
              if (dd_interrupt) begin
                abort_q <= 1'b1;
                state   <= S_DRAIN;
              end else if (k + 1'b1 == g_end) begin
                if (k + 1'b1 >= count) begin
                  state <= S_DRAIN;
                end else begin
                  g_start <= k + 1'b1;
                  state   <= S_GROUP;
                end
              end else begin
                state <= S_LOAD;
              end
            end
            default: ;
          endcase
        end
        S_DRAIN: if (!issuer_busy) begin
          done    <= 1'b1;
          aborted <= abort_q;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // RowClone only copies inside one sub-array.
  a_same_sa: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (sa_of(copy_src) == sa_of(copy_dst)))
    else $error("dd_swap_engine: copy crosses sub-arrays");
  a_nt_same_sa: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOAD) |-> (sa_of(rd_nt) == cur_sa))
    else $error("dd_swap_engine: non-target row not in the target's sub-array");

  initial assert (LROW_W <= 16 && RESERVED >= 1 && RESERVED < ROWS_PER_SA &&
                  (1 << LROW_W) == ROWS_PER_SA)
    else $error("dd_swap_engine: ROWS_PER_SA must be a power of two <= 65536");

endmodule
