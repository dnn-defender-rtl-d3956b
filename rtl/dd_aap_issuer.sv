// dd_aap_issuer: executes one in-DRAM row copy (RowClone) per request.
//
// RowClone copies a whole row inside a sub-array: the controller activates
// the source row, then activates the destination row while the source data
// still sits in the sense amplifiers, and only then precharges
// (ACT-ACT-PRE, "AAP"). The paper takes T_AAP = 90 ns per copy and builds
// a swap from three copies (T_swap = 3 x T_AAP). How the 90 ns divide into
// ACT->ACT, ACT->PRE and precharge time is not given; the defaults here
// (35 + 35 + 20 cycles at 1 ns) are this design's choice and sum to T_AAP.
//
// Interface: valid/ready request with source and destination bank row;
// command output cmd/cmd_row, one command per cycle at most.
// Timing: a request accepted at edge t issues ACT(src) in the cycle after t,
// ACT(dst) T_ACT2ACT cycles later and PRE T_ACT2PRE cycles after that. The
// next request is accepted so that its ACT(src) comes exactly T_AAP cycles
// after the previous one, giving back-to-back copies at one per T_AAP.
module dd_aap_issuer
  import dd_pkg::*;
#(
  parameter int unsigned ROW_W     = 16,
  parameter int unsigned T_AAP     = T_AAP_DEF,
  parameter int unsigned T_ACT2ACT = T_ACT2ACT_DEF,
  parameter int unsigned T_ACT2PRE = T_ACT2PRE_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [ROW_W-1:0] req_src,
  input  logic [ROW_W-1:0] req_dst,
  output dram_cmd_e        cmd,
  output logic [ROW_W-1:0] cmd_row,
  output logic             busy,
  output logic             copy_done   // pulse when a copy's time slot ends
);

  localparam int unsigned CNT_W = $clog2(T_AAP + 1);

  logic             active;
  logic [CNT_W-1:0] cnt;     // cycles since ACT(src) of the current copy
  logic [ROW_W-1:0] src_q, dst_q;

  wire last = active && (cnt == CNT_W'(T_AAP - 1));
  assign req_ready = !active || last;
  wire accept = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cnt    <= '0;
      src_q  <= '0;
      dst_q  <= '0;
    end else if (accept) begin
      active <= 1'b1;
      cnt    <= '0;
      src_q  <= req_src;
      dst_q  <= req_dst;
    end else if (last) begin
      active <= 1'b0;
      cnt    <= '0;
    end else if (active) begin
      cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    cmd     = CMD_NOP;
    cmd_row = '0;
    if (active) begin
      if (cnt == '0) begin
        cmd     = CMD_ACT;
        cmd_row = src_q;
      end else if (cnt == CNT_W'(T_ACT2ACT)) begin
        cmd     = CMD_ACT;
        cmd_row = dst_q;
      end else if (cnt == CNT_W'(T_ACT2ACT + T_ACT2PRE)) begin
        cmd     = CMD_PRE;
        cmd_row = dst_q;
      end
    end
  end

  assign busy      = active;
  assign copy_done = last;

  initial assert (T_ACT2ACT > 0 && T_ACT2ACT + T_ACT2PRE < T_AAP)
    else $error("dd_aap_issuer: ACT->ACT->PRE must fit inside T_AAP");

endmodule
