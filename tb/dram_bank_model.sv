// dram_bank_model: behavioural model of one DRAM bank for simulation only
// (not synthesizable logic of the design; the real part is a commodity DRAM
// array that the controller leaves unchanged).
//
// What it models:
//  * sub-arrays of ROWS_PER_SA rows, ROW_BITS of data per row;
//  * ACT on a precharged bank opens a row (and refreshes it); ACT while a
//    row is open copies the open row into the newly activated row of the
//    same sub-array (RowClone, ACT-ACT-PRE); PRE closes the bank;
//  * RowHammer: every activation of a row disturbs its two neighbours in
//    the same sub-array. A row whose disturbance count since it was last
//    activated exceeds T_RH loses bit 0 (it is inverted) and the count
//    restarts; each such event is counted in flips.
// Data is read and written by the testbench through the mem array.
// Protocol errors (RowClone across sub-arrays, ACT to the open row) are
// counted in proto_err.
module dram_bank_model
  import dd_pkg::*;
#(
  parameter int unsigned SUBARRAYS   = 128,
  parameter int unsigned ROWS_PER_SA = 512,
  parameter int unsigned ROW_BITS    = 32,
  parameter int unsigned T_RH        = 4800,
  localparam int unsigned NROWS = SUBARRAYS * ROWS_PER_SA,
  localparam int unsigned ROW_W = $clog2(NROWS)
) (
  input logic             clk,
  input dram_cmd_e        cmd,
  input logic [ROW_W-1:0] row
);

  logic [ROW_BITS-1:0] mem     [NROWS];
  int unsigned         disturb [NROWS];
  bit                  open_q = 1'b0;
  logic [ROW_W-1:0]    open_row = '0;
  int unsigned         flips = 0;
  int unsigned         last_flip_row = 0;
  int unsigned         proto_err = 0;
  int unsigned         clones = 0;

  initial foreach (disturb[i]) disturb[i] = 0;

  function automatic int unsigned sa_of(input int unsigned r);
    return r / ROWS_PER_SA;
  endfunction

  task automatic hammer_neighbour(input int unsigned r, input int d);
    int n = int'(r) + d;
    if (n < 0 || n >= int'(NROWS)) return;
    if (sa_of(n) != sa_of(r)) return;
    disturb[n] = disturb[n] + 1;
    if (disturb[n] > T_RH) begin
      mem[n][0] = ~mem[n][0];
      disturb[n] = 0;
      flips++;
      last_flip_row = n;
    end
  endtask

  always @(posedge clk) begin
    case (cmd)
      CMD_ACT: begin
        if (open_q) begin
          if (sa_of(row) != sa_of(open_row) || row == open_row) proto_err++;
          else begin
            mem[row] = mem[open_row];
            clones++;
          end
        end
        disturb[row] = 0;
        hammer_neighbour(row, -1);
        hammer_neighbour(row, 1);
        open_q   = 1'b1;
        open_row = row;
      end
      CMD_PRE: open_q = 1'b0;
      CMD_RD, CMD_WR: if (!open_q) proto_err++;
      default: ;
    endcase
  end

endmodule
