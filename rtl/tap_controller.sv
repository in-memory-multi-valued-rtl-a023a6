// tap_controller -- sequencer of the ternary associative processor, holding the
// Key and Mask registers.
//
// A vector addition B <- A + B is done trit by trit, least significant first,
// in all rows at once. Row layout (COLS = 2*TRITS + 1 columns):
//   columns 0 .. TRITS-1         operand A, trit i in column i
//   columns TRITS .. 2*TRITS-1   operand B, trit i in column TRITS+i;
//                                receives the sum
//   column  2*TRITS              carry trit, must hold 0 at start;
//                                holds the carry out at the end
// For each trit the controller walks through the 21 passes of the ternary
// full adder LUT (tfa_lut_rom). For a compare it loads the pass's input
// triplet into the Key register at columns (A_i, B_i, C) and sets only those
// Mask bits; for a write it loads the output trits and masks B_i and C (and
// A_i for the one 3-trit write).
//   non-blocked (blocked latched 0 at start): every compare is followed by a
//     write, 42 cycles per trit;
//   blocked (1): a write follows only the last compare of each of the 9
//     groups, 30 cycles per trit.
// The paper names the controller and its role but not its insides; the state
// machine below is the simplest one that issues that sequence.
//
// Interface: start_i (one cycle, accepted when idle) begins an addition and
// samples blocked_i. op_o/key_o/mask_o are registered: the operation issued in
// cycle k is executed by the array in cycle k+1. busy_o is high from the cycle
// after start until done. done_o pulses for one cycle once the last write has
// been executed. Latency: TRITS*42 (non-blocked) or TRITS*30 (blocked)
// operation cycles; done_o rises TRITS*cycles_per_trit + 2 clock edges after
// the edge that samples start_i.
module tap_controller
  import tap_pkg::*;
#(
  parameter int unsigned TRITS = 20,
  parameter int unsigned COLS  = 2 * TRITS + 1,
  parameter int unsigned TW    = (TRITS > 1) ? $clog2(TRITS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  logic                    blocked_i,
  output logic                    busy_o,
  output logic                    done_o,
  output logic                    blocked_o,
  output ap_op_e                  op_o,
  output logic [COLS-1:0][1:0]    key_o,
  output logic [COLS-1:0]         mask_o,
  // observation of the sequencing
  output logic [TW-1:0]           trit_o,
  output logic [4:0]              pass_o
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST, S_DONE} state_e;

  state_e     state_q;
  logic       wr_phase_q;     // 0: issue compare, 1: issue write
  logic [4:0] idx_q;
  logic [TW-1:0] trit_q;
  logic       blocked_q;
  lut_entry_t ent;
  logic       done_q;

  ap_op_e              op_q;
  logic [COLS-1:0][1:0] key_q;
  logic [COLS-1:0]     mask_q;

  tfa_lut_rom u_rom (
    .blocked_i (blocked_q),
    .idx_i     (idx_q),
    .entry_o   (ent)
  );

  localparam int unsigned CCOL = 2 * TRITS;
  localparam int unsigned XW   = $clog2(COLS);

  // Columns of the A and B trits of the current position.
  logic [XW-1:0] col_a, col_b;
  assign col_a = XW'(trit_q);
  assign col_b = XW'(trit_q) + XW'(TRITS);

  wire last_pass = (idx_q == 5'(TFA_PASSES - 1));
  wire last_trit = (trit_q == TW'(TRITS - 1));
  // The current pass is finished after this issue.
  wire pass_end  = wr_phase_q || !ent.wr_after;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      wr_phase_q <= 1'b0;
      idx_q      <= '0;
      trit_q     <= '0;
      blocked_q  <= 1'b0;
      op_q <= OP_IDLE;
      key_q      <= '0;
      mask_q     <= '0;
      done_q     <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          op_q <= OP_IDLE;
          if (start_i) begin
            state_q    <= S_RUN;
            blocked_q  <= blocked_i;
            wr_phase_q <= 1'b0;
            idx_q      <= '0;
            trit_q     <= '0;
          end
        end
        S_RUN: begin
          key_q  <= '0;
          mask_q <= '0;
          if (!wr_phase_q) begin
            op_q <= OP_COMPARE;
            key_q[col_a]  <= ent.in_a;
            key_q[col_b]  <= ent.in_b;
            key_q[CCOL] <= ent.in_c;
            mask_q[col_a] <= 1'b1;
            mask_q[col_b] <= 1'b1;
            mask_q[CCOL] <= 1'b1;
          end else begin
            op_q <= OP_WRITE;
            key_q[col_a]  <= ent.out_a;
            key_q[col_b]  <= ent.out_b;
            key_q[CCOL] <= ent.out_c;
            mask_q[col_a] <= ent.wr_a;
            mask_q[col_b] <= 1'b1;
            mask_q[CCOL] <= 1'b1;
          end
          if (pass_end) begin
            wr_phase_q <= 1'b0;
            if (last_pass) begin
              idx_q <= '0;
              if (last_trit) state_q <= S_LAST;
              else           trit_q  <= trit_q + TW'(1);
            end else begin
              idx_q <= idx_q + 5'd1;
            end
          end else begin
            wr_phase_q <= 1'b1;
          end
        end
        S_LAST: begin          // the array executes the last write now
          op_q <= OP_IDLE;
          mask_q  <= '0;
          state_q <= S_DONE;
        end
        S_DONE: begin
          done_q  <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o    = (state_q != S_IDLE);
  assign done_o    = done_q;
  assign blocked_o = blocked_q;
  assign op_o      = op_q;
  assign key_o     = key_q;
  assign mask_o    = mask_q;
  assign trit_o    = trit_q;
  assign pass_o    = idx_q;

  // Every write is preceded by a compare of the same pass or block.
  a_write_after_compare : assert property (@(posedge clk) disable iff (!rst_n)
      (op_q == OP_WRITE) |-> $past(op_q) == OP_COMPARE);

endmodule
