// tfa_lut_rom -- pass tables of the in-place ternary full adder (TFA).
//
// The adder works on three trits of a row, (A, B, Cin). Each pass compares all
// rows against one input triplet and overwrites the matching rows with the
// outputs: the sum trit goes to B, the carry to Cin, and A is normally left
// alone. Passes are ordered so that no row, once rewritten, matches a later
// pass (the state diagram of the function is traversed from its "no action"
// roots outwards). Input 101 would form a cycle with 120 (101 -> 120 -> 101),
// so that pass also rewrites A to 0 (101 -> 020): the only 3-trit write.
//
// Two tables, both taken from the paper:
//   non-blocked (blocked_i = 0): 21 passes, each a compare followed by a write.
//   blocked     (blocked_i = 1): the same 21 compares, arranged in 9 groups
//     whose members share one write action; the write follows the last
//     compare of each group only (wr_after = 1).
// Within a group the paper allows any order; the listed order is used.
//
// Interface: idx_i selects the pass (0 = first pass); entry_o is the
// tap_pkg::lut_entry_t of that pass. Combinational. Indices past the last pass
// return an all-zero entry.
module tfa_lut_rom
  import tap_pkg::*;
(
  input  logic       blocked_i,
  input  logic [4:0] idx_i,
  output lut_entry_t entry_o
);

  // Build an entry from the input triplet and the written (A,B,C) triplet,
  // given as 3-digit ternary literals like 'h101.
  function automatic lut_entry_t mk(input logic [11:0] in3, input logic [11:0] out3,
                                    input logic wr_after);
    lut_entry_t e;
    e.in_a     = trit_t'(in3[9:8]);
    e.in_b     = trit_t'(in3[5:4]);
    e.in_c     = trit_t'(in3[1:0]);
    e.out_a    = trit_t'(out3[9:8]);
    e.out_b    = trit_t'(out3[5:4]);
    e.out_c    = trit_t'(out3[1:0]);
    e.wr_a     = (in3[9:8] != out3[9:8]);
    e.wr_after = wr_after;
    return e;
  endfunction

  lut_entry_t nb, bl;

  // Non-blocked LUT, in pass order 1..21.
  always_comb begin
    unique case (idx_i)
      5'd0:  nb = mk(12'h001, 12'h010, 1'b1);
      5'd1:  nb = mk(12'h012, 12'h001, 1'b1);
      5'd2:  nb = mk(12'h021, 12'h001, 1'b1);
      5'd3:  nb = mk(12'h212, 12'h221, 1'b1);
      5'd4:  nb = mk(12'h202, 12'h211, 1'b1);
      5'd5:  nb = mk(12'h222, 12'h202, 1'b1);
      5'd6:  nb = mk(12'h220, 12'h211, 1'b1);
      5'd7:  nb = mk(12'h200, 12'h220, 1'b1);
      5'd8:  nb = mk(12'h210, 12'h201, 1'b1);
      5'd9:  nb = mk(12'h011, 12'h020, 1'b1);
      5'd10: nb = mk(12'h022, 12'h011, 1'b1);
      5'd11: nb = mk(12'h101, 12'h020, 1'b1);
      5'd12: nb = mk(12'h120, 12'h101, 1'b1);
      5'd13: nb = mk(12'h110, 12'h120, 1'b1);
      5'd14: nb = mk(12'h100, 12'h110, 1'b1);
      5'd15: nb = mk(12'h102, 12'h101, 1'b1);
      5'd16: nb = mk(12'h111, 12'h101, 1'b1);
      5'd17: nb = mk(12'h112, 12'h111, 1'b1);
      5'd18: nb = mk(12'h121, 12'h111, 1'b1);
      5'd19: nb = mk(12'h122, 12'h121, 1'b1);
      5'd20: nb = mk(12'h002, 12'h020, 1'b1);
      default: nb = '0;
    endcase
  end

  // Blocked LUT, in pass order 1..21; wr_after marks the end of each group.
  always_comb begin
    unique case (idx_i)
      // group 1, write A,B,C = 0,2,0
      5'd0:  bl = mk(12'h101, 12'h020, 1'b1);
      // group 2, write B,C = 0,1
      5'd1:  bl = mk(12'h102, 12'h101, 1'b0);
      5'd2:  bl = mk(12'h111, 12'h101, 1'b0);
      5'd3:  bl = mk(12'h120, 12'h101, 1'b0);
      5'd4:  bl = mk(12'h210, 12'h201, 1'b1);
      // group 3, write B,C = 1,1
      5'd5:  bl = mk(12'h112, 12'h111, 1'b0);
      5'd6:  bl = mk(12'h121, 12'h111, 1'b0);
      5'd7:  bl = mk(12'h202, 12'h211, 1'b0);
      5'd8:  bl = mk(12'h220, 12'h211, 1'b1);
      // group 4, write B,C = 2,0
      5'd9:  bl = mk(12'h002, 12'h020, 1'b0);
      5'd10: bl = mk(12'h011, 12'h020, 1'b0);
      5'd11: bl = mk(12'h110, 12'h120, 1'b0);
      5'd12: bl = mk(12'h200, 12'h220, 1'b1);
      // group 5, write B,C = 2,1
      5'd13: bl = mk(12'h122, 12'h121, 1'b0);
      5'd14: bl = mk(12'h212, 12'h221, 1'b1);
      // group 6, write B,C = 1,0
      5'd15: bl = mk(12'h001, 12'h010, 1'b0);
      5'd16: bl = mk(12'h100, 12'h110, 1'b1);
      // group 7, write B,C = 0,2
      5'd17: bl = mk(12'h222, 12'h202, 1'b1);
      // group 8, write B,C = 0,1
      5'd18: bl = mk(12'h012, 12'h001, 1'b0);
      5'd19: bl = mk(12'h021, 12'h001, 1'b1);
      // group 9, write B,C = 1,1
      5'd20: bl = mk(12'h022, 12'h011, 1'b1);
      default: bl = '0;
    endcase
  end

  assign entry_o = blocked_i ? bl : nb;

endmodule
