// search_decoder -- key/mask to search-line decoder of one CAM column.
//
// Each column of the multi-valued CAM array is driven by RADIX search lines
// S[RADIX-1:0]. To look for nit value j, line S_j is pulled low and every
// other line is driven high; a masked column drives all lines low so that no
// cell of that column can discharge the match line. The decoder is therefore
// "inverting": the low line marks the key.
//
// For RADIX = 3 the decoder is built as the paper's ternary gate network:
//   S2 = Mask & PTI(Key)
//   S1 = Mask & (NTI(Key) | ~PTI(Key))
//   S0 = Mask & ~NTI(Key)
// with the positive and negative ternary inverters PTI/NTI. Their outputs are
// only ever 0 or 2, so they are represented here by one bit (1 = logic 2 =
// V_DD). For any other radix the generic truth table is used:
// S_j = Mask & (Key != j).
//
// Interface: key_i is the nit (binary coded 0..RADIX-1), mask_i is the binary
// mask bit (1 = the paper's mask value n-1, column active), s_o[j] = 1 means
// search line j at V_DD. Purely combinational.
module search_decoder #(
  parameter int unsigned RADIX = 3,
  parameter int unsigned NW    = (RADIX > 2) ? $clog2(RADIX) : 1
) (
  input  logic [NW-1:0]    key_i,
  input  logic             mask_i,
  output logic [RADIX-1:0] s_o
);

  // Positive ternary inverter: 2 for inputs 0 and 1, 0 for input 2.
  function automatic logic pti(input logic [NW-1:0] x);
    return (x != NW'(2));
  endfunction

  // Negative ternary inverter: 2 for input 0, 0 for inputs 1 and 2.
  function automatic logic nti(input logic [NW-1:0] x);
    return (x == '0);
  endfunction

  if (RADIX == 3) begin : g_ternary
    logic pti_k, nti_k;
    always_comb begin
      pti_k  = pti(key_i);
      nti_k  = nti(key_i);
      s_o[2] = mask_i & pti_k;
      s_o[1] = mask_i & (nti_k | ~pti_k);
      s_o[0] = mask_i & ~nti_k;
    end
  end else begin : g_generic
    always_comb begin
      for (int unsigned j = 0; j < RADIX; j++)
        s_o[j] = mask_i & (key_i != NW'(j));
    end
  end

endmodule
