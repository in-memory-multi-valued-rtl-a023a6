// mvcam_cell -- one "nTnR" multi-valued CAM cell (3T3R for the ternary case).
//
// The cell holds one nit in RADIX resistive elements M_0..M_{n-1}, each in
// series with a transistor whose gate is search line S_j. To store value i,
// M_i is in the low-resistance state (LRS) and all others are high (HRS); all
// elements in HRS store "don't care". In this RTL the element states are kept
// as the bit vector lrs_q (1 = LRS); the analog resistances themselves are
// abstracted away.
//
// Compare: a search for value i drives S_i low and all other lines high, so the
// match line is discharged through a low-resistance path exactly when some
// element j with S_j high is in LRS. Hence
//     match_o = ~|(s_i & lrs_q)
// which gives a match for the stored value, for a stored "don't care" and for
// a masked column (all lines low), and a mismatch otherwise.
//
// Write: when we_i is high at a clock edge the cell takes value wdata_i. The
// element of the old value is reset (LRS->HRS) and the element of the new
// value is set (HRS->LRS); an element that keeps its state is not touched, so
// rewriting the same value costs nothing and writing from "don't care" costs a
// single set. set_o/reset_o show, during the write cycle, which elements are
// programmed; they are used to count programming events (write energy).
//
// Reset (rst_n low) puts every element in HRS, i.e. "don't care"; the paper
// does not state a power-up state, so this is this design's choice.
// Timing: compare is combinational from s_i; the write takes effect at the
// rising clock edge.
module mvcam_cell #(
  parameter int unsigned RADIX = 3,
  parameter int unsigned NW    = (RADIX > 2) ? $clog2(RADIX) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // compare
  input  logic [RADIX-1:0] s_i,       // search lines, 1 = high
  output logic             match_o,   // 1 = this cell keeps the match line high
  // write
  input  logic             we_i,
  input  logic [NW-1:0]    wdata_i,
  output logic [RADIX-1:0] set_o,     // elements set by this write
  output logic [RADIX-1:0] reset_o,   // elements reset by this write
  // stored value
  output logic [RADIX-1:0] lrs_o,     // element states, 1 = LRS
  output logic [NW-1:0]    value_o,   // stored nit (0 when "don't care")
  output logic             care_o     // 0 = "don't care" stored
);

  logic [RADIX-1:0] lrs_q;
  logic [RADIX-1:0] lrs_new;

  always_comb begin
    lrs_new = '0;
    for (int unsigned j = 0; j < RADIX; j++)
      lrs_new[j] = (wdata_i == NW'(j));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lrs_q <= '0;
    else if (we_i) lrs_q <= lrs_new;
  end

  assign match_o = ~|(s_i & lrs_q);
  assign set_o   = we_i ? (lrs_new & ~lrs_q) : '0;
  assign reset_o = we_i ? (lrs_q & ~lrs_new) : '0;
  assign lrs_o   = lrs_q;
  assign care_o  = |lrs_q;

  always_comb begin
    value_o = '0;
    for (int unsigned j = 0; j < RADIX; j++)
      if (lrs_q[j]) value_o = NW'(j);
  end

  // The cell never holds more than one low-resistance element.
  a_onehot0 : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lrs_q));

endmodule
