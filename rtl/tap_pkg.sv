// tap_pkg -- types and constants shared by the multi-valued associative
// processor (MvAP) and its ternary instance (TAP).
//
// A nit (n-ary digit) is carried on the digital side as an unsigned binary
// number 0..RADIX-1. Inside the CAM a nit is held "one-hot" in RADIX resistive
// elements (one low-resistance element marks the value, none marks "don't
// care"); that encoding lives in mvcam_cell only.
//
// The look-up-table entry type describes one pass of the in-place ternary full
// adder: the (A,B,Cin) trits that are compared, the trits written back, whether
// A is written as well (the one pass that needs a 3-trit write to break a cycle
// of the state diagram) and whether a write cycle follows this compare. The
// table contents follow the paper's pass tables for the non-blocked and the
// blocked approach; the packing into a struct is this design's choice.
package tap_pkg;

  // Ternary digit as used by the adder datapath and the LUT.
  typedef logic [1:0] trit_t;

  // Array operation issued by the controller and executed by the array one
  // cycle later with the registered Key and Mask.
  typedef enum logic [1:0] {
    OP_IDLE    = 2'd0,
    OP_COMPARE = 2'd1,   // precharge + evaluate, latch Tag
    OP_WRITE   = 2'd2    // overwrite masked columns of selected rows
  } ap_op_e;

  // One pass of an in-place LUT.
  typedef struct packed {
    trit_t in_a;        // compared A
    trit_t in_b;        // compared B
    trit_t in_c;        // compared carry
    trit_t out_a;       // written A (only used when wr_a is set)
    trit_t out_b;       // written B (the sum trit)
    trit_t out_c;       // written carry
    logic  wr_a;        // 3-trit write: A column is written too
    logic  wr_after;    // a write cycle follows this compare
  } lut_entry_t;

  // Number of passes of the ternary full adder LUT: 27 input triplets minus the
  // 6 "no action" states. Both approaches visit all of them.
  localparam int unsigned TFA_PASSES    = 21;
  // Write groups (blocks) of the blocked approach.
  localparam int unsigned TFA_BL_GROUPS = 9;

  // Cycles per trit: one cycle per compare plus one per write.
  localparam int unsigned TFA_CYC_NB = TFA_PASSES + TFA_PASSES;     // 42
  localparam int unsigned TFA_CYC_BL = TFA_PASSES + TFA_BL_GROUPS;  // 30

endpackage
