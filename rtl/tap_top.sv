// tap_top -- ternary associative processor (TAP): in-memory vector addition
// of ternary numbers.
//
// Every row of a quaternary CAM (cells storing 0, 1, 2 or "don't care") holds
// one addition problem: a TRITS-trit operand A, a TRITS-trit operand B and a
// carry trit. The addition is done in place and in all ROWS rows at once by a
// fixed sequence of compare and write operations: for each trit position the
// controller compares every row against each input triplet (A_i, B_i, C) of
// the ternary full adder's look-up table and overwrites the matching rows with
// the (sum, carry) outputs. Runtime therefore depends on the word length only,
// not on the number of rows.
//
// Blocks: tap_controller (sequencer with Key and Mask registers and the LUT
// ROM) drives mvcam_array (column decoders, ROWS x COLS cells, Tag bits and
// blocked-mode write-enable flip-flops).
//
// Usage: load the rows through the host port while idle (A in columns
// 0..TRITS-1, B in columns TRITS..2*TRITS-1, least significant trit first,
// carry column 2*TRITS = 0), pulse start_i with blocked_i choosing the
// approach, wait for done_o, read the sum from the B columns and the carry out
// from column 2*TRITS. A may be altered: the one LUT pass that rewrites A
// (input 1,0,1) sets A_i to 0 in the rows it matches. Host writes are ignored
// while busy_o is high.
//
// Latency from the start edge to done_o: TRITS*42 + 2 cycles non-blocked,
// TRITS*30 + 2 cycles blocked (one cycle per compare and per write).
// nset_o/nreset_o give the number of resistive elements set and reset in the
// current cycle, for write-energy accounting; this counter output is this
// design's addition.
module tap_top
  import tap_pkg::*;
#(
  parameter int unsigned TRITS = 20,
  parameter int unsigned ROWS  = 512,
  parameter int unsigned COLS  = 2 * TRITS + 1,
  parameter int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned AW    = $clog2(ROWS * COLS * 3 + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  logic                    blocked_i,
  output logic                    busy_o,
  output logic                    done_o,
  input  logic                    host_we_i,
  input  logic [RW-1:0]           host_row_i,
  input  logic [COLS-1:0][1:0]    host_wdata_i,
  output logic [COLS-1:0][1:0]    host_rdata_o,
  output logic [COLS-1:0]         host_rcare_o,
  output logic [ROWS-1:0]         tag_o,
  output logic [AW-1:0]           nset_o,
  output logic [AW-1:0]           nreset_o
);

  ap_op_e               op;
  logic [COLS-1:0][1:0] key;
  logic [COLS-1:0]      mask;
  logic                 blocked;

  tap_controller #(.TRITS(TRITS), .COLS(COLS)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start_i   (start_i),
    .blocked_i (blocked_i),
    .busy_o    (busy_o),
    .done_o    (done_o),
    .blocked_o (blocked),
    .op_o      (op),
    .key_o     (key),
    .mask_o    (mask),
    .trit_o    (),
    .pass_o    ()
  );

  mvcam_array #(.RADIX(3), .COLS(COLS), .ROWS(ROWS), .NW(2), .RW(RW), .AW(AW)) u_array (
    .clk          (clk),
    .rst_n        (rst_n),
    .op_i         (op),
    .blocked_i    (blocked),
    .key_i        (key),
    .mask_i       (mask),
    .host_we_i    (host_we_i && !busy_o),
    .host_row_i   (host_row_i),
    .host_wdata_i (host_wdata_i),
    .host_rdata_o (host_rdata_o),
    .host_rcare_o (host_rcare_o),
    .tag_o        (tag_o),
    .match_o      (),
    .nset_o       (nset_o),
    .nreset_o     (nreset_o)
  );

endmodule
