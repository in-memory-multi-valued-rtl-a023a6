// mvcam_array -- ROWS x COLS multi-valued CAM array with its column decoders.
//
// The Key and Mask registers feed one search_decoder per column; the decoded
// search lines of a column are shared by all rows, so a compare checks every
// row against the masked key in the same cycle and leaves the result in each
// row's Tag bit. A write reuses the same Key/Mask pair: the Key holds the new
// data and the Mask selects the columns to overwrite, and every selected row
// (Tag set, or the blocked-mode write-enable flip-flop set) is written in
// parallel in one cycle.
//
// Interface:
//   op_i, blocked_i   operation for this cycle (tap_pkg::ap_op_e) and approach
//   key_i, mask_i     Key register (one nit per column) and Mask register
//   host_*            row-addressed load and read port, not part of the
//                     paper's description (it gives no I/O path); the load
//                     writes a complete row in one cycle, the read is
//                     combinational
//   tag_o             Tag bits of all rows
//   nset_o, nreset_o  number of resistive elements set / reset in this cycle
// Timing: compare and write both complete at the rising clock edge of the
// cycle in which op_i is presented, i.e. one clock cycle per compare and one
// per write, the cycle accounting used for the paper's delay figures.
module mvcam_array
  import tap_pkg::*;
#(
  parameter int unsigned RADIX = 3,
  parameter int unsigned COLS  = 41,
  parameter int unsigned ROWS  = 512,
  parameter int unsigned NW    = (RADIX > 2) ? $clog2(RADIX) : 1,
  parameter int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned CW    = $clog2(COLS * RADIX + 1),
  parameter int unsigned AW    = $clog2(ROWS * COLS * RADIX + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  ap_op_e                     op_i,
  input  logic                       blocked_i,
  input  logic [COLS-1:0][NW-1:0]    key_i,
  input  logic [COLS-1:0]            mask_i,
  input  logic                       host_we_i,
  input  logic [RW-1:0]              host_row_i,
  input  logic [COLS-1:0][NW-1:0]    host_wdata_i,
  output logic [COLS-1:0][NW-1:0]    host_rdata_o,
  output logic [COLS-1:0]            host_rcare_o,
  output logic [ROWS-1:0]            tag_o,
  output logic [ROWS-1:0]            match_o,
  output logic [AW-1:0]              nset_o,
  output logic [AW-1:0]              nreset_o
);

  logic [COLS-1:0][RADIX-1:0]     s;
  logic [ROWS-1:0][COLS-1:0][NW-1:0] rdata;
  logic [ROWS-1:0][COLS-1:0]      rcare;
  logic [ROWS-1:0][CW-1:0]        row_nset, row_nreset;

  for (genvar c = 0; c < COLS; c++) begin : g_dec
    search_decoder #(.RADIX(RADIX), .NW(NW)) u_dec (
      .key_i  (key_i[c]),
      .mask_i (mask_i[c] && (op_i == OP_COMPARE)),
      .s_o    (s[c])
    );
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    mvcam_row #(.RADIX(RADIX), .COLS(COLS), .NW(NW), .CW(CW)) u_row (
      .clk          (clk),
      .rst_n        (rst_n),
      .op_i         (op_i),
      .blocked_i    (blocked_i),
      .s_i          (s),
      .wmask_i      (mask_i),
      .wdata_i      (key_i),
      .host_we_i    (host_we_i && (host_row_i == RW'(r))),
      .host_wdata_i (host_wdata_i),
      .match_o      (match_o[r]),
      .tag_o        (tag_o[r]),
      .we_o         (),
      .rdata_o      (rdata[r]),
      .rcare_o      (rcare[r]),
      .nset_o       (row_nset[r]),
      .nreset_o     (row_nreset[r])
    );
  end

  assign host_rdata_o = rdata[host_row_i];
  assign host_rcare_o = rcare[host_row_i];

  always_comb begin
    nset_o   = '0;
    nreset_o = '0;
    for (int unsigned r = 0; r < ROWS; r++) begin
      nset_o   = nset_o   + AW'(row_nset[r]);
      nreset_o = nreset_o + AW'(row_nreset[r]);
    end
  end

  // The host port and the compute operations never share a cycle.
  a_host_idle : assert property (@(posedge clk) disable iff (!rst_n)
                                 host_we_i |-> (op_i == OP_IDLE));

endmodule
