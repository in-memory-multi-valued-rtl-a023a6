// mvcam_row -- one row of the multi-valued CAM array with its match line,
// Tag latch and blocked-mode write-enable flip-flop.
//
// All COLS cells of the row hang on one match line. After precharge, any cell
// whose search lines meet a low-resistance element discharges it; only a full
// match leaves it high. The sense amplifier and precharge circuit are analog,
// so here the full-match result is the AND of the cell match outputs.
//
// Operation codes (tap_pkg::ap_op_e), executed at the rising clock edge:
//   OP_COMPARE  tag_q <= full match. In addition the write-enable flip-flop
//               we_q is set when the row matches (it is only cleared by a
//               write), which is the paper's per-row flip-flop for the
//               blocked approach: it collects the matches of every compare of
//               a block.
//   OP_WRITE    the masked columns (wmask_i) are overwritten with wdata_i in
//               this row if it is selected: by tag_q in non-blocked mode, by
//               we_q in blocked mode. we_q is cleared.
// The paper clocks the flip-flop by the Tag bit itself; here it is an
// ordinary synchronous flip-flop updated with the Tag, which has the same
// effect on the cycle boundaries of this design.
//
// A host port (host_we_i/host_wdata_i) writes the whole row at once; it is
// used to load operands and is this design's addition, as the paper gives no
// load or read path. rdata_o/rcare_o show the stored nits.
// nset_o/nreset_o count the resistive elements programmed in the current
// cycle (for write-energy accounting).
module mvcam_row
  import tap_pkg::*;
#(
  parameter int unsigned RADIX = 3,
  parameter int unsigned COLS  = 41,
  parameter int unsigned NW    = (RADIX > 2) ? $clog2(RADIX) : 1,
  parameter int unsigned CW    = $clog2(COLS * RADIX + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  ap_op_e                        op_i,
  input  logic                          blocked_i,
  input  logic [COLS-1:0][RADIX-1:0]    s_i,
  input  logic [COLS-1:0]               wmask_i,
  input  logic [COLS-1:0][NW-1:0]       wdata_i,
  input  logic                          host_we_i,
  input  logic [COLS-1:0][NW-1:0]       host_wdata_i,
  output logic                          match_o,
  output logic                          tag_o,
  output logic                          we_o,
  output logic [COLS-1:0][NW-1:0]       rdata_o,
  output logic [COLS-1:0]               rcare_o,
  output logic [CW-1:0]                 nset_o,
  output logic [CW-1:0]                 nreset_o
);

  logic [COLS-1:0]            cell_match;
  logic [COLS-1:0]            cell_we;
  logic [COLS-1:0][NW-1:0]    cell_wdata;
  logic [COLS-1:0][RADIX-1:0] cell_set, cell_reset;
  logic                       tag_q, we_q, row_we;

  assign match_o = &cell_match;
  assign row_we  = (op_i == OP_WRITE) && (blocked_i ? we_q : tag_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_q <= 1'b0;
      we_q  <= 1'b0;
    end else begin
      unique case (op_i)
        OP_COMPARE: begin
          tag_q <= match_o;
          we_q  <= we_q | match_o;
        end
        OP_WRITE: we_q <= 1'b0;
        default: ;
      endcase
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_cell
    assign cell_we[c]    = host_we_i | (row_we & wmask_i[c]);
    assign cell_wdata[c] = host_we_i ? host_wdata_i[c] : wdata_i[c];
    mvcam_cell #(.RADIX(RADIX), .NW(NW)) u_cell (
      .clk     (clk),
      .rst_n   (rst_n),
      .s_i     (s_i[c]),
      .match_o (cell_match[c]),
      .we_i    (cell_we[c]),
      .wdata_i (cell_wdata[c]),
      .set_o   (cell_set[c]),
      .reset_o (cell_reset[c]),
      .lrs_o   (),
      .value_o (rdata_o[c]),
      .care_o  (rcare_o[c])
    );
  end

  always_comb begin
    nset_o   = '0;
    nreset_o = '0;
    for (int unsigned c = 0; c < COLS; c++)
      for (int unsigned j = 0; j < RADIX; j++) begin
        nset_o   = nset_o   + CW'(cell_set[c][j]);
        nreset_o = nreset_o + CW'(cell_reset[c][j]);
      end
  end

  assign tag_o = tag_q;
  assign we_o  = we_q;

endmodule
