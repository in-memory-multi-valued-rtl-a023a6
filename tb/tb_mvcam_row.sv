// tb_mvcam_row -- random test of one CAM row (5 ternary cells).
// A shadow copy of the row predicts the full-match result of random masked
// keys (decoded here by the decoder truth table), the Tag bit, the blocked
// write-enable flip-flop (set by any matching compare since the last write),
// the write of the masked columns in tagged rows only, and the number of
// elements set/reset by each write (one set and one reset per changed cell).
module tb_mvcam_row;
  import tap_pkg::*;
  localparam int COLS = 5;
  logic clk = 0, rst_n = 0;
  ap_op_e op;
  logic blocked;
  logic [COLS-1:0][2:0] s;
  logic [COLS-1:0] wmask;
  logic [COLS-1:0][1:0] wdata, hdata, rdata, key;
  logic [COLS-1:0] rcare, kmask;
  logic host_we, match, tag, we;
  logic [3:0] nset, nreset;
  int checks = 0, failures = 0;
  int shadow[COLS];
  logic exp_tag, exp_we;

  mvcam_row #(.RADIX(3), .COLS(COLS)) dut (
    .clk(clk), .rst_n(rst_n), .op_i(op), .blocked_i(blocked), .s_i(s), .wmask_i(wmask),
    .wdata_i(wdata), .host_we_i(host_we), .host_wdata_i(hdata), .match_o(match),
    .tag_o(tag), .we_o(we), .rdata_o(rdata), .rcare_o(rcare), .nset_o(nset), .nreset_o(nreset));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  always_comb
    for (int c = 0; c < COLS; c++)
      s[c] = !kmask[c] ? 3'b000 : (key[c] == 0) ? 3'b110 : (key[c] == 1) ? 3'b101 : 3'b011;

  task automatic compare_row();
    logic m;
    m = 1;
    for (int c = 0; c < COLS; c++) if (kmask[c] && shadow[c] != int'(key[c])) m = 0;
    op = OP_COMPARE; #1;
    check(match == m, $sformatf("match %0d exp %0d", match, m));
    @(negedge clk);
    exp_tag = m;
    exp_we  = exp_we | m;
    op = OP_IDLE; #1;
    check(tag == exp_tag, "tag");
    check(we == exp_we, "write-enable flip-flop");
  endtask

  task automatic write_row();
    logic sel;
    int ns;
    sel = blocked ? exp_we : exp_tag;
    ns = 0;
    for (int c = 0; c < COLS; c++) if (sel && wmask[c] && shadow[c] != int'(wdata[c])) ns++;
    op = OP_WRITE; #1;
    check(int'(nset) == ns && int'(nreset) == ns, $sformatf("set/reset count %0d/%0d exp %0d", nset, nreset, ns));
    @(negedge clk);
    op = OP_IDLE;
    if (sel) for (int c = 0; c < COLS; c++) if (wmask[c]) shadow[c] = int'(wdata[c]);
    exp_we = 0;
    #1;
    for (int c = 0; c < COLS; c++)
      check(int'(rdata[c]) == shadow[c] && rcare[c], $sformatf("cell %0d holds %0d exp %0d", c, rdata[c], shadow[c]));
    check(we == 0, "write-enable flip-flop cleared by write");
  endtask

  initial begin
    op = OP_IDLE; blocked = 0; host_we = 0; hdata = '0; wmask = '0; wdata = '0; key = '0; kmask = '0;
    exp_tag = 0; exp_we = 0;
    #12 rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < COLS; c++) check(!rcare[c], "reset leaves don't care");
    // don't care cells match anything
    kmask = '1; key = '0; op = OP_COMPARE; #1; check(match, "all don't care matches"); op = OP_IDLE;
    for (int it = 0; it < 400; it++) begin
      // load random row
      host_we = 1;
      for (int c = 0; c < COLS; c++) begin
        shadow[c] = $urandom_range(0, 2);
        hdata[c] = shadow[c][1:0];
      end
      @(negedge clk); host_we = 0;
      blocked = it[0];
      exp_we = 0;
      @(negedge clk);
      // one to three compares with keys that often hit
      for (int k = 0; k < 1 + (blocked ? 2 : 0); k++) begin
        for (int c = 0; c < COLS; c++) begin
          kmask[c] = ($urandom_range(0, 2) == 0);
          key[c] = ($urandom_range(0, 3) == 0) ? 2'($urandom_range(0, 2)) : shadow[c][1:0];
        end
        compare_row();
      end
      for (int c = 0; c < COLS; c++) begin
        wmask[c] = $urandom_range(0, 1);
        wdata[c] = 2'($urandom_range(0, 2));
      end
      write_row();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
