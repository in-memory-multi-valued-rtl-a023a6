// tb_mvcam_array -- random test of a 16-row x 5-column ternary CAM array.
// Rows are loaded through the host port; random masked keys are compared and
// the Tag vector is checked against a software copy of the array; writes must
// change exactly the masked columns of the selected rows (tagged rows in
// non-blocked mode, rows matched by any compare since the last write in
// blocked mode), and the array-wide set/reset counts must equal the number of
// cells whose value changes. Every row is read back after each write.
module tb_mvcam_array;
  import tap_pkg::*;
  localparam int COLS = 5, ROWS = 16;
  logic clk = 0, rst_n = 0;
  ap_op_e op;
  logic blocked, host_we;
  logic [COLS-1:0][1:0] key, hdata, rdata;
  logic [COLS-1:0] mask, rcare;
  logic [3:0] hrow;
  logic [ROWS-1:0] tag, match;
  logic [$clog2(ROWS*COLS*3+1)-1:0] nset, nreset;
  int checks = 0, failures = 0;
  int sh[ROWS][COLS];
  logic [ROWS-1:0] etag, ewe;

  mvcam_array #(.RADIX(3), .COLS(COLS), .ROWS(ROWS)) dut (
    .clk(clk), .rst_n(rst_n), .op_i(op), .blocked_i(blocked), .key_i(key), .mask_i(mask),
    .host_we_i(host_we), .host_row_i(hrow), .host_wdata_i(hdata), .host_rdata_o(rdata),
    .host_rcare_o(rcare), .tag_o(tag), .match_o(match), .nset_o(nset), .nreset_o(nreset));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic readback();
    for (int r = 0; r < ROWS; r++) begin
      hrow = r[3:0]; #1;
      for (int c = 0; c < COLS; c++)
        check(rcare[c] && int'(rdata[c]) == sh[r][c], $sformatf("row %0d col %0d = %0d exp %0d", r, c, rdata[c], sh[r][c]));
    end
  endtask

  initial begin
    op = OP_IDLE; blocked = 0; host_we = 0; key = '0; mask = '0; hdata = '0; hrow = '0;
    etag = '0; ewe = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      // load all rows, values drawn from a small set so that keys often match
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        host_we = 1; hrow = r[3:0];
        for (int c = 0; c < COLS; c++) begin
          sh[r][c] = (c < 2) ? $urandom_range(0, 2) : $urandom_range(0, 1);
          hdata[c] = sh[r][c][1:0];
        end
      end
      @(negedge clk); host_we = 0;
      readback();
      blocked = it[0];
      ewe = '0;
      for (int k = 0; k < (blocked ? 3 : 1); k++) begin
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          mask[c] = (c < 3) ? 1'b1 : 1'($urandom_range(0, 1));
          key[c] = (c < 2) ? 2'($urandom_range(0, 2)) : 2'($urandom_range(0, 1));
        end
        for (int r = 0; r < ROWS; r++) begin
          etag[r] = 1;
          for (int c = 0; c < COLS; c++) if (mask[c] && sh[r][c] != int'(key[c])) etag[r] = 0;
        end
        ewe |= etag;
        op = OP_COMPARE;
        @(negedge clk); op = OP_IDLE; #1;
        check(tag == etag, $sformatf("tags %b exp %b", tag, etag));
      end
      begin
        int ns;
        logic [ROWS-1:0] sel;
        for (int c = 0; c < COLS; c++) begin
          mask[c] = 1'($urandom_range(0, 1));
          key[c] = 2'($urandom_range(0, 2));
        end
        sel = blocked ? ewe : etag;
        ns = 0;
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            if (sel[r] && mask[c] && sh[r][c] != int'(key[c])) ns++;
        op = OP_WRITE; #1;
        check(int'(nset) == ns && int'(nreset) == ns, $sformatf("set/reset %0d/%0d exp %0d", nset, nreset, ns));
        @(negedge clk); op = OP_IDLE;
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            if (sel[r] && mask[c]) sh[r][c] = int'(key[c]);
        readback();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
