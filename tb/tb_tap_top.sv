// tb_tap_top -- end-to-end test of the ternary associative processor at its
// full size (20-trit operands, 512 rows, default parameters).
//
// Two complete vector additions are run, one per approach, each on fresh
// operands: 512 rows are loaded through the host port (random A and B, a few
// fixed corner rows, carry column 0), the addition is started, and every row is
// then read back and compared with A + B computed here trit by trit: B must
// hold the 20 sum trits, the carry column the carry out, and A must be intact
// except where the adder's one 3-trit pass (A,B,C = 1,0,1) rewrote A_i to 0.
// The run time must be 20*42+2 cycles non-blocked and 20*30+2 blocked, i.e.
// 1.4x fewer cycles blocked. The set/reset counts over all writes are summed;
// their mean per 20-trit addition must be close to the paper's 21.02 (Table of
// energy results), and both approaches must program the same elements.
// Mechanisms counted (each must occur): reset state "don't care",
// non-blocked run, blocked run, 3-trit write, carry out of the word,
// host write ignored while busy.
module tb_tap_top;
  timeunit 1ns;
  timeprecision 1ps;
  import tap_pkg::*;
  localparam int T = 20, ROWS = 512, COLS = 2 * T + 1;
  logic clk = 0, rst_n = 0, start = 0, blocked = 0, host_we = 0;
  logic busy, done;
  logic [8:0] hrow;
  logic [COLS-1:0][1:0] hdata, rdata;
  logic [COLS-1:0] rcare;
  logic [ROWS-1:0] tag;
  logic [$clog2(ROWS*COLS*3+1)-1:0] nset, nreset;
  int checks = 0, failures = 0;
  int A[ROWS][T], B[ROWS][T];
  longint sets_run[2], resets_run[2];
  int cycles_run[2];
  int n_dontcare = 0, n_nb = 0, n_bl = 0, n_wr3 = 0, n_carry = 0, n_busyblock = 0;

  tap_top dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .blocked_i(blocked), .busy_o(busy),
    .done_o(done), .host_we_i(host_we), .host_row_i(hrow), .host_wdata_i(hdata),
    .host_rdata_o(rdata), .host_rcare_o(rcare), .tag_o(tag), .nset_o(nset), .nreset_o(nreset));

  always #1 clk = ~clk;   // 2 ns cycle: one compare or one write per cycle

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  task automatic load_rows(input int seed_mode);
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < T; i++) begin
        case (r)
          0: begin A[r][i] = 2; B[r][i] = 2; end             // all twos
          1: begin A[r][i] = 0; B[r][i] = 0; end             // zero
          2: begin A[r][i] = 1; B[r][i] = (i == 0) ? 2 : 0; end  // ripple through 1,0,1
          default: begin A[r][i] = $urandom_range(0, 2); B[r][i] = $urandom_range(0, 2); end
        endcase
      end
      @(negedge clk);
      host_we = 1; hrow = r[8:0];
      for (int i = 0; i < T; i++) begin
        hdata[i] = A[r][i][1:0];
        hdata[T + i] = B[r][i][1:0];
      end
      hdata[2 * T] = 2'd0;
    end
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic run_add(input int mode);
    int cyc;
    longint s, rs;
    @(negedge clk);
    blocked = mode[0]; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0; s = 0; rs = 0;
    while (!done) begin
      s += longint'(nset); rs += longint'(nreset);
      // try to overwrite row 3 while busy: must be ignored
      if (cyc == 100) begin host_we = 1; hrow = 9'd3; hdata = '0; end
      else host_we = 0;
      @(negedge clk);
      cyc++;
      if (cyc > 5000) break;
    end
    host_we = 0;
    cycles_run[mode] = cyc;
    sets_run[mode] = s; resets_run[mode] = rs;
    check(cyc == T * (mode ? TFA_CYC_BL : TFA_CYC_NB) + 2, $sformatf("mode %0d latency %0d cycles", mode, cyc));
    if (mode == 0) n_nb++; else n_bl++;
  endtask

  task automatic check_rows();
    for (int r = 0; r < ROWS; r++) begin
      int c, a_exp[T];
      logic a_changed;
      hrow = r[8:0]; #0.1;
      c = 0; a_changed = 0;
      for (int i = 0; i < T; i++) begin
        int t;
        t = A[r][i] + B[r][i] + c;
        a_exp[i] = (A[r][i] == 1 && B[r][i] == 0 && c == 1) ? 0 : A[r][i];
        if (a_exp[i] != A[r][i]) a_changed = 1;
        check(rcare[T + i] && int'(rdata[T + i]) == t % 3,
              $sformatf("row %0d sum trit %0d = %0d exp %0d", r, i, rdata[T + i], t % 3));
        check(int'(rdata[i]) == a_exp[i], $sformatf("row %0d A trit %0d = %0d exp %0d", r, i, rdata[i], a_exp[i]));
        c = t / 3;
      end
      check(int'(rdata[2 * T]) == c, $sformatf("row %0d carry out %0d exp %0d", r, rdata[2 * T], c));
      if (a_changed) n_wr3++;
      if (c != 0) n_carry++;
    end
  endtask

  initial begin
    #5 rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 4; r++) begin
      hrow = r[8:0]; #0.1;
      check(rcare == '0, "reset state is don't care");
      if (rcare == '0) n_dontcare++;
    end
    for (int mode = 0; mode < 2; mode++) begin
      load_rows(mode);
      run_add(mode);
      // row 3 must not have been cleared by the host write during busy
      hrow = 9'd3; #0.1;
      if (rdata[T +: T] != '0 || rdata[0 +: T] != '0) n_busyblock++;
      check_rows();
      $display("mode %s: %0d cycles (%0d ns at 2 ns/cycle), mean sets %0.2f resets %0.2f per 20-trit addition",
               mode ? "blocked" : "non-blocked", cycles_run[mode], 2 * cycles_run[mode],
               real'(sets_run[mode]) / ROWS, real'(resets_run[mode]) / ROWS);
      check(sets_run[mode] == resets_run[mode], "sets equal resets");
      check(real'(sets_run[mode]) / ROWS > 19.5 && real'(sets_run[mode]) / ROWS < 22.5,
            "mean sets per addition near 21.02");
    end
    check(cycles_run[0] * 10 > cycles_run[1] * 13 && cycles_run[0] * 10 < cycles_run[1] * 15,
          "blocked approach about 1.4x faster");
    $display("mechanisms: dontcare=%0d nonblocked=%0d blocked=%0d wr3=%0d carry_out=%0d host_blocked=%0d",
             n_dontcare, n_nb, n_bl, n_wr3, n_carry, n_busyblock);
    check(n_dontcare > 0, "don't-care reset state seen");
    check(n_nb > 0 && n_bl > 0, "both approaches run");
    check(n_wr3 > 0, "3-trit write happened");
    check(n_carry > 0, "carry out happened");
    check(n_busyblock > 0, "host write while busy ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
