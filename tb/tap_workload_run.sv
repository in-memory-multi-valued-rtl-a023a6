// tap_workload_run -- testbench helper: runs one P-trit vector addition in
// both approaches on a tap_top of TRITS = P and ROWS rows with random
// operands, checks every sum and carry against arithmetic done here, checks
// the cycle count (P*42+2 non-blocked, P*30+2 blocked), and checks that the
// mean number of element sets (= resets) per addition is within 10% + 1 of the
// value given for that size (the paper's average over 10,000 additions).
module tap_workload_run #(
  parameter int    P        = 5,
  parameter int    ROWS     = 16,
  parameter real   EXP_SETS = 5.22
) (
  output int   checks,
  output int   failures,
  output logic finished
);
  timeunit 1ns;
  timeprecision 1ps;
  import tap_pkg::*;
  localparam int COLS = 2 * P + 1;
  localparam int RW = $clog2(ROWS);
  logic clk = 0, rst_n = 0, start = 0, blocked = 0, host_we = 0;
  logic busy, done;
  logic [RW-1:0] hrow;
  logic [COLS-1:0][1:0] hdata, rdata;
  logic [COLS-1:0] rcare;
  logic [$clog2(ROWS*COLS*3+1)-1:0] nset, nreset;
  int A[ROWS][P], B[ROWS][P];

  tap_top #(.TRITS(P), .ROWS(ROWS)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .blocked_i(blocked), .busy_o(busy),
    .done_o(done), .host_we_i(host_we), .host_row_i(hrow), .host_wdata_i(hdata),
    .host_rdata_o(rdata), .host_rcare_o(rcare), .tag_o(), .nset_o(nset), .nreset_o(nreset));

  always #1 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL [%0dt] %s", P, msg);
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    #5 rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      int cyc;
      longint s, rs;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        host_we = 1; hrow = RW'(r);
        for (int i = 0; i < P; i++) begin
          A[r][i] = $urandom_range(0, 2); B[r][i] = $urandom_range(0, 2);
          hdata[i] = A[r][i][1:0]; hdata[P + i] = B[r][i][1:0];
        end
        hdata[2 * P] = 2'd0;
      end
      @(negedge clk); host_we = 0;
      @(negedge clk); blocked = mode[0]; start = 1;
      @(negedge clk); start = 0;
      cyc = 0; s = 0; rs = 0;
      while (!done && cyc < 10000) begin
        s += longint'(nset); rs += longint'(nreset);
        @(negedge clk); cyc++;
      end
      check(cyc == P * (mode ? TFA_CYC_BL : TFA_CYC_NB) + 2, $sformatf("mode %0d cycles %0d", mode, cyc));
      check(s == rs, "sets equal resets");
      check(real'(s) / ROWS > EXP_SETS * 0.90 - 1.0 && real'(s) / ROWS < EXP_SETS * 1.10 + 1.0,
            $sformatf("mean sets %0.2f vs %0.2f", real'(s) / ROWS, EXP_SETS));
      $display("%0d-trit %s: %0d cycles = %0d ns at 2 ns/cycle, mean sets/resets per addition %0.2f (reference %0.2f)",
               P, mode ? "blocked    " : "non-blocked", cyc, 2 * cyc, real'(s) / ROWS, EXP_SETS);
      for (int r = 0; r < ROWS; r++) begin
        int c;
        hrow = RW'(r); #0.1;
        c = 0;
        for (int i = 0; i < P; i++) begin
          int t;
          t = A[r][i] + B[r][i] + c;
          check(int'(rdata[P + i]) == t % 3, $sformatf("row %0d trit %0d", r, i));
          c = t / 3;
        end
        check(int'(rdata[2 * P]) == c, $sformatf("row %0d carry", r));
      end
    end
    finished = 1;
  end
endmodule
