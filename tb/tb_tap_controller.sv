// tb_tap_controller -- checks the operation stream of a 3-trit addition in
// both approaches. For every operation it checks that only the columns of the
// current trit position (A_i, B_i and the carry column) are masked, that
// positions are visited in order 0, 1, 2, that every write writes
// sum = (A+B+C) mod 3 to B_i and carry = (A+B+C) div 3 to the carry column
// for the triplet of the compare just before it, that A_i is written only
// after compare 1,0,1 and then with 0, and the totals: 21 compares per trit,
// 21 (non-blocked) or 9 (blocked) writes per trit, and done_o exactly
// TRITS*42+2 or TRITS*30+2 clock edges after the edge that samples start_i.
module tb_tap_controller;
  import tap_pkg::*;
  localparam int T = 3, COLS = 2 * T + 1;
  logic clk = 0, rst_n = 0, start = 0, blocked = 0;
  logic busy, done, blk;
  ap_op_e op;
  logic [COLS-1:0][1:0] key;
  logic [COLS-1:0] mask;
  int checks = 0, failures = 0;

  tap_controller #(.TRITS(T)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .blocked_i(blocked), .busy_o(busy),
    .done_o(done), .blocked_o(blk), .op_o(op), .key_o(key), .mask_o(mask),
    .trit_o(), .pass_o());

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #12 rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      int ncmp, nwr, cyc, pos, last_a, last_b, last_c;
      ncmp = 0; nwr = 0; cyc = 0; pos = 0; last_a = 0; last_b = 0; last_c = 0;
      @(negedge clk);
      blocked = mode[0]; start = 1;
      @(negedge clk);
      start = 0;
      check(busy, "busy after start");
      // cyc counts the clock edges after the edge that sampled start_i
      cyc = 0;
      while (!done) begin
        if (op == OP_COMPARE) begin
          int p;
          p = -1;
          for (int i = 0; i < T; i++) if (mask[i]) p = i;
          check(p >= pos, "trit positions in order");
          if (p > pos) begin
            check(ncmp == 21 * (pos + 1), $sformatf("21 compares for trit %0d (%0d)", pos, ncmp));
            pos = p;
          end
          check(mask == ((COLS'(1) << pos) | (COLS'(1) << (T + pos)) | (COLS'(1) << (2 * T))),
                $sformatf("compare mask %b", mask));
          last_a = int'(key[pos]); last_b = int'(key[T + pos]); last_c = int'(key[2 * T]);
          ncmp++;
        end else if (op == OP_WRITE) begin
          int t;
          logic exp_wa;
          t = last_a + last_b + last_c;
          exp_wa = (last_a == 1 && last_b == 0 && last_c == 1);
          check(int'(key[T + pos]) == t % 3 && int'(key[2 * T]) == t / 3,
                $sformatf("write after %0d%0d%0d gives %0d%0d", last_a, last_b, last_c, key[T+pos], key[2*T]));
          check(mask == ((COLS'(exp_wa) << pos) | (COLS'(1) << (T + pos)) | (COLS'(1) << (2 * T))),
                $sformatf("write mask %b", mask));
          if (exp_wa) check(key[pos] == 0, "A rewritten to 0");
          nwr++;
        end
        @(negedge clk);
        cyc++;
      end
      check(ncmp == 21 * T, $sformatf("compares %0d", ncmp));
      check(nwr == (mode ? 9 : 21) * T, $sformatf("writes %0d", nwr));
      check(cyc == T * (mode ? 30 : 42) + 2, $sformatf("latency %0d", cyc));
      check(blk == mode[0], "mode latched");
      @(negedge clk);
      check(!busy && !done, "idle again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
