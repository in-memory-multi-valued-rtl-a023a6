// tb_tfa_lut_rom -- checks both adder pass tables against ternary arithmetic:
// every pass must write sum = (A+B+C) mod 3 and carry = (A+B+C) div 3 of its
// input triplet, every one of the 21 action triplets must appear once, the
// blocked table must have 9 write groups, and running all 27 triplets through
// the passes in order (a row is rewritten when it matches; in blocked mode the
// write waits for the end of the group) must leave the correct sum and carry
// in every case, which shows that the pass order never revisits a rewritten
// row.
module tb_tfa_lut_rom;
  import tap_pkg::*;
  logic       blocked;
  logic [4:0] idx;
  lut_entry_t e;
  int checks = 0, failures = 0;

  tfa_lut_rom dut (.blocked_i(blocked), .idx_i(idx), .entry_o(e));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int mode = 0; mode < 2; mode++) begin
      int seen[27];
      int writes;
      lut_entry_t tab[21];
      blocked = mode[0];
      foreach (seen[i]) seen[i] = 0;
      writes = 0;
      for (int p = 0; p < 21; p++) begin
        int a, b, c, t;
        idx = p[4:0]; #1;
        tab[p] = e;
        a = int'(e.in_a); b = int'(e.in_b); c = int'(e.in_c); t = a + b + c;
        check(int'(e.out_b) == t % 3 && int'(e.out_c) == t / 3,
              $sformatf("mode %0d pass %0d: %0d%0d%0d -> sum %0d carry %0d", mode, p+1, a, b, c, e.out_b, e.out_c));
        check(e.wr_a == (a == 1 && b == 0 && c == 1), $sformatf("mode %0d pass %0d 3-trit write flag", mode, p+1));
        if (e.wr_a) check(e.out_a == 0, "A rewritten to 0");
        if (mode == 0) check(e.wr_after, "non-blocked: write after every compare");
        seen[a*9 + b*3 + c]++;
        if (e.wr_after) writes++;
      end
      check(tab[20].wr_after, "last pass is followed by a write");
      check(writes == ((mode == 0) ? 21 : 9), $sformatf("mode %0d write count %0d", mode, writes));
      // the six no-action triplets 000 010 020 201 211 221 are absent, others once
      for (int s = 0; s < 27; s++) begin
        int a, b, c, t, exp;
        a = s / 9; b = (s / 3) % 3; c = s % 3; t = a + b + c;
        exp = ((t % 3) == b && (t / 3) == c) ? 0 : 1;
        check(seen[s] == exp, $sformatf("mode %0d triplet %0d%0d%0d listed %0d times", mode, a, b, c, seen[s]));
      end
      // in-place run of every triplet
      for (int s = 0; s < 27; s++) begin
        int a, b, c, a0, b0, c0, t;
        logic pend;
        lut_entry_t pe;
        a0 = s / 9; b0 = (s / 3) % 3; c0 = s % 3;
        a = a0; b = b0; c = c0; t = a0 + b0 + c0;
        pend = 0; pe = '0;
        for (int p = 0; p < 21; p++) begin
          if (a == int'(tab[p].in_a) && b == int'(tab[p].in_b) && c == int'(tab[p].in_c)) begin
            pend = 1; pe = tab[p];
          end
          if (tab[p].wr_after && pend) begin
            if (pe.wr_a) a = int'(pe.out_a);
            b = int'(pe.out_b); c = int'(pe.out_c);
            pend = 0;
          end
        end
        check(b == t % 3 && c == t / 3,
              $sformatf("mode %0d in-place %0d%0d%0d -> %0d%0d%0d", mode, a0, b0, c0, a, b, c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
