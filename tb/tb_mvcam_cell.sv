// tb_mvcam_cell -- checks the 3T3R cell: the match/mismatch table for every
// stored value (0, 1, 2, don't care) against every key/mask pair, the element
// states per stored value (M2 M1 M0: value 0 = H H L, 1 = H L H, 2 = L H H,
// don't care = H H H), and the set/reset actions of every write (one set and
// one reset, a single set when leaving "don't care", nothing when the value
// is unchanged; e.g. B: 1 -> 0 resets M1 and sets M0).
module tb_mvcam_cell;
  logic       clk = 0, rst_n = 0;
  logic [2:0] s;
  logic       match, we, care;
  logic [1:0] wdata, value;
  logic [2:0] set_v, reset_v, lrs;
  int checks = 0, failures = 0;

  mvcam_cell #(.RADIX(3)) dut (
    .clk(clk), .rst_n(rst_n), .s_i(s), .match_o(match), .we_i(we), .wdata_i(wdata),
    .set_o(set_v), .reset_o(reset_v), .lrs_o(lrs), .value_o(value), .care_o(care));

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

  // search lines for a key/mask pair (S2 S1 S0, 1 = high), from the decoder table
  function automatic logic [2:0] lines(input int mask, input int key);
    if (mask == 0) return 3'b000;
    return (key == 0) ? 3'b110 : (key == 1) ? 3'b101 : 3'b011;
  endfunction

  // stored: 0..2 or 3 = don't care
  task automatic check_compare(input int stored);
    logic [2:0] exp_lrs;
    exp_lrs = (stored == 3) ? 3'b000 : (3'b001 << stored);
    check(lrs == exp_lrs, $sformatf("element states for %0d: %b", stored, lrs));
    check(care == (stored != 3), "care flag");
    if (stored != 3) check(value == stored[1:0], "value readback");
    for (int m = 0; m < 2; m++)
      for (int k = 0; k < 3; k++) begin
        logic exp_match;
        s = lines(m, k); #1;
        exp_match = (m == 0) || (stored == 3) || (stored == k);
        check(match == exp_match, $sformatf("stored %0d mask %0d key %0d match %0d", stored, m, k, match));
      end
  endtask

  initial begin
    we = 0; wdata = 0; s = 0;
    #12 rst_n = 1;
    @(negedge clk);
    check_compare(3);
    // walk through all transitions: from don't care to v, then v -> w
    for (int v = 0; v < 3; v++) begin
      // go back to don't care by reset
      rst_n = 0; #1; rst_n = 1;
      @(negedge clk);
      we = 1; wdata = v[1:0]; #1;
      check(set_v == (3'b001 << v) && reset_v == 3'b000,
            $sformatf("x->%0d actions set=%b reset=%b", v, set_v, reset_v));
      @(negedge clk); we = 0; #1;
      check(set_v == 0 && reset_v == 0, "no action without write enable");
      check_compare(v);
      @(negedge clk);
      for (int w = 0; w < 3; w++) begin
        we = 1; wdata = w[1:0]; #1;
        if (w == v)
          check(set_v == 0 && reset_v == 0, $sformatf("%0d->%0d no change", v, w));
        else
          check(set_v == (3'b001 << w) && reset_v == (3'b001 << v),
                $sformatf("%0d->%0d set=%b reset=%b", v, w, set_v, reset_v));
        @(negedge clk); we = 0;
        check_compare(w);
        // restore v
        @(negedge clk);
        we = 1; wdata = v[1:0];
        @(negedge clk); we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
