// tb_search_decoder -- exhaustive check of the key/mask decoder.
// The ternary instance is compared with the decoder truth table printed in the
// paper (mask 0 -> 000, key 0 -> 220, key 1 -> 202, key 2 -> 022, written as
// S2 S1 S0 with 2 = high). A radix-5 instance is checked against the generic
// rule: only the line of the key value is low, all lines low when masked.
module tb_search_decoder;
  logic [1:0] key3;
  logic       mask3;
  logic [2:0] s3;
  logic [2:0] key5;
  logic       mask5;
  logic [4:0] s5;
  int checks = 0, failures = 0;

  search_decoder #(.RADIX(3)) dut3 (.key_i(key3), .mask_i(mask3), .s_o(s3));
  search_decoder #(.RADIX(5)) dut5 (.key_i(key5), .mask_i(mask5), .s_o(s5));

  // Expected lines (S2,S1,S0) for the ternary decoder, 1 = logic 2.
  function automatic logic [2:0] exp3(input logic m, input logic [1:0] k);
    if (!m) return 3'b000;
    case (k)
      2'd0: return 3'b110;
      2'd1: return 3'b101;
      default: return 3'b011;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int k = 0; k < 3; k++) begin
        mask3 = m[0]; key3 = k[1:0]; #1;
        checks++;
        if (s3 !== exp3(mask3, key3)) begin
          failures++;
          $display("FAIL radix3 mask=%0d key=%0d got %b exp %b", m, k, s3, exp3(mask3, key3));
        end
      end
    for (int m = 0; m < 2; m++)
      for (int k = 0; k < 5; k++) begin
        logic [4:0] e;
        mask5 = m[0]; key5 = k[2:0]; #1;
        e = m[0] ? ~(5'b00001 << k) : 5'b00000;
        checks++;
        if (s5 !== e) begin
          failures++;
          $display("FAIL radix5 mask=%0d key=%0d got %b exp %b", m, k, s5, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
