// tb_tap_workloads -- the vector-addition sizes of the energy study: 5, 10,
// 20, 32, 40 and 80-trit additions, each on its own tap_top sized for it (16
// rows each to keep the run short). For every size both approaches are run
// and checked by tap_workload_run: results, cycle counts, and the mean number
// of element sets/resets per addition against the reference values
// 5.22, 10.53, 21.02, 33.67, 42.17 and 84.54.
module tb_tap_workloads;
  int c[6], f[6];
  logic fin[6];
  int checks, failures;

  tap_workload_run #(.P(5),  .EXP_SETS(5.22))  w5  (.checks(c[0]), .failures(f[0]), .finished(fin[0]));
  tap_workload_run #(.P(10), .EXP_SETS(10.53)) w10 (.checks(c[1]), .failures(f[1]), .finished(fin[1]));
  tap_workload_run #(.P(20), .EXP_SETS(21.02)) w20 (.checks(c[2]), .failures(f[2]), .finished(fin[2]));
  tap_workload_run #(.P(32), .EXP_SETS(33.67)) w32 (.checks(c[3]), .failures(f[3]), .finished(fin[3]));
  tap_workload_run #(.P(40), .EXP_SETS(42.17)) w40 (.checks(c[4]), .failures(f[4]), .finished(fin[4]));
  tap_workload_run #(.P(80), .EXP_SETS(84.54)) w80 (.checks(c[5]), .failures(f[5]), .finished(fin[5]));

  task automatic report(input int extra);
    checks = 0; failures = extra;
    for (int i = 0; i < 6; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #100000;
    report(1);
  end

  initial begin
    #10;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    report(0);
  end
endmodule
