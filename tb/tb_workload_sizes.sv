// tb_workload_sizes -- the accelerator sized for three dataset shapes of the
// evaluation: the widest table (christine: 1637 features, 2 classes, 1084 test
// rows), a 10-class table (yeast: 8 features, 297 test rows) and a wide binary
// table with many rows (nomao: 119 features, 6893 test rows), all at 4 bits
// per feature, 300 gates and 150-row buffers. Real data and trained circuits
// are not available, so rows are random and each graph is a random initial
// graph; every prediction is checked against the software walk of the graph.
module tb_workload_sizes;
  logic f0, f1, f2;
  int   c0, c1, c2, e0, e1, e2;

  tb_size_runner #(.NAME("christine"), .N_FEATURES(1637), .BITS_PER_INPUT(4),
                   .N_OUTPUTS(1), .ROWS(1084), .SEED(26)) u_christine (
    .finished(f0), .checks(c0), .failures(e0));
  tb_size_runner #(.NAME("yeast"), .N_FEATURES(8), .BITS_PER_INPUT(4),
                   .N_OUTPUTS(4), .ROWS(297), .SEED(77)) u_yeast (
    .finished(f1), .checks(c1), .failures(e1));
  tb_size_runner #(.NAME("nomao"), .N_FEATURES(119), .BITS_PER_INPUT(4),
                   .N_OUTPUTS(1), .ROWS(6893), .SEED(148)) u_nomao (
    .finished(f2), .checks(c2), .failures(e2));

  initial begin : watchdog
    #5000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end

  initial begin
    wait (f0 === 1'b1 && f1 === 1'b1 && f2 === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end
endmodule
