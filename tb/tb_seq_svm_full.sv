// tb_seq_svm_full: the classifier at its default configuration (Pendigits
// size: 10 classes, 17 features of 4 bits, 45 support vectors of 18 8-bit
// parameters, default stand-in model), with no parameter overridden. It runs
// 300 predictions on random features against the integer reference of
// svm_tb_driver, checking every class and the 9*18 = 162-cycle latency.
module tb_seq_svm_full;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic drv_fin;
  int d_checks, d_failures, n_left, n_right, n_b2b, n_ign, n_cls;

  svm_tb_driver #(.N(10), .M(17), .W_W(8), .X_W(4), .X_SIGNED(1'b0), .SEED(1),
                  .NRUNS(300), .USE_DEFAULT(1'b1)) drv (
    .clk(clk), .rst_n(rst_n), .finished(drv_fin), .checks(d_checks),
    .failures(d_failures), .n_left(n_left), .n_right(n_right),
    .n_back_to_back(n_b2b), .n_ignored_start(n_ign), .n_classes_seen(n_cls));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (drv_fin);
    checks = d_checks + 1;
    failures = d_failures;
    $display("left moves=%0d right moves=%0d classes predicted=%0d of 10", n_left, n_right, n_cls);
    if (n_left == 0 || n_right == 0) begin
      failures++;
      $display("FAIL DAG moved only one way");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
