// tb_seq_svm_top: end-to-end test of the sequential SVM classifier.
//
// Part 1 replays the worked example of 4 classes and 6 features: input
// I = {-3,-1,2,0,-1,1}; support vectors S(1,4) = {1,0,4,-2,3,2},
// S(2,4) = {4,2,-1,3,0,1}, S(2,3) = {-2,-3,1,0,4,-1}, all with bias 0 (the
// other three pairs hold arbitrary values; they are never visited). The
// dot products are 4, -15 and 6, so the DAG goes (1,4) -> (2,4) -> (2,3) and
// predicts class 3 (index 2) in 3*7 = 21 cycles. The test checks the rows
// visited, the class and the cycle count.
//
// Part 2 runs 400 random predictions on a 5-class, 4-feature classifier with
// signed inputs against an integer reference (svm_tb_driver) and requires
// each mechanism to have happened: left and right DAG moves, back-to-back
// starts, starts ignored while busy, and every class predicted.
module tb_seq_svm_top;
  import svm_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // Worked example: pairs in lexicographic order (0,1)(0,2)(0,3)(1,2)(1,3)(2,3),
  // each row = bias followed by six weights.
  localparam int EX [6][7] = '{
    '{ 1,  1,  1,  1,  1,  1,  1},   // (1,2) arbitrary
    '{-1,  2, -2,  2, -2,  2, -2},   // (1,3) arbitrary
    '{ 0,  1,  0,  4, -2,  3,  2},   // S(1,4)
    '{ 0, -2, -3,  1,  0,  4, -1},   // S(2,3)
    '{ 0,  4,  2, -1,  3,  0,  1},   // S(2,4)
    '{ 3, -1, -1, -1, -1, -1, -1}    // (3,4) arbitrary
  };

  function automatic logic [6*7*8-1:0] ex_model();
    logic [6*7*8-1:0] v = '0;
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 7; c++) v[(r*7+c)*8 +: 8] = 8'(EX[r][c]);
    return v;
  endfunction

  logic            ex_start = 0, ex_busy, ex_done;
  logic [5:0][3:0] ex_x;
  logic [2:0]      ex_sel;
  logic [1:0]      ex_cls;

  seq_svm_top #(.N_CLASSES(4), .M(6), .W_W(8), .X_W(4), .X_SIGNED(1'b1),
                .MODEL(ex_model())) dut_ex (
    .clk(clk), .rst_n(rst_n), .start_i(ex_start), .features_i(ex_x),
    .busy_o(ex_busy), .feat_sel_o(ex_sel), .done_o(ex_done), .class_o(ex_cls));

  logic drv_fin;
  int d_checks, d_failures, n_left, n_right, n_b2b, n_ign, n_cls;

  svm_tb_driver #(.N(5), .M(4), .W_W(6), .X_W(4), .X_SIGNED(1'b1), .SEED(11),
                  .NRUNS(400)) drv (
    .clk(clk), .rst_n(rst_n), .finished(drv_fin), .checks(d_checks),
    .failures(d_failures), .n_left(n_left), .n_right(n_right),
    .n_back_to_back(n_b2b), .n_ignored_start(n_ign), .n_classes_seen(n_cls));

  function automatic void check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  initial begin
    int cyc;
    int rows [$];
    ex_x = {4'(1), 4'(-1), 4'(0), 4'(2), 4'(-1), 4'(-3)};  // x1 in index 0
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    ex_start = 1;
    cyc = 1;
    rows.push_back(int'(dut_ex.u_ctrl.row_o));
    while (!ex_done && cyc < 40) begin
      @(negedge clk);
      ex_start = 0;
      cyc++;
      if (int'(dut_ex.u_ctrl.row_o) != rows[$]) rows.push_back(int'(dut_ex.u_ctrl.row_o));
    end
    check($sformatf("example: done after %0d cycles, expected 21", cyc), ex_done && cyc == 21);
    check($sformatf("example: class index %0d, expected 2 (Y3)", ex_cls), ex_cls == 2'd2);
    check($sformatf("example: %0d rows visited, expected 3", rows.size()), rows.size() == 3);
    if (rows.size() == 3)
      check($sformatf("example: rows %0d,%0d,%0d expected 2,4,3", rows[0], rows[1], rows[2]),
            rows[0] == 2 && rows[1] == 4 && rows[2] == 3);
    @(negedge clk);
    check("example: idle after done", !ex_busy);

    wait (drv_fin);
    checks += d_checks;
    failures += d_failures;
    $display("mechanisms: left moves=%0d right moves=%0d back-to-back starts=%0d ignored starts=%0d classes predicted=%0d of 5",
             n_left, n_right, n_b2b, n_ign, n_cls);
    check("left DAG moves happened", n_left > 0);
    check("right DAG moves happened", n_right > 0);
    check("back-to-back starts happened", n_b2b > 0);
    check("starts while busy happened", n_ign > 0);
    check("every class predicted", n_cls == 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
