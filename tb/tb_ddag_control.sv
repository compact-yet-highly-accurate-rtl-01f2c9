// tb_ddag_control: checks the DDAG control FSM for N = 4 and N = 5 classes
// on every possible sequence of engine results. The testbench plays the
// engine (ready every K=3 cycles while run is high, with a chosen y) and an
// independent reference of the DAG: start at (0,N-1), y=1 moves to (i+1,j),
// y=0 to (i,j-1); the row must be the pair's lexicographic position; after
// N-1 results done must rise with class i (y=0) or j (y=1) of the last pair.
module tb_ddag_control;
  localparam int K = 3;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic       start4, ready4, y4, run4, done4;
  logic [2:0] row4;
  logic [1:0] cls4;
  logic       start5, ready5, y5, run5, done5;
  logic [3:0] row5;
  logic [2:0] cls5;

  ddag_control #(.N_CLASSES(4)) dut4 (.clk(clk), .rst_n(rst_n), .start_i(start4),
    .ready_i(ready4), .y_i(y4), .run_o(run4), .row_o(row4), .done_o(done4), .class_o(cls4));
  ddag_control #(.N_CLASSES(5)) dut5 (.clk(clk), .rst_n(rst_n), .start_i(start5),
    .ready_i(ready5), .y_i(y5), .run_o(run5), .row_o(row5), .done_o(done5), .class_o(cls5));

  function automatic int ref_row(input int n, input int i, input int j);
    int r = 0;
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++) begin
        if (a == i && b == j) return r;
        r++;
      end
    return -1;
  endfunction

  function automatic void check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  // Run one classification on the N-class instance with result bits ys
  // (bit d = y of decision d).
  task automatic run(input int n, input int ys);
    int i = 0, j = n - 1;
    logic run_o, done_o;
    int row_o, cls_o;
    if (n == 4) start4 = 1; else start5 = 1;
    for (int d = 0; d < n - 1; d++) begin
      for (int c = 0; c < K; c++) begin
        logic yy = ys[d];
        if (n == 4) begin ready4 = (c == K - 1); y4 = yy; end
        else begin ready5 = (c == K - 1); y5 = yy; end
        #1;
        run_o  = (n == 4) ? run4 : run5;
        done_o = (n == 4) ? done4 : done5;
        row_o  = (n == 4) ? int'(row4) : int'(row5);
        cls_o  = (n == 4) ? int'(cls4) : int'(cls5);
        check($sformatf("n%0d ys%0h d%0d run", n, ys, d), run_o);
        check($sformatf("n%0d ys%0h d%0d row %0d exp %0d", n, ys, d, row_o, ref_row(n, i, j)),
              row_o == ref_row(n, i, j));
        check($sformatf("n%0d ys%0h d%0d done", n, ys, d), done_o == (c == K - 1 && d == n - 2));
        if (c == K - 1 && d == n - 2)
          check($sformatf("n%0d ys%0h class %0d", n, ys, cls_o), cls_o == (yy ? j : i));
        @(negedge clk);
        start4 = 0; start5 = 0;
      end
      if (ys[d]) i++; else j--;
    end
    ready4 = 0; ready5 = 0;
    #1;
    check($sformatf("n%0d idle after done", n), !((n == 4) ? run4 : run5));
    check($sformatf("n%0d back at root", n), ((n == 4) ? int'(row4) : int'(row5)) == ref_row(n, 0, n - 1));
    @(negedge clk);
  endtask

  initial begin
    start4 = 0; ready4 = 0; y4 = 0; start5 = 0; ready5 = 0; y5 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 check("idle after reset", !run4 && !run5);
    @(negedge clk);
    for (int ys = 0; ys < 8; ys++) run(4, ys);
    for (int ys = 0; ys < 16; ys++) run(5, ys);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
