// tb_sv_engine: checks the single-MAC engine with M=6 weights of 8 bits and
// 4-bit inputs, once with signed and once with unsigned inputs. The
// testbench plays the parameter storage: it returns the bias for column 0
// and weight c for column c. For many random support vectors run back to
// back it checks that ready comes every M+1 = 7 cycles, that the columns
// run 0..M, and that y and the final sum equal b + sum w_i*x_i computed in
// integers. Stimulus changes on the falling edge.
module tb_sv_engine;
  localparam int unsigned M = 6, W_W = 8, X_W = 4;
  localparam int unsigned ACC_W = svm_pkg::safe_acc_width(W_W, X_W, M);

  logic clk = 0, rst_n = 0, en = 0;
  logic [M-1:0][X_W-1:0] x;
  logic signed [W_W-1:0] p_s, p_u;
  logic [2:0] col_s, col_u;
  logic rdy_s, rdy_u, y_s, y_u;
  logic signed [ACC_W-1:0] sum_s, sum_u;
  int checks = 0, failures = 0;
  int w [M+1];

  always #5 clk = ~clk;

  sv_engine #(.M(M), .W_W(W_W), .X_W(X_W), .X_SIGNED(1'b1)) dut_s (
    .clk(clk), .rst_n(rst_n), .en_i(en), .param_i(p_s), .x_i(x),
    .col_o(col_s), .ready_o(rdy_s), .y_o(y_s), .sum_o(sum_s));
  sv_engine #(.M(M), .W_W(W_W), .X_W(X_W), .X_SIGNED(1'b0)) dut_u (
    .clk(clk), .rst_n(rst_n), .en_i(en), .param_i(p_u), .x_i(x),
    .col_o(col_u), .ready_o(rdy_u), .y_o(y_u), .sum_o(sum_u));

  // Storage model: the column index selects bias or weight.
  always_comb begin
    p_s = (32'(col_s) <= M) ? W_W'(w[col_s]) : '0;
    p_u = (32'(col_u) <= M) ? W_W'(w[col_u]) : '0;
  end

  function automatic void check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  int n_pos_s = 0, n_neg_s = 0;

  initial begin
    int ref_s, ref_u;
    foreach (w[k]) w[k] = 0;
    x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k <= int'(M); k++) w[k] = int'($signed(8'($urandom)));
      for (int k = 0; k < int'(M); k++) x[k] = 4'($urandom);
      ref_s = w[0]; ref_u = w[0];
      for (int k = 1; k <= int'(M); k++) begin
        ref_s += w[k] * int'($signed(x[k-1]));
        ref_u += w[k] * int'(x[k-1]);
      end
      en = 1;
      // Occasionally pause between vectors to check that en low restarts
      // the counter at the bias cycle.
      for (int c = 0; c <= int'(M); c++) begin
        check($sformatf("t%0d col %0d", t, col_s), 32'(col_s) == c && 32'(col_u) == c);
        check($sformatf("t%0d ready at col %0d", t, c),
              rdy_s == (c == int'(M)) && rdy_u == (c == int'(M)));
        if (c == int'(M)) begin
          check($sformatf("t%0d signed sum %0d exp %0d", t, sum_s, ref_s), int'(sum_s) == ref_s);
          check($sformatf("t%0d unsigned sum %0d exp %0d", t, sum_u, ref_u), int'(sum_u) == ref_u);
          check($sformatf("t%0d signed y", t), y_s == (ref_s >= 0));
          check($sformatf("t%0d unsigned y", t), y_u == (ref_u >= 0));
          if (ref_s >= 0) n_pos_s++; else n_neg_s++;
        end
        @(negedge clk);
      end
      if (t % 7 == 3) begin
        en = 0;
        repeat (2) @(negedge clk);
        check("idle: counter at 0", col_s == 0 && !rdy_s);
      end
    end
    check("both signs seen", n_pos_s > 0 && n_neg_s > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
