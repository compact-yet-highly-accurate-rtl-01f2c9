// tb_svm_workloads: one classifier per evaluated dataset, each elaborated
// with that dataset's class and feature counts (4-bit inputs, 8-bit
// parameters, pseudo-random stand-in models since trained weights are not
// available), run on random features against the integer reference:
//   Cardio 3 classes/21 features, Dermatology 6/33, Pendigits 10/17,
//   RedWine 6/11, WhiteWine 7/11.
// Each prediction must take (classes-1)*(features+1) cycles.
//
// Second part: the RedWine-sized (6 classes, 11 features) and
// WhiteWine-sized (7/11) models are also padded into the default
// 10-class, 17-feature build. Padding rules: unused features get weight 0;
// a pair (i,j) whose second class j is a dummy class gets bias -1 and zero
// weights, so it always answers "i wins" and the dummy classes are
// eliminated first. The padded classifier must predict the same class as
// the small model's DDAG, in the default build's 9*18 = 162 cycles.
module tb_svm_workloads;
  import svm_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  localparam int ND = 5;
  localparam int NC [ND] = '{3, 6, 10, 6, 7};
  localparam int NF [ND] = '{21, 33, 17, 11, 11};

  logic fin [ND];
  int dc [ND], df [ND], nl [ND], nr [ND], nb [ND], ni [ND], ns [ND];

  for (genvar d = 0; d < ND; d++) begin : g_ds
    svm_tb_driver #(.N(NC[d]), .M(NF[d]), .W_W(8), .X_W(4), .X_SIGNED(1'b0),
                    .SEED(100 + d), .NRUNS(150)) drv (
      .clk(clk), .rst_n(rst_n), .finished(fin[d]), .checks(dc[d]),
      .failures(df[d]), .n_left(nl[d]), .n_right(nr[d]),
      .n_back_to_back(nb[d]), .n_ignored_start(ni[d]), .n_classes_seen(ns[d]));
  end

  // ---- padded models in the default build ----
  localparam int PN = 10, PM = 17, PSV = 45;

  // Parameter (r, c) of the small n-class, m-feature stand-in model.
  function automatic int small_param(input int seed, input int m, input int r, input int c);
    logic [31:0] h = mix32(32'(seed) * 32'd65536 + 32'(r * (m + 1) + c));
    return int'($signed(h[7:0]));
  endfunction

  function automatic int row_of(input int n, input int i, input int j);
    int r = 0;
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++) begin
        if (a == i && b == j) return r;
        r++;
      end
    return -1;
  endfunction

  function automatic logic [PSV*(PM+1)*8-1:0] padded(input int seed, input int n, input int m);
    logic [PSV*(PM+1)*8-1:0] v = '0;
    for (int i = 0; i < PN; i++)
      for (int j = i + 1; j < PN; j++) begin
        int r = row_of(PN, i, j);
        if (j >= n) v[(r*(PM+1))*8 +: 8] = 8'hff;  // bias -1, weights 0
        else
          for (int c = 0; c <= m; c++)
            v[(r*(PM+1)+c)*8 +: 8] = 8'(small_param(seed, m, row_of(n, i, j), c));
      end
    return v;
  endfunction

  logic                 p_start = 0;
  logic [PM-1:0][3:0]   p_x;
  logic                 p_busy [2], p_done [2];
  logic [4:0]           p_sel [2];
  logic [3:0]           p_cls [2];

  seq_svm_top #(.MODEL(padded(200, 6, 11))) dut_red (
    .clk(clk), .rst_n(rst_n), .start_i(p_start), .features_i(p_x),
    .busy_o(p_busy[0]), .feat_sel_o(p_sel[0]), .done_o(p_done[0]), .class_o(p_cls[0]));
  seq_svm_top #(.MODEL(padded(201, 7, 11))) dut_white (
    .clk(clk), .rst_n(rst_n), .start_i(p_start), .features_i(p_x),
    .busy_o(p_busy[1]), .feat_sel_o(p_sel[1]), .done_o(p_done[1]), .class_o(p_cls[1]));

  function automatic int small_ref(input int seed, input int n, input int m);
    int i = 0, j = n - 1, s, r;
    while (i < j) begin
      r = row_of(n, i, j);
      s = small_param(seed, m, r, 0);
      for (int c = 1; c <= m; c++) s += small_param(seed, m, r, c) * int'(p_x[c-1]);
      if (s >= 0) i++; else j--;
    end
    return i;
  endfunction

  int p_checks = 0, p_failures = 0;
  bit p_fin = 0;

  initial begin
    int cyc, e0, e1;
    p_x = '0;
    @(posedge rst_n);
    @(negedge clk);
    for (int t = 0; t < 100; t++) begin
      for (int f = 0; f < PM; f++) p_x[f] = 4'($urandom);  // features 12..17 are don't-care
      e0 = small_ref(200, 6, 11);
      e1 = small_ref(201, 7, 11);
      p_start = 1;
      cyc = 1;
      while (!p_done[0] && cyc < 200) begin
        @(negedge clk);
        p_start = 0;
        cyc++;
      end
      p_checks += 3;
      if (cyc != 162 || !p_done[1]) begin p_failures++; $display("FAIL padded: %0d cycles", cyc); end
      if (int'(p_cls[0]) != e0) begin p_failures++; $display("FAIL padded RedWine: %0d exp %0d", p_cls[0], e0); end
      if (int'(p_cls[1]) != e1) begin p_failures++; $display("FAIL padded WhiteWine: %0d exp %0d", p_cls[1], e1); end
      @(negedge clk);
    end
    p_fin = 1;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && p_fin);
    $display("padded wine models in the default build: checks=%0d failures=%0d", p_checks, p_failures);
    checks += p_checks;
    failures += p_failures;
    for (int d = 0; d < ND; d++) begin
      $display("dataset %0d: %0d classes, %0d features: checks=%0d failures=%0d classes predicted=%0d",
               d, NC[d], NF[d], dc[d], df[d], ns[d]);
      checks += dc[d];
      failures += df[d];
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
