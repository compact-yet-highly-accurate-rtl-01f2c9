// svm_tb_driver: reusable stimulus and reference checker for seq_svm_top.
//
// Instantiates one classifier whose model is svm_pkg::placeholder_model with
// seed SEED (or, with USE_DEFAULT=1, the classifier with no parameter
// overrides at all, whose default is the same model with seed 1), then runs
// NRUNS predictions on random features. Each prediction is checked against a
// software model written independently of the RTL:
//   * parameters are recomputed from the hash, value k = low W_W bits of
//     mix32(SEED*65536 + k), k = row*(M+1) + col, col 0 = bias;
//   * the row of pair (i,j) is found by enumerating pairs in lexicographic
//     order;
//   * the DDAG starts at (0,N-1), moves to (i+1,j) when b + w.x >= 0 and to
//     (i,j-1) otherwise, until one class is left.
// It also checks the latency, (N-1)*(M+1) cycles counted from the start
// cycle, and counts how often each mechanism occurred: left and right DAG
// moves, back-to-back starts (no idle cycle), starts ignored while busy, and
// how many distinct classes were predicted.
//
// Stimulus is applied and outputs are sampled on the falling clock edge.
module svm_tb_driver
  import svm_pkg::*;
#(
  parameter int unsigned N           = 4,
  parameter int unsigned M           = 6,
  parameter int unsigned W_W         = 8,
  parameter int unsigned X_W         = 4,
  parameter bit          X_SIGNED    = 1'b0,
  parameter int unsigned SEED        = 1,
  parameter int unsigned NRUNS       = 100,
  parameter bit          USE_DEFAULT = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_left,
  output int   n_right,
  output int   n_back_to_back,
  output int   n_ignored_start,
  output int   n_classes_seen
);

  localparam int unsigned NSV   = (N * (N - 1)) / 2;
  localparam int unsigned CLS_W = $clog2(N);
  localparam int unsigned COL_W = $clog2(M + 1);

  logic                  start;
  logic [M-1:0][X_W-1:0] feat;
  logic                  busy, done;
  logic [COL_W-1:0]      fsel;
  logic [CLS_W-1:0]      cls;

  if (USE_DEFAULT) begin : g_default
    seq_svm_top dut (
      .clk(clk), .rst_n(rst_n), .start_i(start), .features_i(feat),
      .busy_o(busy), .feat_sel_o(fsel), .done_o(done), .class_o(cls));
  end else begin : g_param
    seq_svm_top #(
      .N_CLASSES(N), .M(M), .W_W(W_W), .X_W(X_W), .X_SIGNED(X_SIGNED),
      .MODEL((NSV*(M+1)*W_W)'(placeholder_model(NSV * (M + 1), W_W, SEED)))
    ) dut (
      .clk(clk), .rst_n(rst_n), .start_i(start), .features_i(feat),
      .busy_o(busy), .feat_sel_o(fsel), .done_o(done), .class_o(cls));
  end

  // Reference parameter (row r, column c) as a signed integer.
  function automatic int ref_param(input int r, input int c);
    logic [31:0] h;
    logic [W_W-1:0] v;
    h = mix32(SEED * 32'd65536 + 32'(r * (M + 1) + c));
    v = h[W_W-1:0];
    return int'($signed(v));
  endfunction

  function automatic int ref_row(input int i, input int j);
    int r = 0;
    for (int a = 0; a < int'(N); a++)
      for (int b = a + 1; b < int'(N); b++) begin
        if (a == i && b == j) return r;
        r++;
      end
    return -1;
  endfunction

  function automatic int feat_val(input logic [X_W-1:0] v);
    if (X_SIGNED) return int'($signed(v));
    return int'(v);
  endfunction

  bit seen [N];

  initial begin
    int i, j, s, r, exp_cls, cyc, gap, lefts, rights;
    bit back_to_back;
    finished = 0; checks = 0; failures = 0;
    n_left = 0; n_right = 0; n_back_to_back = 0; n_ignored_start = 0;
    n_classes_seen = 0;
    foreach (seen[k]) seen[k] = 0;
    start = 0;
    feat  = '0;
    @(posedge rst_n);
    @(negedge clk);
    back_to_back = 0;
    for (int run = 0; run < int'(NRUNS); run++) begin
      for (int f = 0; f < int'(M); f++) feat[f] = X_W'($urandom);
      // Reference prediction.
      i = 0; j = int'(N) - 1; lefts = 0; rights = 0;
      while (i < j) begin
        r = ref_row(i, j);
        s = ref_param(r, 0);
        for (int c = 1; c <= int'(M); c++) s += ref_param(r, c) * feat_val(feat[c-1]);
        if (s >= 0) begin i++; rights++; end
        else begin j--; lefts++; end
      end
      exp_cls = i;
      // The classifier must be idle before a start.
      checks++;
      if (busy) begin
        failures++;
        $display("FAIL run %0d: busy before start", run);
      end
      start = 1;
      cyc = 1;
      if (back_to_back) n_back_to_back++;
      while (!done && cyc < int'((N - 1) * (M + 1)) + 10) begin
        @(negedge clk);
        cyc++;
        // Occasionally raise start mid-run: it must be ignored.
        start = (cyc > 2 && ($urandom % 16) == 0) ? 1'b1 : 1'b0;
        if (start && !done) n_ignored_start++;
        if (done) start = 0;
      end
      checks += 2;
      if (!done || cyc != int'((N - 1) * (M + 1))) begin
        failures++;
        $display("FAIL run %0d: done after %0d cycles, expected %0d", run, cyc, (N - 1) * (M + 1));
      end
      if (32'(cls) != 32'(exp_cls)) begin
        failures++;
        $display("FAIL run %0d: class %0d, expected %0d", run, cls, exp_cls);
      end
      n_left += lefts; n_right += rights;
      if (!seen[exp_cls]) begin seen[exp_cls] = 1; n_classes_seen++; end
      start = 0;
      @(negedge clk);
      gap = $urandom % 3;
      back_to_back = (gap == 0);
      repeat (gap) @(negedge clk);
    end
    finished = 1;
  end

endmodule
