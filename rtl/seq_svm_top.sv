// seq_svm_top: sequential One-vs-One linear SVM classifier.
//
// The whole multi-class SVM prediction is folded over one multiply-accumulate
// unit. Three parts work in step, as in the paper's architecture figure:
//  - ddag_control picks the support vector (row index) from the current node
//    of the OvO decision DAG and moves to the next node on each result;
//  - svm_param_mux holds the model as hardwired constants behind a
//    multiplexer selected by row (support vector) and column (parameter);
//  - sv_engine walks the columns with its counter (bias, then M weights),
//    multiplies each weight by its input feature, accumulates, and after M+1
//    cycles reports ready with y = (sum >= 0).
// A prediction takes (N_CLASSES-1)*(M+1) cycles: 9*18 = 162 for the default
// Pendigits-sized configuration.
//
// Defaults are the paper's Pendigits classifier dimensions: 10 classes,
// 17 input features of 4 bits, 45 support vectors of 18 8-bit parameters.
// The default MODEL is a deterministic stand-in (the trained weights are not
// published with the architecture); pass the real quantised model through
// MODEL, laid out as described in svm_param_mux.
//
// Interface and timing: features_i must be held stable from start_i until
// done_o. start_i while idle starts a prediction at once (that cycle is the
// first bias cycle); done_o is high for one cycle, with class_o valid in that
// cycle, (N_CLASSES-1)*(M+1)-1 cycles after the start cycle. feat_sel_o is
// the feature index in use (0 = bias cycle, c = feature c), for a front end
// that shares one ADC between the sensors. busy_o is high while running.
module seq_svm_top
  import svm_pkg::*;
#(
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned M         = 17,
  parameter int unsigned W_W       = 8,
  parameter int unsigned X_W       = 4,
  parameter bit          X_SIGNED  = 1'b0,
  parameter int unsigned ACC_W     = safe_acc_width(W_W, X_W, M),
  parameter int unsigned N_SV      = num_sv(N_CLASSES),
  parameter logic [N_SV*(M+1)*W_W-1:0] MODEL =
      (N_SV*(M+1)*W_W)'(placeholder_model(N_SV * (M + 1), W_W, 1)),
  parameter int unsigned CLS_W     = $clog2(N_CLASSES),
  parameter int unsigned COL_W     = $clog2(M + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start_i,
  input  logic [M-1:0][X_W-1:0] features_i,  // index 0 = feature 1
  output logic                  busy_o,
  output logic [COL_W-1:0]      feat_sel_o,
  output logic                  done_o,
  output logic [CLS_W-1:0]      class_o
);

  localparam int unsigned ROW_W = (N_SV > 1) ? $clog2(N_SV) : 1;

  logic                  run;
  logic [ROW_W-1:0]      row;
  logic [COL_W-1:0]      col;
  logic signed [W_W-1:0] param;
  logic                  ready;
  logic                  y;
  logic signed [ACC_W-1:0] sum_unused;

  ddag_control #(
    .N_CLASSES (N_CLASSES),
    .N_SV      (N_SV),
    .ROW_W     (ROW_W),
    .CLS_W     (CLS_W)
  ) u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start_i (start_i),
    .ready_i (ready),
    .y_i     (y),
    .run_o   (run),
    .row_o   (row),
    .done_o  (done_o),
    .class_o (class_o)
  );

  svm_param_mux #(
    .N_SV  (N_SV),
    .M     (M),
    .W_W   (W_W),
    .ROW_W (ROW_W),
    .COL_W (COL_W),
    .MODEL (MODEL)
  ) u_mem (
    .row_i   (row),
    .col_i   (col),
    .param_o (param)
  );

  sv_engine #(
    .M        (M),
    .W_W      (W_W),
    .X_W      (X_W),
    .X_SIGNED (X_SIGNED),
    .ACC_W    (ACC_W),
    .COL_W    (COL_W)
  ) u_eng (
    .clk     (clk),
    .rst_n   (rst_n),
    .en_i    (run),
    .param_i (param),
    .x_i     (features_i),
    .col_o   (col),
    .ready_o (ready),
    .y_o     (y),
    .sum_o   (sum_unused)
  );

  assign busy_o     = run;
  assign feat_sel_o = col;

endmodule
