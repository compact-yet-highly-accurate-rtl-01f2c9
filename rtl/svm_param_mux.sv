// svm_param_mux: bespoke multiplexer storage for the SVM model parameters.
//
// Instead of a memory array, every model parameter is a constant wired to a
// multiplexer input; the row index (which support vector) and the column
// index (which parameter of it) are the select signals. Row r holds the
// support vector of class pair r (lexicographic pair order, see svm_pkg);
// column 0 is its bias and columns 1..M its weights w_1..w_M. That one
// support vector occupies one row, that the column comes from the engine's
// counter and the row from the control unit follows the paper; the bias in
// column 0 follows from the engine fetching the bias in its first cycle.
//
// MODEL is a flat vector: parameter (r, c) sits at bits
// [(r*(M+1)+c)*W_W +: W_W], two's complement. Its default is a deterministic
// stand-in model (svm_pkg::placeholder_model), because the trained weights are
// not part of the published architecture.
//
// Interface and timing: purely combinational, param_o follows row_i/col_i
// in the same cycle. A row or column out of range reads as zero.
module svm_param_mux
  import svm_pkg::*;
#(
  parameter int unsigned N_SV  = 45,  // support vectors (rows), Pendigits
  parameter int unsigned M     = 17,  // weights per support vector, Pendigits
  parameter int unsigned W_W   = 8,   // bits per parameter, Pendigits
  parameter int unsigned ROW_W = (N_SV > 1) ? $clog2(N_SV) : 1,
  parameter int unsigned COL_W = $clog2(M + 1),
  parameter logic [N_SV*(M+1)*W_W-1:0] MODEL =
      (N_SV*(M+1)*W_W)'(placeholder_model(N_SV * (M + 1), W_W, 1))
) (
  input  logic [ROW_W-1:0]      row_i,    // support vector select
  input  logic [COL_W-1:0]      col_i,    // parameter select (0 = bias)
  output logic signed [W_W-1:0] param_o   // selected bias or weight
);

  localparam int unsigned NCOL = M + 1;
  localparam int unsigned IDX_W = $clog2(N_SV * NCOL + 1);

  // Flat index of (row, column); the hardwired vector MODEL is then
  // multiplexed down to one W_W-bit parameter.
  logic [IDX_W-1:0] idx;

  always_comb begin
    idx     = IDX_W'(row_i) * IDX_W'(NCOL) + IDX_W'(col_i);
    param_o = '0;
    if (32'(row_i) < N_SV && 32'(col_i) < NCOL)
      param_o = MODEL[32'(idx) * W_W +: W_W];
  end

endmodule
