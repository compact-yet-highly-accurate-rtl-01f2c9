// sv_engine: single-MAC support vector engine.
//
// Evaluates one linear support vector, y = (b + sum_{i=1..M} w_i*x_i >= 0),
// by folding it over one multiplier and one adder. A small counter is both
// the storage's column index and the engine's sequencer:
//   counter = 0      : the bias (column 0) is loaded into the accumulator
//   counter = 1..M   : weight w_c (column c) times input x_c is accumulated
//   counter = M      : ready_o is high and y_o is the inverted sign of the
//                      adder output, i.e. of the complete sum b + sum w_i*x_i
// so one support vector takes exactly M+1 cycles and the next one starts
// (its bias cycle) in the cycle right after ready_o. This cycle split, the
// bias-first order, the counter as column index and "ready with the inverted
// sign" follow the paper; the sign being taken at the adder output (so that
// no extra cycle is spent after the last product) is this design's reading of
// the paper's M+1 cycles per support vector.
//
// Inputs x_i are the digitised features, all held stable during a
// classification and selected by the counter (feature c-1 in cycle c).
// X_SIGNED=0 treats them as unsigned fixed point (the paper normalises to
// [0,1] and truncates to 4 bits); X_SIGNED=1 as two's complement (as in the
// paper's worked example). Weights and bias are two's complement W_W bits;
// the bias is taken to be already scaled to the product's fixed-point
// format. ACC_W defaults to a width that cannot overflow; the paper sizes it
// by profiling, and a narrower ACC_W simply wraps.
//
// Interface: en_i high runs the engine; en_i low holds the counter at 0 so
// the next run starts with a bias cycle. Synchronous active-low reset.
module sv_engine
  import svm_pkg::*;
#(
  parameter int unsigned M        = 17,  // input features / weights
  parameter int unsigned W_W      = 8,   // weight and bias bits
  parameter int unsigned X_W      = 4,   // input feature bits
  parameter bit          X_SIGNED = 1'b0,
  parameter int unsigned ACC_W    = safe_acc_width(W_W, X_W, M),
  parameter int unsigned COL_W    = $clog2(M + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,      // run (one support vector per M+1 cycles)
  input  logic signed [W_W-1:0]   param_i,   // bias or weight from storage
  input  logic [M-1:0][X_W-1:0]   x_i,       // input features x_1..x_M (index 0 = x_1)
  output logic [COL_W-1:0]        col_o,     // column index (parameter select)
  output logic                    ready_o,   // support vector complete this cycle
  output logic                    y_o,       // 1 if b + sum w*x >= 0 (valid with ready_o)
  output logic signed [ACC_W-1:0] sum_o      // adder output (observability)
);

  localparam int unsigned PROD_W = W_W + X_W + 1;
  localparam logic [COL_W-1:0] LAST = COL_W'(M);

  logic [COL_W-1:0]        cnt_q;
  logic signed [ACC_W-1:0] acc_q;
  logic [X_W-1:0]          x_sel;
  logic signed [X_W:0]     x_ext;
  logic signed [PROD_W-1:0] prod;
  logic signed [ACC_W-1:0] sum;

  // Input mux: column c multiplies feature c (x_i index c-1).
  always_comb begin
    x_sel = '0;
    if (cnt_q != '0 && 32'(cnt_q) <= M) x_sel = x_i[cnt_q - COL_W'(1)];
    x_ext = X_SIGNED ? {x_sel[X_W-1], x_sel} : {1'b0, x_sel};
  end

  assign prod = PROD_W'(param_i) * PROD_W'(x_ext);
  assign sum  = acc_q + ACC_W'(prod);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q <= '0;
      acc_q <= '0;
    end else if (en_i) begin
      cnt_q <= (cnt_q == LAST) ? '0 : cnt_q + COL_W'(1);
      // Bias mux: the first cycle initialises the accumulator.
      acc_q <= (cnt_q == '0) ? ACC_W'(param_i) : sum;
    end else begin
      cnt_q <= '0;
    end
  end

  assign col_o   = cnt_q;
  assign ready_o = en_i && (cnt_q == LAST);
  assign y_o     = ~sum[ACC_W-1];
  assign sum_o   = sum;

  // The counter never leaves 0..M.
  a_cnt_range : assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt_q) <= M);

endmodule
