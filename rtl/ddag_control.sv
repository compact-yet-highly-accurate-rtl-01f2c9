// ddag_control: control unit that walks the One-vs-One decision DAG.
//
// OvO with N classes has N(N-1)/2 support vectors, one per class pair. As in
// the paper, they are organised as a decision-directed acyclic graph (DDAG):
// every FSM state is a pair (i,j), i<j, of the first and last class still in
// the running, linked to the support vector S_{i,j}. When the engine reports
// y=1 (sum >= 0) class j prevails and the DAG moves right, to (i+1,j); on y=0
// class i prevails and it moves left, to (i,j-1). After N-1 decisions one
// class is left: in a state with j = i+1 the decision names the predicted
// class directly. The start state is (0,N-1). So the hardware is one state
// register of clog2(N(N-1)/2) bits, a two-way MUX between two hardcoded next
// states per state, and a hardcoded row index per state; this follows the
// paper and its Fig. 2. The state code is chosen equal to the row index
// (lexicographic pair order, svm_pkg), so the row index is the state itself.
//
// Interface and timing (this design's choice; the paper gives no handshake):
//  - start_i, sampled while idle, begins a classification; that very cycle
//    is already the bias cycle of the first support vector (run_o = 1).
//  - run_o enables the engine; it stays high for (N-1)*(M+1) cycles.
//  - done_o is high for one cycle, in the last engine cycle, with class_o
//    (0-based) valid in that cycle only; the FSM is back at the start state
//    on the next cycle and a new start_i may be given there.
// A one-bit busy flag is the only storage besides the state register; no
// register holds the class, which is used as it is decided.
module ddag_control
  import svm_pkg::*;
#(
  parameter int unsigned N_CLASSES = 10,  // Pendigits
  parameter int unsigned N_SV      = num_sv(N_CLASSES),
  parameter int unsigned ROW_W     = (N_SV > 1) ? $clog2(N_SV) : 1,
  parameter int unsigned CLS_W     = $clog2(N_CLASSES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,   // begin a classification (while idle)
  input  logic             ready_i,   // engine finished a support vector
  input  logic             y_i,       // engine output: 1 = second class of the pair wins
  output logic             run_o,     // engine enable
  output logic [ROW_W-1:0] row_o,     // support vector select
  output logic             done_o,    // prediction valid this cycle
  output logic [CLS_W-1:0] class_o    // predicted class
);

  localparam logic [ROW_W-1:0] ROOT = ROW_W'(pair_index(N_CLASSES, 0, N_CLASSES - 1));

  // Hardcoded per-state constants: the two next states, whether the state is
  // on the last level, and its two classes.
  logic [ROW_W-1:0] next_l [N_SV];
  logic [ROW_W-1:0] next_r [N_SV];
  logic             last   [N_SV];
  logic [CLS_W-1:0] cls_i  [N_SV];
  logic [CLS_W-1:0] cls_j  [N_SV];

  for (genvar s = 0; s < N_SV; s++) begin : g_state
    localparam int unsigned I = pair_first(N_CLASSES, s);
    localparam int unsigned J = pair_second(N_CLASSES, s);
    assign cls_i[s] = CLS_W'(I);
    assign cls_j[s] = CLS_W'(J);
    if (J == I + 1) begin : g_leaf
      assign last[s]   = 1'b1;
      assign next_l[s] = ROOT;
      assign next_r[s] = ROOT;
    end else begin : g_inner
      assign last[s]   = 1'b0;
      assign next_l[s] = ROW_W'(pair_index(N_CLASSES, I, J - 1));
      assign next_r[s] = ROW_W'(pair_index(N_CLASSES, I + 1, J));
    end
  end

  logic [ROW_W-1:0] state_q;
  logic             busy_q;

  assign run_o   = busy_q || start_i;
  assign row_o   = state_q;
  assign done_o  = ready_i && last[state_q];
  assign class_o = y_i ? cls_j[state_q] : cls_i[state_q];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= ROOT;
      busy_q  <= 1'b0;
    end else if (ready_i) begin
      if (last[state_q]) begin
        state_q <= ROOT;
        busy_q  <= 1'b0;
      end else begin
        state_q <= y_i ? next_r[state_q] : next_l[state_q];
        busy_q  <= 1'b1;
      end
    end else if (start_i) begin
      busy_q <= 1'b1;
    end
  end

  a_state_range : assert property (@(posedge clk) disable iff (!rst_n) 32'(state_q) < N_SV);
  a_ready_when_run : assert property (@(posedge clk) disable iff (!rst_n) ready_i |-> run_o);

endmodule
