// tb_svm_param_mux: checks the bespoke parameter multiplexer at its default
// (Pendigits-sized) configuration: 45 rows of 18 columns of 8 bits, holding
// the stand-in model. Every (row, column) is read and compared with the
// value recomputed from the hash directly, low 8 bits of
// mix32(65536 + row*18 + col), so the check does not depend on the flat
// layout code of the module. Rows and columns out of range must read 0.
module tb_svm_param_mux;
  import svm_pkg::*;

  localparam int unsigned N_SV = 45, M = 17, W_W = 8;

  logic [5:0] row;
  logic [4:0] col;
  logic signed [7:0] param;
  int checks = 0, failures = 0;

  svm_param_mux dut (.row_i(row), .col_i(col), .param_o(param));

  initial begin
    logic [31:0] h;
    for (int r = 0; r < 64; r++) begin
      for (int c = 0; c < 32; c++) begin
        row = 6'(r); col = 5'(c);
        #1;
        checks++;
        if (r < int'(N_SV) && c <= int'(M)) begin
          h = mix32(32'd65536 + 32'(r * (M + 1) + c));
          if (param !== $signed(h[7:0])) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d col %0d: %0d, expected %0d", r, c, param, $signed(h[7:0]));
          end
        end else if (param != 0) begin
          failures++;
          if (failures < 10) $display("FAIL out-of-range row %0d col %0d: %0d", r, c, param);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
