// tb_weight_decomposer: self-checking test of the weight rearrangement.
// For every precision 2..8, random weights fill the slots; the column
// slices produced are read back, each interpreted the way the array will
// use it (3-bit signed for the odd top slice, 2-bit signed for an even top
// slice, 2-bit unsigned below) and recombined with the shift amounts of
// Table I along the documented slot-to-column mapping. The recombined
// value must equal the original weight; unused columns must be zero.
module tb_weight_decomposer;
  import fpsa_pkg::*;
  localparam int G = 16;
  logic [3:0] w_prec;
  logic [G*4-1:0][7:0] w_raw;
  logic [G*4-1:0][2:0] w_cols;
  int checks = 0, failures = 0;

  weight_decomposer #(.GROUPS(G)) dut (.w_prec, .w_raw, .w_cols);

  function automatic int sval(int g, int c, bit top, int m);
    logic [2:0] v = w_cols[g*4+c];
    if (top && m % 2 == 1) return int'($signed(v));
    if (top) return int'($signed(v[1:0]));
    checks++;
    if (v[2] !== 1'b0) begin failures++; $display("FAIL lower slice bit2 set"); end
    return int'(v[1:0]);
  endfunction

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s m=%0d got %0d exp %0d", what, w_prec, got, exp); end
  endtask

  initial begin
    for (int m = 2; m <= 8; m++) begin
      for (int it = 0; it < 20; it++) begin
        int w [G*4];
        w_prec = 4'(m);
        for (int k = 0; k < G * 4; k++) begin
          w[k] = int'($urandom % (1 << m)) - (1 << (m - 1));
          w_raw[k] = 8'(w[k]);
        end
        #1;
        for (int g = 0; g < G; g++) begin
          case (m)
            2, 3: for (int c = 0; c < 4; c++) chk(sval(g, c, 1, m), w[4*g+c], "w23");
            4, 5: for (int i = 0; i < 2; i++)
                    chk(4 * sval(g, 2*i, 1, m) + sval(g, 2*i+1, 0, m), w[2*g+i], "w45");
            6, 7: chk(16 * sval(g, 1, 1, m) + 4 * sval(g, 2, 0, m) + sval(g, 3, 0, m), w[g], "w67");
            default: chk(64 * sval(g, 0, 1, m) + 16 * sval(g, 1, 0, m) + 4 * sval(g, 2, 0, m)
                         + sval(g, 3, 0, m), w[g], "w8");
          endcase
        end
        if (m == 6 || m == 7) begin
          for (int p = 0; p < G / 3; p++)
            chk(16 * sval(3*p, 0, 1, m) + 4 * sval(3*p+1, 0, 0, m) + sval(3*p+2, 0, 0, m),
                w[G+p], "path");
          chk(int'(w_cols[(G-1)*4]), 0, "idle column");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
