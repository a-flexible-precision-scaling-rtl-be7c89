// tb_shift_adder: self-checking test of a group's Shifter&Adder.
// For every weight precision 2..8 the shifter settings of Table I are
// applied (written out here independently of prec_config), random column
// results are presented, and the registered outputs are compared with the
// weighted sums: four column values (2/3-bit), two pairs 4*c0+c1 and
// 4*c2+c3 (4/5-bit), 64*c0+16*c1+4*c2+c3 (8-bit) or 16*c1+4*c2+c3 with
// column 0 excluded (6/7-bit). out_valid must follow in_valid by one cycle.
module tb_shift_adder;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  sa_cfg_t cfg;
  logic signed [acc_w(R)-1:0] r [GCOLS];
  logic signed [out_w(R)-1:0] o [GCOLS];
  logic in_valid, out_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shift_adder #(.ROWS(R)) dut (.clk, .rst_n, .cfg, .r, .in_valid, .o, .out_valid);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    in_valid = 0;
    cfg = '0;
    for (int i = 0; i < 4; i++) r[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 2; m <= 8; m++) begin
      //                 8  7  6  5  4  3  2   (Table I)
      cfg.sh0 = (m == 8 || m == 5 || m == 4);
      cfg.sh1 = (m >= 4);
      cfg.sh2 = (m >= 6);
      cfg.c0_path = (m == 6 || m == 7);
      cfg.out_mode = (m <= 3) ? OUT_COL4 : (m <= 5) ? OUT_PAIR : OUT_ONE;
      for (int it = 0; it < 50; it++) begin
        longint v [4];
        for (int i = 0; i < 4; i++) begin
          v[i] = longint'($urandom % 65536) - 32768;   // reachable column range
          r[i] = acc_w(R)'(v[i]);
        end
        @(negedge clk);
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        chk(out_valid, 1, "out_valid");
        if (m <= 3) begin
          for (int i = 0; i < 4; i++) chk(o[i], v[i], "col");
        end else if (m <= 5) begin
          chk(o[0], 4 * v[0] + v[1], "pair0");
          chk(o[1], 4 * v[2] + v[3], "pair1");
        end else if (m == 8) begin
          chk(o[0], 64 * v[0] + 16 * v[1] + 4 * v[2] + v[3], "total8");
        end else begin
          chk(o[0], 16 * v[1] + 4 * v[2] + v[3], "total67");
        end
        @(negedge clk);
        chk(out_valid, 0, "out_valid low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
