// tb_prec_config: self-checking test of the precision decoder.
// Checks the shifter settings against Table I and, for every column of
// every group, the loading mode and S bit against the decomposition of
// Table I (top slice first, 3-bit top slice for odd widths, column 0 of
// groups 3p feeding the independent paths at 6/7 bits).
module tb_prec_config;
  import fpsa_pkg::*;
  localparam int G = 16;
  logic [3:0] w_prec;
  logic w_signed, path_en;
  col_cfg_t [G*GCOLS-1:0] col_cfg;
  sa_cfg_t sa_cfg;
  int checks = 0, failures = 0;
  // Table I rows, precision 8 down to 2
  int sh0_t [7] = '{2, 0, 0, 2, 2, 0, 0};
  int sh1_t [7] = '{2, 2, 2, 2, 2, 0, 0};
  int sh2_t [7] = '{4, 4, 4, 0, 0, 0, 0};

  prec_config #(.GROUPS(G)) dut (.w_prec, .w_signed, .col_cfg, .sa_cfg, .path_en);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s m=%0d: got %0d exp %0d", what, w_prec, got, exp);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 2; m <= 8; m++) begin
      for (int sg = 0; sg < 2; sg++) begin
        w_prec = 4'(m);
        w_signed = 1'(sg);
        #1;
        chk(sa_cfg.sh0 ? 2 : 0, sh0_t[8-m], "sh0");
        chk(sa_cfg.sh1 ? 2 : 0, sh1_t[8-m], "sh1");
        chk(sa_cfg.sh2 ? 4 : 0, sh2_t[8-m], "sh2");
        chk(int'(path_en), int'(m == 6 || m == 7), "path_en");
        for (int g = 0; g < G; g++) for (int c = 0; c < 4; c++) begin
          int top;
          case (m)
            2, 3: top = 1;
            4, 5: top = int'(c == 0 || c == 2);
            6, 7: top = int'(c == 1 || (c == 0 && g % 3 == 0 && g < 15));
            default: top = int'(c == 0);
          endcase
          chk(int'(col_cfg[g*4+c].mode3), int'(top == 1 && m % 2 == 1), "mode3");
          chk(int'(col_cfg[g*4+c].s), int'(top == 1 && m % 2 == 0 && sg == 1), "s");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
