// tb_pe_group: self-checking test of one group of four columns (64 rows).
// For every weight precision 2..8 the test decomposes random weights into
// column slices itself (arithmetic split, top slice signed), sets each
// column's loading mode and S, shifts 64 rows in, and streams words of
// random N-bit activations back to back. Each group output must equal the
// dot product of its weight with the activations, and arrive three cycles
// after the word's last bit entered the group; column 0's raw result is
// checked too (used by the independent path at 6/7 bits). The systolic
// output must repeat the input one cycle later.
module tb_pe_group;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  logic w_shift_en, act_signed;
  col_cfg_t [3:0] col_cfg;
  logic [3:0][2:0] w_in;
  sa_cfg_t sa_cfg;
  logic [R-1:0] a_in, a_out;
  logic a_valid_in, a_first_in, a_last_in, a_valid_out, a_first_out, a_last_out;
  logic signed [acc_w(R)-1:0] c0_res;
  logic c0_valid, out_valid;
  logic signed [out_w(R)-1:0] o [4];
  int checks = 0, failures = 0;
  int cyc = 0;
  int nout;                       // outputs used at this precision
  typedef longint res_t [5];
  longint exp_q [$];            // 4 outputs + column 0 per word
  int     due_q [$];              // cycle the outputs are due

  // stimulus state
  int nl, nw, wpc;                // slices per weight, weights, columns per weight
  int w [R][4];                   // weights per row
  int sl [R][4];                  // slice value per row and column
  int n;                          // activation bits of the current word
  int a [R];                      // activations of the current word
  res_t e;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  pe_group #(.ROWS(R)) dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // systolic pass-through
  logic [R-1:0] a_in_d;
  logic v_d;
  always @(posedge clk) begin
    a_in_d <= a_in;
    v_d <= a_valid_in;
  end

  always @(negedge clk) begin
    if (rst_n && cyc > 2) begin
      if (a_out !== a_in_d || a_valid_out !== v_d) begin
        checks++; failures++; $display("FAIL systolic output");
      end
    end
    if (out_valid) begin
      res_t x;
      for (int i = 0; i < 5; i++) x[i] = exp_q.pop_front();
      chk(cyc, due_q.pop_front(), "latency");
      for (int i = 0; i < nout; i++) chk(o[i], x[i], "group out");
      chk(c0_res, x[4], "column 0");
    end
  end

  initial begin
    w_shift_en = 0; act_signed = 0; col_cfg = '0; w_in = '0; sa_cfg = '0;
    a_in = '0; a_valid_in = 0; a_first_in = 0; a_last_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 2; m <= 8; m++) begin
      nl = (m <= 3) ? 1 : (m <= 5) ? 2 : (m <= 7) ? 3 : 4;
      nw = (m <= 3) ? 4 : (m <= 5) ? 2 : 1;
      wpc = nl;
      nout = nw;
      sa_cfg.sh0 = (m == 8 || m == 5 || m == 4);
      sa_cfg.sh1 = (m >= 4);
      sa_cfg.sh2 = (m >= 6);
      sa_cfg.c0_path = (m == 6 || m == 7);
      sa_cfg.out_mode = (m <= 3) ? OUT_COL4 : (m <= 5) ? OUT_PAIR : OUT_ONE;
      // column configuration and slices
      for (int c = 0; c < 4; c++) begin
        int first_col, lvl;
        bit top;
        if (m == 6 || m == 7) begin
          first_col = 1;
          top = (c == 1);
        end else begin
          first_col = (c / wpc) * wpc;
          top = (c == first_col);
        end
        col_cfg[c].mode3 = top && (m % 2 == 1);
        col_cfg[c].s = top && (m % 2 == 0);
      end
      for (int r = 0; r < R; r++) begin
        for (int k = 0; k < nw; k++) w[r][k] = int'($urandom % (1 << m)) - (1 << (m - 1));
        for (int c = 0; c < 4; c++) begin
          int k, lvl, base;
          if (m == 6 || m == 7) begin
            if (c == 0) begin sl[r][c] = int'($urandom % 4); continue; end
            k = 0; base = 1;
          end else begin
            k = c / wpc; base = k * wpc;
          end
          lvl = nl - 1 - (c - base);
          if (c == base) sl[r][c] = w[r][k] >>> (2 * lvl);
          else sl[r][c] = (w[r][k] >>> (2 * lvl)) & 3;
        end
      end
      // shift in: bottom row first
      @(negedge clk);
      w_shift_en = 1;
      for (int r = R - 1; r >= 0; r--) begin
        for (int c = 0; c < 4; c++) w_in[c] = 3'(sl[r][c]);
        @(negedge clk);
      end
      w_shift_en = 0;
      for (int wd = 0; wd < 12; wd++) begin
        n = 2 + ($urandom % 7);
        act_signed = 1'(wd % 2);
        for (int i = 0; i < 5; i++) e[i] = 0;
        for (int r = 0; r < R; r++) begin
          a[r] = act_signed ? int'($urandom % (1 << n)) - (1 << (n - 1)) : int'($urandom % (1 << n));
          for (int k = 0; k < nw; k++) e[k] += longint'(w[r][k]) * a[r];
          e[4] += longint'(sl[r][0]) * a[r];
        end
        if (m != 6 && m != 7) e[4] = 0;
        for (int t = 0; t < n; t++) begin
          for (int r = 0; r < R; r++) a_in[r] = 1'((a[r] >> t) & 1);
          a_valid_in = 1; a_first_in = (t == 0); a_last_in = (t == n - 1);
          if (t == n - 1) begin
            // column 0's check only applies to its own slice at 6/7 bits
            if (m != 6 && m != 7) begin
              e[4] = 0;
              for (int r = 0; r < R; r++) e[4] += longint'(sl[r][0]) * a[r];
            end
            for (int i = 0; i < 5; i++) exp_q.push_back(e[i]);
            due_q.push_back(cyc + 3);
          end
          @(negedge clk);
        end
        // activations change sign-treatment per word: hold act_signed until used
        a_valid_in = 0; a_first_in = 0; a_last_in = 0;
        repeat (3) @(negedge clk);
      end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
