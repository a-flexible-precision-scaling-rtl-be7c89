// tb_fpsa_top: end-to-end test of the whole accelerator at its default size
// (64x64 array, 16 groups, 64 KB weight and input buffers, 16 KB output
// buffer). For every weight precision 2..8 it writes random weights and
// activations into the buffers through the host ports, runs a command that
// preloads the weights and streams several words back to back, then reruns
// with new activations on the preloaded weights (weight-stationary reuse).
// All result slots are read back and compared with dot products computed
// here; the cycle count from start to done is checked against
// ROWS + a_prec*n_vec + GROUPS + 7 (one word every a_prec cycles).
// It counts how often each mechanism occurred (each precision, 3-bit
// loading mode, independent-path results, signed and unsigned weights and
// activations, back-to-back words, weight reuse) and fails any that never
// did.
module tb_fpsa_top;
  localparam int R = 64, G = 16, C = 64;
  logic clk = 0, rst_n = 0;
  logic [3:0] w_prec, a_prec;
  logic w_signed, act_signed, start, load_w, busy, done;
  logic [9:0] w_base, in_base;
  logic [10:0] n_vec;
  logic [5:0] out_base;
  logic wb_we, ib_we, ob_re;
  logic [9:0] wb_waddr, ib_waddr;
  logic [C*8-1:0] wb_wdata;
  logic [R*8-1:0] ib_wdata;
  logic [5:0] ob_raddr;
  logic [C-1:0][31:0] ob_rdata;
  int checks = 0, failures = 0, cyc = 0;
  int w [R][C];
  int a [8][R];
  // mechanism counters
  int prec_runs [9];
  int mode3_runs = 0, path_results = 0, signed_w_runs = 0, unsigned_w_runs = 0;
  int signed_a_words = 0, unsigned_a_words = 0, b2b_runs = 0, reuse_runs = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fpsa_top dut (.*);

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // One command: optional weight load, nv words of n-bit activations.
  task automatic run_cmd(int m, int n, int nv, bit lw, bit ws, bit as, int obase);
    int nslots, t0, wb, ib;
    nslots = (m <= 3) ? 64 : (m <= 5) ? 32 : (m <= 7) ? 21 : 16;
    wb = int'($urandom % 900);
    ib = int'($urandom % 900);
    @(negedge clk);
    w_prec = 4'(m); a_prec = 4'(n); w_signed = ws; act_signed = as;
    if (lw) begin
      for (int r = 0; r < R; r++) begin
        for (int k = 0; k < C; k++) begin
          w[r][k] = (k >= nslots) ? 0 :
                    ws ? int'($urandom % (1 << m)) - (1 << (m - 1)) : int'($urandom % (1 << m));
          wb_wdata[8*k +: 8] = 8'(w[r][k]);
        end
        wb_we = 1; wb_waddr = 10'(wb + r);
        @(negedge clk);
      end
      wb_we = 0;
    end
    for (int v = 0; v < nv; v++) begin
      for (int r = 0; r < R; r++) begin
        a[v][r] = as ? int'($urandom % (1 << n)) - (1 << (n - 1)) : int'($urandom % (1 << n));
        ib_wdata[8*r +: 8] = 8'(a[v][r]);
      end
      ib_we = 1; ib_waddr = 10'(ib + v);
      @(negedge clk);
    end
    ib_we = 0;
    load_w = lw; w_base = 10'(wb); in_base = 10'(ib); n_vec = 11'(nv); out_base = 6'(obase);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done && cyc < t0 + 1000) @(negedge clk);
    chk(cyc - t0, (lw ? R : 0) + n * nv + G + 7, "start-to-done cycles");
    // read back
    for (int v = 0; v < nv; v++) begin
      ob_re = 1; ob_raddr = 6'(obase + v);
      @(negedge clk);
      ob_re = 0;
      for (int k = 0; k < nslots; k++) begin
        longint e = 0;
        for (int r = 0; r < R; r++) e += longint'(w[r][k]) * a[v][r];
        chk(longint'($signed(ob_rdata[k])), e, $sformatf("m=%0d n=%0d word %0d slot %0d", m, n, v, k));
        if (k >= G && (m == 6 || m == 7)) path_results++;
      end
    end
    prec_runs[m]++;
    if (m % 2 == 1) mode3_runs++;
    if (ws) signed_w_runs++; else unsigned_w_runs++;
    if (as) signed_a_words += nv; else unsigned_a_words += nv;
    if (nv > 1) b2b_runs++;
    if (!lw) reuse_runs++;
  endtask

  task automatic need(int count, string what);
    checks++;
    $display("mechanism %-28s occurred %0d times", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endtask

  initial begin
    w_prec = 8; a_prec = 8; w_signed = 1; act_signed = 1; start = 0; load_w = 0;
    w_base = 0; in_base = 0; n_vec = 1; out_base = 0;
    wb_we = 0; ib_we = 0; ob_re = 0; wb_waddr = 0; ib_waddr = 0; wb_wdata = '0; ib_wdata = '0;
    ob_raddr = 0;
    for (int i = 0; i < 9; i++) prec_runs[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 2; m <= 8; m++) begin
      // preload and stream signed activations
      run_cmd(m, 2 + (m * 3) % 7, 4, 1'b1, (m % 2 == 1) || (m != 4), 1'b1, 0);
      // reuse the weights with unsigned activations of another width
      run_cmd(m, 2 + (m * 5 + 1) % 7, 3, 1'b0, (m % 2 == 1) || (m != 4), 1'b0, 8);
    end
    // 8-bit x 8-bit and 2-bit x 2-bit, the paper's corner cases
    run_cmd(8, 8, 8, 1'b1, 1'b1, 1'b1, 16);
    run_cmd(2, 2, 8, 1'b1, 1'b1, 1'b1, 24);
    for (int m = 2; m <= 8; m++) need(prec_runs[m], $sformatf("weight precision %0d", m));
    need(mode3_runs, "3-bit loading mode");
    need(path_results, "independent shift-add path");
    need(signed_w_runs, "signed weights");
    need(unsigned_w_runs, "unsigned weights");
    need(signed_a_words, "signed activations (SF)");
    need(unsigned_a_words, "unsigned activations");
    need(b2b_runs, "back-to-back words");
    need(reuse_runs, "weight-stationary reuse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
