// tb_fpsa_workload: runs the evaluated operating points on the full-size
// accelerator (no parameter overrides) and measures their throughput.
//
// Part 1 is the precision sweep used for the array's energy measurements:
// equal weight and activation widths (8/8, 4/4, 3/3, 2/2), signed operands,
// and each weight forced to zero with probability one half (50 % weight
// sparsity; a random nonzero draw can also be zero). Each point preloads one weight tile
// and streams 32 input words back to back. Every result is compared with a
// dot product computed here. The streaming time is taken from the
// start-to-done count minus the fixed preload (ROWS) and drain (GROUPS+7)
// cycles. It must equal a_prec cycles per word. The sustained rate
// 2*ROWS*outputs/a_prec operations per cycle is printed. At 2/2 bits it
// must reach the full 4096 operations per cycle (4.1 TOPS at 1 GHz).
//
// Part 2 runs one tile of a mixed-precision pointwise (1x1) convolution of
// the kind found in MobileNetV2: 64 input channels, 6-bit weights (21
// output channels, five of them on the independent shift-add paths) and
// 4-bit unsigned post-ReLU activations over a 7x7 feature map (49 words).
// Weights and activations are generated here at random. The layer sizes
// are illustrative and not taken from a trained network.
module tb_fpsa_workload;
  localparam int R = 64, G = 16, C = 64, NV_MAX = 49;
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
  int a [NV_MAX][R];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fpsa_top dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // Preload one tile of m-bit weights (zero with probability sparse_pct %)
  // and stream nv words of n-bit activations. Returns the stream cycles.
  task automatic run_tile(int m, int n, int nv, bit ws, bit as, int sparse_pct,
                          string name, output int stream_cyc, output int nslots);
    int t0, total, zeros;
    nslots = (m <= 3) ? 64 : (m <= 5) ? 32 : (m <= 7) ? 21 : 16;
    zeros = 0;
    @(negedge clk);
    w_prec = 4'(m); a_prec = 4'(n); w_signed = ws; act_signed = as;
    for (int r = 0; r < R; r++) begin
      for (int k = 0; k < C; k++) begin
        if (k >= nslots || int'($urandom % 100) < sparse_pct) w[r][k] = 0;
        else w[r][k] = ws ? int'($urandom % (1 << m)) - (1 << (m - 1)) : int'($urandom % (1 << m));
        if (k < nslots && w[r][k] == 0) zeros++;
        wb_wdata[8*k +: 8] = 8'(w[r][k]);
      end
      wb_we = 1; wb_waddr = 10'(r);
      @(negedge clk);
    end
    wb_we = 0;
    for (int v = 0; v < nv; v++) begin
      for (int r = 0; r < R; r++) begin
        a[v][r] = as ? int'($urandom % (1 << n)) - (1 << (n - 1)) : int'($urandom % (1 << n));
        ib_wdata[8*r +: 8] = 8'(a[v][r]);
      end
      ib_we = 1; ib_waddr = 10'(v);
      @(negedge clk);
    end
    ib_we = 0;
    load_w = 1; w_base = 0; in_base = 0; n_vec = 11'(nv); out_base = 0;
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done && cyc < t0 + 2000) @(negedge clk);
    total = cyc - t0;
    stream_cyc = total - R - (G + 7);
    chk(stream_cyc, n * nv, $sformatf("%s stream cycles", name));
    for (int v = 0; v < nv; v++) begin
      ob_re = 1; ob_raddr = 6'(v);
      @(negedge clk);
      ob_re = 0;
      for (int k = 0; k < nslots; k++) begin
        longint e = 0;
        for (int r = 0; r < R; r++) e += longint'(w[r][k]) * a[v][r];
        chk(longint'($signed(ob_rdata[k])), e, $sformatf("%s word %0d slot %0d", name, v, k));
      end
    end
    $display("%s: %0d-bit weights x %0d-bit activations, %0d words, %0d of %0d weights zero",
             name, m, n, nv, zeros, R * nslots);
  endtask

  initial begin
    int sc, ns, ops_per_cyc;
    int prec [4] = '{8, 4, 3, 2};
    w_prec = 8; a_prec = 8; w_signed = 1; act_signed = 1; start = 0; load_w = 0;
    w_base = 0; in_base = 0; n_vec = 1; out_base = 0;
    wb_we = 0; ib_we = 0; ob_re = 0; wb_waddr = 0; ib_waddr = 0; wb_wdata = '0; ib_wdata = '0;
    ob_raddr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Part 1: precision sweep with 50 % weight sparsity
    foreach (prec[i]) begin
      run_tile(prec[i], prec[i], 32, 1'b1, 1'b1, 50, $sformatf("sweep %0d/%0d", prec[i], prec[i]),
               sc, ns);
      ops_per_cyc = 2 * R * ns * 32 / sc;
      $display("  sustained %0d operations per cycle (%0d.%03d TOPS at 1 GHz)",
               ops_per_cyc, ops_per_cyc / 1000, ops_per_cyc % 1000);
      chk(ops_per_cyc, 2 * R * ns / prec[i], $sformatf("sweep %0d/%0d rate", prec[i], prec[i]));
      if (prec[i] == 2) chk(ops_per_cyc, 4096, "peak rate at 2/2 bits");
    end
    // Part 2: one pointwise-convolution tile, 6-bit weights x 4-bit activations
    run_tile(6, 4, 49, 1'b1, 1'b0, 0, "pointwise 6/4", sc, ns);
    ops_per_cyc = 2 * R * ns * 49 / sc;
    $display("  sustained %0d operations per cycle over %0d outputs per word", ops_per_cyc, ns);
    chk(ns, 21, "outputs per word at 6 bits incl. independent paths");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
