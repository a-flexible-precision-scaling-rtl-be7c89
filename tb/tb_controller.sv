// tb_controller: self-checking test of the command sequencer, at a reduced
// size (8 rows, 4 groups, 16 slots, 64-word buffers). For random commands
// it checks, cycle by cycle, the weight-buffer read addresses (top row
// last), that the weight shift follows each read by one cycle, that
// input-buffer reads come exactly every a_prec cycles with rising
// addresses, that the serializer load follows each read by one cycle, the
// cycle of done, and the per-slot output-buffer write addresses.
module tb_controller;
  localparam int R = 8, G = 4, S = 16;
  logic clk = 0, rst_n = 0;
  logic start, load_w, busy, done, wb_re, w_shift_en, ib_re, ser_load;
  logic [5:0] w_base, in_base, wb_raddr, ib_raddr;
  logic [6:0] n_vec;
  logic [3:0] out_base, a_prec;
  logic [S-1:0] slot_valid, ob_we;
  logic [S-1:0][3:0] ob_waddr;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  controller #(.ROWS(R), .SLOTS(S), .GROUPS(G), .WB_DEPTH(64), .IB_DEPTH(64), .OB_DEPTH(16)) dut (.*);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d (cycle %0d)", what, got, exp, cyc); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [S];

  initial begin
    start = 0; load_w = 0; w_base = 0; in_base = 0; n_vec = 1; out_base = 0; a_prec = 8;
    slot_valid = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      int n, nv, t0, prev_wb, prev_ib, rd_seen, expect_done;
      @(negedge clk);
      n = 2 + ($urandom % 7);
      nv = 1 + ($urandom % 5);
      load_w = (it % 3 != 2);
      w_base = 6'($urandom); in_base = 6'($urandom); out_base = 4'($urandom);
      n_vec = 7'(nv); a_prec = 4'(n);
      start = 1;
      t0 = cyc;
      for (int s = 0; s < S; s++) cnt[s] = 0;
      @(negedge clk);
      start = 0;
      prev_wb = 0; prev_ib = 0; rd_seen = 0;
      expect_done = t0 + (load_w ? R : 0) + n * nv + G + 7;
      while (!done) begin
        automatic int k = cyc - t0 - 1;      // cycles since start was sampled, minus one
        chk(busy, 1, "busy");
        chk(w_shift_en, prev_wb, "w_shift_en follows wb_re");
        chk(ser_load, prev_ib, "ser_load follows ib_re");
        if (load_w && k < R) begin
          chk(wb_re, 1, "wb_re");
          chk(wb_raddr, 6'(w_base + R - 1 - k), "wb_raddr");
        end else chk(wb_re, 0, "wb_re low");
        begin
          automatic int ks = k - (load_w ? R : 0);
          automatic int exp_re = (ks >= 0 && ks < n * nv && ks % n == 0);
          chk(ib_re, exp_re, "ib_re");
          if (ib_re) chk(ib_raddr, 6'(in_base + ks / n), "ib_raddr");
        end
        // output slot write addresses
        slot_valid = S'($urandom);
        #1;
        for (int s = 0; s < S; s++) begin
          chk(ob_we[s], slot_valid[s], "ob_we");
          if (slot_valid[s]) begin
            chk(ob_waddr[s], 4'(out_base + cnt[s]), "ob_waddr");
            cnt[s]++;
          end
        end
        prev_wb = wb_re; prev_ib = ib_re;
        @(negedge clk);
        if (cyc > expect_done + 5) break;
      end
      slot_valid = '0;
      chk(cyc, expect_done, "done cycle");
      @(negedge clk);
      chk(busy, 0, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
