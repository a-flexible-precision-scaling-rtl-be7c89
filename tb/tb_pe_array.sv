// tb_pe_array: self-checking test of the full 64x64 PE array.
// For every weight precision 2..8, random signed weights for all weight
// slots (64, 64, 32, 32, 21, 21, 16) are decomposed by weight_decomposer (a
// stimulus helper here; it has its own test) and shifted into the array.
// Words of N-bit activations are then streamed back to back. Every output
// slot must deliver the dot product of its weight column with each word,
// group g three cycles plus g after the word's last bit entered the array
// and independent path p five cycles plus 3p after it. Unsigned weights
// (even precisions) and unsigned activations are exercised too. The test
// counts path results and fails if none occurred.
module tb_pe_array;
  import fpsa_pkg::*;
  localparam int R = 64, G = 16, C = 64;
  logic clk = 0, rst_n = 0;
  logic [3:0] w_prec;
  logic w_signed, act_signed, w_shift_en, a_valid, a_first, a_last;
  logic [C-1:0][7:0] w_raw;
  logic [C-1:0][2:0] w_cols;
  logic [R-1:0] a_bits;
  logic [C-1:0] slot_valid;
  logic signed [out_w(R)-1:0] slot_data [C];
  int checks = 0, failures = 0, cyc = 0, path_results = 0;
  longint exp_q [C][$];
  int     due_q [C][$];
  int     w [R][C];
  int     a [R];
  int     nslots;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  weight_decomposer #(.GROUPS(G)) u_dcp (.w_prec, .w_raw, .w_cols);
  pe_array #(.ROWS(R), .GROUPS(G)) dut (.clk, .rst_n, .w_prec, .w_signed, .act_signed,
    .w_shift_en, .w_cols, .a_bits, .a_valid, .a_first, .a_last, .slot_valid, .slot_data);

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    for (int k = 0; k < C; k++) begin
      if (slot_valid[k]) begin
        checks++;
        if (exp_q[k].size() == 0) begin
          failures++; $display("FAIL unexpected result slot %0d", k);
        end else begin
          automatic longint e = exp_q[k].pop_front();
          automatic int d = due_q[k].pop_front();
          if (longint'(slot_data[k]) != e || cyc != d) begin
            failures++;
            $display("FAIL slot %0d got %0d exp %0d at %0d due %0d", k, slot_data[k], e, cyc, d);
          end
          if (k >= G && (w_prec == 6 || w_prec == 7)) path_results++;
        end
      end
    end
  end

  function automatic int slot_delay(int k, int m);
    if (m <= 3) return 3 + k / 4;
    if (m <= 5) return 3 + k / 2;
    if (k < G) return 3 + k;
    return 5 + 3 * (k - G);
  endfunction

  initial begin
    w_prec = 4'd8; w_signed = 1; act_signed = 1; w_shift_en = 0;
    a_valid = 0; a_first = 0; a_last = 0; a_bits = '0; w_raw = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 14; run++) begin
      int m, n;
      m = 2 + run / 2;
      n = 2 + (run * 3) % 7;
      nslots = (m <= 3) ? 64 : (m <= 5) ? 32 : (m <= 7) ? 21 : 16;
      @(negedge clk);
      w_prec = 4'(m);
      w_signed = (run % 2 == 0) || (m % 2 == 1);
      act_signed = (run % 4 != 3);
      for (int r = 0; r < R; r++)
        for (int k = 0; k < C; k++)
          w[r][k] = (k >= nslots) ? 0 :
                    w_signed ? int'($urandom % (1 << m)) - (1 << (m - 1)) : int'($urandom % (1 << m));
      w_shift_en = 1;
      for (int r = R - 1; r >= 0; r--) begin
        for (int k = 0; k < C; k++) w_raw[k] = 8'(w[r][k]);
        @(negedge clk);
      end
      w_shift_en = 0;
      for (int wd = 0; wd < 6; wd++) begin
        for (int r = 0; r < R; r++)
          a[r] = act_signed ? int'($urandom % (1 << n)) - (1 << (n - 1)) : int'($urandom % (1 << n));
        for (int t = 0; t < n; t++) begin
          for (int r = 0; r < R; r++) a_bits[r] = 1'((a[r] >> t) & 1);
          a_valid = 1; a_first = (t == 0); a_last = (t == n - 1);
          if (t == n - 1) begin
            for (int k = 0; k < nslots; k++) begin
              automatic longint e = 0;
              for (int r = 0; r < R; r++) e += longint'(w[r][k]) * a[r];
              exp_q[k].push_back(e);
              due_q[k].push_back(cyc + slot_delay(k, m));
            end
          end
          @(negedge clk);
        end
      end
      a_valid = 0; a_first = 0; a_last = 0;
      repeat (30) @(negedge clk);
      for (int k = 0; k < C; k++) begin
        checks++;
        if (exp_q[k].size() != 0) begin failures++; $display("FAIL slot %0d missing", k); end
      end
    end
    checks++;
    if (path_results == 0) begin failures++; $display("FAIL no path results"); end
    $display("path results: %0d", path_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
