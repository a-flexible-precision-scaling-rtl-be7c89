// tb_pe_column: self-checking test of one array column (64 rows).
// Random 3-bit slices are shifted into the column in 3-bit mode and in
// 2-bit mode with S = 0 and 1; then words of N-bit activations (N = 2..8,
// signed and unsigned) are streamed back to back, one bit-plane per cycle.
// Each column result must equal sum_r slice_r * act_r and must appear one
// cycle after the word's last bit.
module tb_pe_column;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  logic shift_en, load_mode, s, a_valid, a_first, a_last, act_signed, res_valid;
  logic [2:0] w_in;
  logic [R-1:0] a_bits;
  logic signed [acc_w(R)-1:0] res;
  int checks = 0, failures = 0;
  int wv [R];
  int exp_q [$];

  always #5 clk = ~clk;

  pe_column #(.ROWS(R)) dut (.clk, .rst_n, .shift_en, .load_mode, .s, .w_in, .a_bits,
                             .a_valid, .a_first, .a_last, .act_signed, .res, .res_valid);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker: res_valid exactly one cycle after each last bit
  logic last_d;
  always @(posedge clk) begin
    last_d <= a_last & a_valid;
    #1;
    if (res_valid !== last_d) begin
      checks++; failures++;
      $display("FAIL res_valid timing");
    end
    if (res_valid && exp_q.size() > 0) begin
      automatic int e = exp_q.pop_front();
      checks++;
      if (int'(res) != e) begin failures++; $display("FAIL res %0d exp %0d", res, e); end
    end
  end

  initial begin
    shift_en = 0; load_mode = 0; s = 0; w_in = 0; a_bits = '0;
    a_valid = 0; a_first = 0; a_last = 0; act_signed = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cfg = 0; cfg < 6; cfg++) begin
      logic [2:0] sl [R];
      @(negedge clk);
      load_mode = (cfg % 3 == 0);
      s = (cfg % 3 == 1);
      for (int r = 0; r < R; r++) begin
        sl[r] = 3'($urandom);
        if (load_mode) wv[r] = int'($signed(sl[r]));
        else if (s) wv[r] = int'($signed(sl[r][1:0]));
        else wv[r] = int'(sl[r][1:0]);
      end
      // the first slice shifted in ends in the bottom row
      shift_en = 1;
      for (int r = R - 1; r >= 0; r--) begin
        w_in = sl[r];
        @(negedge clk);
      end
      shift_en = 0;
      w_in = 3'($urandom);
      for (int wd = 0; wd < 20; wd++) begin
        automatic int n = 2 + ($urandom % 7);
        automatic int av [R];
        automatic int e = 0;
        act_signed = (wd % 2 == 0);
        for (int r = 0; r < R; r++) begin
          av[r] = act_signed ? int'($urandom % (1 << n)) - (1 << (n - 1)) : int'($urandom % (1 << n));
          e += av[r] * wv[r];
        end
        exp_q.push_back(e);
        for (int t = 0; t < n; t++) begin
          for (int r = 0; r < R; r++) a_bits[r] = 1'((av[r] >> t) & 1);
          a_valid = 1; a_first = (t == 0); a_last = (t == n - 1);
          @(negedge clk);
        end
      end
      a_valid = 0; a_first = 0; a_last = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
