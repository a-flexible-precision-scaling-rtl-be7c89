// tb_bs_accumulator: self-checking test of the bit-serial accumulator.
// Words of N = 2..8 tree results are fed LSB plane first (one idle cycle
// between words),
// with signed and unsigned activations. The result must equal
// sum_t tree[t]*2^t, with the last term negated for signed activations, and
// must appear exactly one cycle after the last bit.
module tb_bs_accumulator;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  logic a_valid, a_first, a_last, act_signed, res_valid;
  logic signed [tree_w(R)-1:0] tree;
  logic signed [acc_w(R)-1:0]  res;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bs_accumulator #(.ROWS(R)) dut (.clk, .rst_n, .a_valid, .a_first, .a_last,
                                  .act_signed, .tree, .res, .res_valid);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_valid = 0; a_first = 0; a_last = 0; act_signed = 0; tree = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      automatic int n = 2 + ($urandom % 7);
      automatic int exp = 0;
      act_signed = 1'($urandom);
      for (int t = 0; t < n; t++) begin
        automatic int v = int'($urandom % 449) - 256;      // -256..192
        if (act_signed && t == n - 1) exp -= v * (1 << t);
        else exp += v * (1 << t);
        @(negedge clk);
        a_valid = 1; a_first = (t == 0); a_last = (t == n - 1);
        tree = tree_w(R)'(v);
        @(posedge clk); #1;
        checks++;
        if (res_valid !== (t == n - 1)) begin
          failures++;
          $display("FAIL res_valid timing t=%0d", t);
        end
      end
      @(negedge clk);
      a_valid = 0; a_first = 0; a_last = 0;
      #1;
      checks++;
      if (!res_valid || int'(res) != exp) begin
        failures++;
        $display("FAIL res %0d exp %0d valid %0b", res, exp, res_valid);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
