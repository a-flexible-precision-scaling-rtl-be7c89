// tb_act_serializer: self-checking test of the activation serializer.
// Words are loaded back to back (the next load in the cycle of the last
// bit) for every precision 2..8; each cycle bit t of every activation and
// the first/last flags are checked, and there must be no gap between words.
module tb_act_serializer;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  logic [3:0] a_prec;
  logic load, valid, first, last;
  logic [R-1:0][7:0] word, cur;
  logic [R-1:0] bits;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_serializer #(.ROWS(R)) dut (.clk, .rst_n, .a_prec, .load, .word, .bits, .valid, .first, .last);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; word = '0; a_prec = 4'd8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 2; n <= 8; n++) begin
      a_prec = 4'(n);
      @(negedge clk);
      for (int r = 0; r < R; r++) word[r] = 8'($urandom);
      load = 1;
      for (int w = 0; w < 20; w++) begin
        cur = word;
        @(negedge clk);
        load = 0;
        for (int t = 0; t < n; t++) begin
          logic [R-1:0] exp;
          for (int r = 0; r < R; r++) exp[r] = cur[r][t];
          checks++;
          if (!valid || bits !== exp || first !== (t == 0) || last !== (t == n - 1)) begin
            failures++;
            $display("FAIL n=%0d t=%0d valid=%0b first=%0b last=%0b", n, t, valid, first, last);
          end
          if (t == n - 1 && w < 19) begin
            for (int r = 0; r < R; r++) word[r] = 8'($urandom);
            load = 1;
          end
          if (t < n - 1) @(negedge clk);
        end
      end
      @(negedge clk);
      load = 0;
      checks++;
      if (valid) begin failures++; $display("FAIL valid after last word"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
