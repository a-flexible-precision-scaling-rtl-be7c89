// tb_adder_tree: self-checking test of the column adder tree.
// Random and extreme sets of 64 3-bit signed products are applied; the
// output is compared with the plain signed sum of the products.
module tb_adder_tree;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic [R-1:0][2:0] prod;
  logic signed [tree_w(R)-1:0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.ROWS(R)) dut (.prod, .sum);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run();
    int exp = 0;
    for (int r = 0; r < R; r++) exp += int'($signed(prod[r]));
    #1;
    checks++;
    if (int'(sum) != exp) begin
      failures++;
      $display("FAIL sum %0d exp %0d", sum, exp);
    end
  endtask

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int r = 0; r < R; r++) begin
        prod[r] = 3'($urandom);
        if (it % 3 == 1) prod[r][2] = 1'b0;   // unsigned column
      end
      run();
    end
    for (int r = 0; r < R; r++) prod[r] = 3'b100; run();   // -256
    for (int r = 0; r < R; r++) prod[r] = 3'b011; run();   // 192
    for (int r = 0; r < R; r++) prod[r] = 3'b111; run();   // -64
    prod = '0; run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
