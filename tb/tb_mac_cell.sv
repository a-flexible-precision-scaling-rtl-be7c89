// tb_mac_cell: self-checking test of one PE.
// Two cells are chained to check the top-to-bottom weight shift. Random
// slices are loaded in 2-bit and 3-bit mode, with S at 0 and 1, and the
// 3-bit product is compared with the slice value (signed 3-bit, signed
// 2-bit or unsigned 2-bit) times the activation bit. It also checks that
// REG[2] keeps its value while 2-bit mode loads.
module tb_mac_cell;
  logic clk = 0, rst_n = 0;
  logic shift_en, load_mode, s, a_bit;
  logic [2:0] w_in, w_mid, w_out, p0, p1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mac_cell u0 (.clk, .rst_n, .shift_en, .load_mode, .s, .w_in, .w_out(w_mid), .a_bit, .prod(p0));
  mac_cell u1 (.clk, .rst_n, .shift_en, .load_mode, .s, .w_in(w_mid), .w_out, .a_bit, .prod(p1));

  function automatic int expect_val(logic [2:0] w, logic mode3, logic sx, logic a);
    int v;
    if (mode3)      v = int'($signed(w));
    else if (sx)    v = int'($signed(w[1:0]));
    else            v = int'(w[1:0]);
    return a ? v : 0;
  endfunction

  task automatic chk(logic [2:0] got, int exp, string what);
    checks++;
    if (int'($signed(got)) != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, $signed(got), exp);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] wa, wb;
    shift_en = 0; load_mode = 0; s = 0; a_bit = 0; w_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      logic m, sx;
      m  = 1'($urandom);
      sx = 1'($urandom);
      wa = 3'($urandom);
      wb = 3'($urandom);
      @(negedge clk);
      load_mode = m; s = sx; shift_en = 1; w_in = wa;
      @(negedge clk);
      w_in = wb;
      @(negedge clk);
      shift_en = 0;
      // u1 holds wa, u0 holds wb
      for (int a = 0; a < 2; a++) begin
        a_bit = 1'(a);
        #1;
        chk(p1, expect_val(wa, m, sx, a_bit), "row1");
        chk(p0, expect_val(wb, m, sx, a_bit), "row0");
      end
    end
    // REG[2] gating in 2-bit mode
    @(negedge clk);
    load_mode = 1; shift_en = 1; w_in = 3'b100;
    @(negedge clk);
    load_mode = 0; w_in = 3'b011;      // REG[2] of u0 must stay 1
    @(negedge clk);
    shift_en = 0; load_mode = 1; a_bit = 1; #1;
    chk(p0, -1, "reg2 gated");         // {1,1,1} = -1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
