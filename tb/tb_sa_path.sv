// tb_sa_path: self-checking test of the independent shift-add path.
// Three column results arrive on consecutive cycles (as from three groups
// one systolic stage apart). The output, one cycle after the third, must be
// 16*a0 + 4*a1 + a2. With en low the path must stay silent.
module tb_sa_path;
  import fpsa_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  logic en, v0, v1, v2, out_valid;
  logic signed [acc_w(R)-1:0] a0, a1, a2;
  logic signed [out_w(R)-1:0] out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sa_path #(.ROWS(R)) dut (.clk, .rst_n, .en, .a0, .v0, .a1, .v1, .a2, .v2, .out, .out_valid);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v0 = 0; v1 = 0; v2 = 0; en = 0; a0 = '0; a1 = '0; a2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      longint x0, x1, x2, exp;
      en = (it % 10 != 9);
      x0 = longint'($urandom % 131072) - 65536;
      x1 = longint'($urandom % 131072) - 65536;
      x2 = longint'($urandom % 131072) - 65536;
      exp = 16 * x0 + 4 * x1 + x2;
      @(negedge clk); v0 = 1; a0 = acc_w(R)'(x0);
      @(negedge clk); v0 = 0; v1 = 1; a1 = acc_w(R)'(x1); a0 = '1;  // a0 no longer held
      @(negedge clk); v1 = 0; v2 = 1; a2 = acc_w(R)'(x2); a1 = '1;
      @(negedge clk); v2 = 0; a2 = '1;
      checks++;
      if (out_valid !== en || (en && longint'(out) != exp)) begin
        failures++;
        $display("FAIL en=%0b valid=%0b out=%0d exp=%0d", en, out_valid, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
