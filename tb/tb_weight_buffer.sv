// tb_weight_buffer: self-checking test of the weight buffer.
// Random words are written to random addresses, a reference copy is kept,
// and reads (one cycle latency) are compared with it, including a read and
// a write of the same address in one cycle (old data returned).
module tb_weight_buffer;
  localparam int W = 512, D = 1024;
  logic clk = 0;
  logic we, re;
  logic [9:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];
  logic [D-1:0] written;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    written = '0;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < 3000; i++) begin
      logic [9:0] ra;
      logic [W-1:0] exp;
      logic chk_it;
      @(negedge clk);
      we = 1'($urandom);
      waddr = 10'($urandom % 64);
      wdata = rnd();
      ra = (i % 7 == 0) ? waddr : 10'($urandom % 64);
      re = 1'($urandom);
      raddr = ra;
      chk_it = re && written[ra];
      exp = ref_mem[ra];
      @(posedge clk);
      if (we) begin ref_mem[waddr] = wdata; written[waddr] = 1'b1; end
      #1;
      if (chk_it) begin
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL addr %0d", ra); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
