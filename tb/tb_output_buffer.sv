// tb_output_buffer: self-checking test of the banked output buffer.
// Every cycle a random subset of the 64 slot banks is written, each at its
// own random address; reads of whole entries are compared with a reference.
module tb_output_buffer;
  localparam int S = 64, W = 32, D = 64;
  logic clk = 0;
  logic [S-1:0] we;
  logic [S-1:0][5:0] waddr;
  logic [S-1:0][W-1:0] wdata, rdata;
  logic re;
  logic [5:0] raddr;
  logic [W-1:0] ref_mem [S][D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every entry first
    re = 0; raddr = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = '1;
      for (int s = 0; s < S; s++) begin
        waddr[s] = 6'(a); wdata[s] = $urandom; ref_mem[s][a] = wdata[s];
      end
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int s = 0; s < S; s++) begin
        we[s] = 1'($urandom);
        waddr[s] = 6'($urandom);
        wdata[s] = $urandom;
      end
      re = 1;
      raddr = 6'($urandom);
      @(posedge clk); #1;
      checks++;
      for (int s = 0; s < S; s++) begin
        if (rdata[s] !== ref_mem[s][raddr]) begin
          failures++;
          $display("FAIL slot %0d addr %0d", s, raddr);
          break;
        end
      end
      for (int s = 0; s < S; s++) if (we[s]) ref_mem[s][waddr[s]] = wdata[s];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
