// csa_tree: carry-save adder tree that sums N unsigned W-bit operands.
//
// Each level groups the operands in threes and replaces every triple by a
// sum vector (a^b^c) and a carry vector (majority shifted left by one), so
// the operand count falls from n to 2*(n/3) + n%3 per level without any
// carry propagation. The levels are written as a loop that the tools
// unroll: the operand count of every level is a constant, so each level
// becomes a fixed row of full adders. When two vectors remain a single
// carry-propagate adder produces the result. Arithmetic is modulo 2^W, so W must hold the final
// sum. The tree is purely combinational. The paper uses CSA trees for the
// column adder trees (Fig. 6) but does not give their wiring; this 3:2
// Wallace-style reduction is this design's choice.
module csa_tree #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 8
) (
  input  logic [N-1:0][W-1:0] ops,
  output logic [W-1:0]        sum
);

  // Operand count after lvl levels of 3:2 reduction.
  function automatic int unsigned cnt_at(int unsigned lvl);
    int unsigned n = N;
    for (int unsigned i = 0; i < lvl; i++) n = (n / 3) * 2 + (n % 3);
    return n;
  endfunction

  function automatic int unsigned num_levels();
    int unsigned l = 0;
    while (cnt_at(l) > 2) l++;
    return l;
  endfunction

  localparam int unsigned L = num_levels();

  logic [W-1:0] cur [N];
  logic [W-1:0] nxt [N];

  always_comb begin
    int unsigned n;
    logic [W-1:0] a, b, c;
    for (int i = 0; i < int'(N); i++) cur[i] = ops[i];
    for (int i = 0; i < int'(N); i++) nxt[i] = '0;
    n = N;
    for (int l = 0; l < int'(L); l++) begin
      for (int i = 0; i < int'(N); i++) nxt[i] = '0;
      for (int i = 0; i < int'(N / 3); i++) begin
        if (i < int'(n / 3)) begin
          a = cur[3*i];
          b = cur[3*i+1];
          c = cur[3*i+2];
          nxt[2*i]   = a ^ b ^ c;                             // sum vector
          nxt[2*i+1] = ((a & b) | (a & c) | (b & c)) << 1;    // carry vector
        end
      end
      for (int i = 0; i < 2; i++)
        if (i < int'(n % 3)) nxt[2*(n/3)+i] = cur[3*(n/3)+i];
      n = 2 * (n / 3) + n % 3;
      cur = nxt;
    end
    sum = (n == 1) ? cur[0] : cur[0] + cur[1];
  end

endmodule
