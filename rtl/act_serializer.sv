// act_serializer: converts a word of ROWS parallel activations into the
// serial bit-planes the array consumes, least significant bit first.
//
// The paper feeds activations serially "by 1-bit iterations" starting from
// the LSB; the parallel-to-serial register is this design's way of doing
// that from a parallel input buffer. On load the word is captured; over the
// next a_prec cycles bit t of every activation is presented on bits, with
// valid high, first high for t = 0 and last high for t = a_prec-1 (the sign
// bit). Loading the next word in the cycle the last bit is shown gives
// back-to-back words with no idle cycle, one word every a_prec cycles.
//
// Timing: bits for t = 0 appear the cycle after load.
module act_serializer
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [3:0]                       a_prec,  // activation bits, 2..8
  input  logic                             load,
  input  logic [ROWS-1:0][MAX_BITS-1:0]    word,
  output logic [ROWS-1:0]                  bits,
  output logic                             valid,
  output logic                             first,
  output logic                             last
);

  logic [ROWS-1:0][MAX_BITS-1:0] sh_q;
  logic [3:0]                    t_q;
  logic                          busy_q;
  logic [3:0]                    n;

  assign n = (a_prec < 4'd2 || a_prec > 4'd8) ? 4'd8 : a_prec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q   <= '0;
      t_q    <= '0;
      busy_q <= 1'b0;
    end else if (load) begin
      sh_q   <= word;
      t_q    <= '0;
      busy_q <= 1'b1;
    end else if (busy_q) begin
      for (int r = 0; r < int'(ROWS); r++) sh_q[r] <= sh_q[r] >> 1;
      t_q <= t_q + 4'd1;
      if (t_q == n - 4'd1) busy_q <= 1'b0;
    end
  end

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) bits[r] = sh_q[r][0];
    valid = busy_q;
    first = busy_q && (t_q == 4'd0);
    last  = busy_q && (t_q == n - 4'd1);
  end

endmodule
