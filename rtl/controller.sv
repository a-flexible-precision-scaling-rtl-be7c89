// controller: sequences one layer tile on the accelerator (Fig. 2).
//
// The paper shows a controller driving the buffers but does not describe
// it; this sequencer is this design's own. A command (start) runs:
//   1. LOADW (if load_w): reads ROWS weight-buffer words, from address
//      w_base+ROWS-1 down to w_base, and shifts each, decomposed, into the
//      column weight chains one cycle after the read, so the word at w_base
//      ends in row 0 and the word at w_base+r in row r. ROWS+1 cycles.
//   2. STREAM: reads n_vec input-buffer words from in_base on, one every
//      N = a_prec cycles, and loads each into the serializer the cycle
//      after its read, so words follow back to back (N*n_vec cycles).
//   3. DRAIN: waits GROUPS+6 cycles for the last group and the independent
//      shift-add paths to deliver, then pulses done.
// Meanwhile every output slot that delivers a result is written to the
// output buffer at out_base plus the number of results that slot has
// written since start, so entry out_base+v holds the results of word v.
// Precision and signedness inputs must stay constant during a command.
module controller
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned SLOTS    = GROUPS_DEF * GCOLS,
  parameter int unsigned GROUPS   = GROUPS_DEF,
  parameter int unsigned WB_DEPTH = 1024,
  parameter int unsigned IB_DEPTH = 1024,
  parameter int unsigned OB_DEPTH = 64
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  // command
  input  logic                                     start,
  input  logic                                     load_w,
  input  logic [$clog2(WB_DEPTH)-1:0]              w_base,
  input  logic [$clog2(IB_DEPTH)-1:0]              in_base,
  input  logic [$clog2(IB_DEPTH):0]                n_vec,   // words, >= 1
  input  logic [$clog2(OB_DEPTH)-1:0]              out_base,
  input  logic [3:0]                               a_prec,
  output logic                                     busy,
  output logic                                     done,
  // weight buffer and array preload
  output logic                                     wb_re,
  output logic [$clog2(WB_DEPTH)-1:0]              wb_raddr,
  output logic                                     w_shift_en,
  // input buffer and serializer
  output logic                                     ib_re,
  output logic [$clog2(IB_DEPTH)-1:0]              ib_raddr,
  output logic                                     ser_load,
  // output slots to output buffer
  input  logic [SLOTS-1:0]                         slot_valid,
  output logic [SLOTS-1:0]                         ob_we,
  output logic [SLOTS-1:0][$clog2(OB_DEPTH)-1:0]   ob_waddr
);

  localparam int unsigned WA = $clog2(WB_DEPTH);
  localparam int unsigned IA = $clog2(IB_DEPTH);
  localparam int unsigned OA = $clog2(OB_DEPTH);
  localparam int unsigned DRAIN_CYC = GROUPS + 6;

  typedef enum logic [1:0] {S_IDLE, S_LOADW, S_STREAM, S_DRAIN} state_e;

  state_e                state_q;
  logic [$clog2(ROWS+DRAIN_CYC+1)-1:0] cnt_q;   // rows loaded / drain cycles
  logic [IA:0]           vec_q;                 // words issued
  logic [3:0]            ph_q;                  // bit phase within a word
  logic [3:0]            n;
  logic [SLOTS-1:0][OA-1:0] slot_cnt_q;

  assign n = (a_prec < 4'd2 || a_prec > 4'd8) ? 4'd8 : a_prec;

  always_comb begin
    busy     = (state_q != S_IDLE);
    wb_re    = (state_q == S_LOADW);
    wb_raddr = w_base + WA'(ROWS - 1) - WA'(cnt_q);
    ib_re    = (state_q == S_STREAM) && (ph_q == 4'd0);
    ib_raddr = in_base + IA'(vec_q);
    ob_we    = slot_valid;
    for (int s = 0; s < int'(SLOTS); s++) ob_waddr[s] = out_base + slot_cnt_q[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      cnt_q      <= '0;
      vec_q      <= '0;
      ph_q       <= '0;
      done       <= 1'b0;
      w_shift_en <= 1'b0;
      ser_load   <= 1'b0;
      slot_cnt_q <= '0;
    end else begin
      done       <= 1'b0;
      w_shift_en <= wb_re;
      ser_load   <= ib_re;
      for (int s = 0; s < int'(SLOTS); s++)
        if (slot_valid[s]) slot_cnt_q[s] <= slot_cnt_q[s] + OA'(1);
      unique case (state_q)
        S_IDLE: if (start) begin
          cnt_q      <= '0;
          vec_q      <= '0;
          ph_q       <= '0;
          slot_cnt_q <= '0;
          state_q    <= load_w ? S_LOADW : S_STREAM;
        end
        S_LOADW: begin
          cnt_q <= cnt_q + 1'b1;
          if (32'(cnt_q) == ROWS - 1) state_q <= S_STREAM;
        end
        S_STREAM: begin
          if (ph_q == n - 4'd1) begin
            ph_q  <= '0;
            vec_q <= vec_q + 1'b1;
            if (vec_q + 1'b1 >= n_vec) begin
              state_q <= S_DRAIN;
              cnt_q   <= '0;
            end
          end else begin
            ph_q <= ph_q + 4'd1;
          end
        end
        S_DRAIN: begin
          cnt_q <= cnt_q + 1'b1;
          if (32'(cnt_q) == DRAIN_CYC - 1) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
