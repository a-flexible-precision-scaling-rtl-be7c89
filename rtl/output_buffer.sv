// output_buffer: on-chip result SRAM with one bank per output slot.
//
// The array finishes the slots of one input word on different cycles
// (group g is g cycles behind group 0), so every slot has a bank of its own
// with its own write port; entry a of all banks together holds the results
// of one input word, SLOTS words of W bits (results sign-extended to W).
// 64 slots x 64 entries x 32 bits is 16 KB, this design's share of the
// paper's 144 KB of buffers. A read returns all SLOTS words of one entry.
//
// Timing: writes at the clock edge; rdata is registered, one cycle after re.
module output_buffer #(
  parameter int unsigned SLOTS = 64,
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64
) (
  input  logic                                 clk,
  input  logic [SLOTS-1:0]                     we,
  input  logic [SLOTS-1:0][$clog2(DEPTH)-1:0]  waddr,
  input  logic [SLOTS-1:0][W-1:0]              wdata,
  input  logic                                 re,
  input  logic [$clog2(DEPTH)-1:0]             raddr,
  output logic [SLOTS-1:0][W-1:0]              rdata
);

  for (genvar s = 0; s < SLOTS; s++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[s]) mem[waddr[s]] <= wdata[s];
      if (re) rdata[s] <= mem[raddr];
    end
  end

endmodule
