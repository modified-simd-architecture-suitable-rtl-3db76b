// buffer_memory: the small memory shared by the PEs of one group.
//
// DEPTH words of W bits. The host writes it one word per clock (the group
// decides whether a write addressed to it or broadcast to all groups is
// taken). The broadcast instruction supplies a read address, and the word
// read is broadcast to every PE of the group as a possible operand. Reading
// is asynchronous, so a word written at one clock edge can be used by the
// instruction executed in the next cycle. The group organisation, host
// writes, individual or broadcast, and the word going to all PEs of the
// group follow the architecture; the depth and read timing are this
// design's choices. The array is not reset.
module buffer_memory #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
