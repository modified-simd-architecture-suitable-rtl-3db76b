// register_file: the local storage of one processing element.
//
// NREG words of W bits with three asynchronous read ports and one
// synchronous write port. Ports A and B feed the ALU/FPU operands, port O
// drives the PE's Data Out; the single write port takes either the ALU/FPU
// result or the PE's Data In (the PE chooses). A write at a rising clock
// edge is visible on the read ports from then on. The three read ports and
// the write-back path follow the PE drawing of the architecture; the number
// of registers is this design's choice. The array is not reset: software
// writes a register before reading it.
module register_file #(
  parameter int unsigned W    = 64,
  parameter int unsigned NREG = 32,
  localparam int unsigned AW  = (NREG > 1) ? $clog2(NREG) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] ra_addr,
  output logic [W-1:0]  ra_data,
  input  logic [AW-1:0] rb_addr,
  output logic [W-1:0]  rb_data,
  input  logic [AW-1:0] ro_addr,
  output logic [W-1:0]  ro_data,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [W-1:0]  wd
);

  logic [W-1:0] regs [NREG];

  always_ff @(posedge clk) begin
    if (we) regs[wa] <= wd;
  end

  assign ra_data = regs[ra_addr];
  assign rb_data = regs[rb_addr];
  assign ro_data = regs[ro_addr];

endmodule
