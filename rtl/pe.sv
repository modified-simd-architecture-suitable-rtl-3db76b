// pe: one processing element of the SIMD array.
//
// A PE is a register file and an ALU/FPU and nothing else: no local memory
// beyond its registers and no link to other PEs. Every PE of the chip
// receives the same instruction. When exec is high the instruction reads
// operand A, and operand B from either a register or the word broadcast by
// the group's buffer memory (bm_data), and the result is written to the
// destination register at the next rising clock edge (none for OP_NOP). The
// Data In port (din_we/din_reg/din_data) writes one register from the host,
// and the Data Out port continuously shows register dout_reg. Single-cycle:
// an instruction sees the results of the one before it. Exec and Data In
// share the one write port and must not be asserted together (asserted).
// The structure follows the PE drawing of the architecture; the instruction
// fields and the single-cycle timing are this design's choices.
module pe
  import grape_pkg::*;
#(
  parameter int unsigned NREG = 32,
  localparam int unsigned RAW = (NREG > 1) ? $clog2(NREG) : 1
) (
  input  logic           clk,
  // Broadcast instruction
  input  logic           exec,
  input  instr_t         instr,
  input  word_t          bm_data,
  // Data In
  input  logic           din_we,
  input  logic [RAW-1:0] din_reg,
  input  word_t          din_data,
  // Data Out
  input  logic [RAW-1:0] dout_reg,
  output word_t          dout_data
);

  word_t          ra, rb, opb, y;
  logic           we;
  logic [RAW-1:0] wa;
  word_t          wd;

  register_file #(.W(W), .NREG(NREG)) u_rf (
    .clk     (clk),
    .ra_addr (instr.src_a[RAW-1:0]),
    .ra_data (ra),
    .rb_addr (instr.src_b[RAW-1:0]),
    .rb_data (rb),
    .ro_addr (dout_reg),
    .ro_data (dout_data),
    .we      (we),
    .wa      (wa),
    .wd      (wd)
  );

  assign opb = instr.b_from_bm ? bm_data : rb;

  alu_fpu u_alu (.op(instr.op), .a(ra), .b(opb), .y(y));

  always_comb begin
    if (din_we) begin
      we = 1'b1;
      wa = din_reg;
      wd = din_data;
    end else begin
      we = exec && (instr.op != OP_NOP);
      wa = instr.dst[RAW-1:0];
      wd = y;
    end
  end

  a_one_writer: assert property (@(posedge clk) !(exec && din_we))
    else $error("pe: exec and Data In in the same cycle");

endmodule
