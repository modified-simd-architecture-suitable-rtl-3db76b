// pe_group: one group of the modified SIMD array.
//
// A group is NPE processing elements and one buffer memory. The buffer
// memory is written by the host (bm_we); during an instruction (exec) it is
// read at instr.bm_addr and its word goes to all NPE PEs as their possible
// operand B, so all PEs of a group work on the same broadcast data while
// different groups can work on different data. A Data In write (pe_we)
// goes to PE pe_sel, or to every PE when pe_all is set. The group has one
// output line: on rd_en the register rd_reg of PE rd_pe is captured into
// out_data, and out_valid rises, one clock later; this line feeds the
// reduction tree. The grouping, the shared buffer memory and the single
// output line per group follow the architecture's block diagram; the
// one-clock output register is this design's choice.
module pe_group
  import grape_pkg::*;
#(
  parameter int unsigned NPE      = 32,
  parameter int unsigned NREG     = 32,
  parameter int unsigned BM_DEPTH = 256,
  localparam int unsigned RAW = (NREG > 1) ? $clog2(NREG) : 1,
  localparam int unsigned BAW = (BM_DEPTH > 1) ? $clog2(BM_DEPTH) : 1,
  localparam int unsigned PW  = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // Broadcast instruction
  input  logic           exec,
  input  instr_t         instr,
  // Buffer-memory write
  input  logic           bm_we,
  input  logic [BAW-1:0] bm_waddr,
  input  word_t          bm_wdata,
  // PE Data In
  input  logic           pe_we,
  input  logic           pe_all,
  input  logic [PW-1:0]  pe_sel,
  input  logic [RAW-1:0] pe_reg,
  input  word_t          pe_wdata,
  // Group output
  input  logic           rd_en,
  input  logic [PW-1:0]  rd_pe,
  input  logic [RAW-1:0] rd_reg,
  output logic           out_valid,
  output word_t          out_data
);

  word_t bm_rdata;
  word_t dout [NPE];

  buffer_memory #(.W(W), .DEPTH(BM_DEPTH)) u_bm (
    .clk   (clk),
    .we    (bm_we),
    .waddr (bm_waddr),
    .wdata (bm_wdata),
    .raddr (instr.bm_addr[BAW-1:0]),
    .rdata (bm_rdata)
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.NREG(NREG)) u_pe (
      .clk       (clk),
      .exec      (exec),
      .instr     (instr),
      .bm_data   (bm_rdata),
      .din_we    (pe_we && (pe_all || (pe_sel == PW'(p)))),
      .din_reg   (pe_reg),
      .din_data  (pe_wdata),
      .dout_reg  (rd_reg),
      .dout_data (dout[p])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= rd_en;
      if (rd_en) out_data <= dout[rd_pe];
    end
  end

endmodule
