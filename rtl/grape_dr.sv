// grape_dr: top of the GRAPE-DR modified SIMD array (Greatly Reduced Array
// of Processor Elements with Data Reduction).
//
// NG groups, each of NPE processing elements sharing one buffer memory, and
// a reduction tree over the groups. The chip is an attached processor: the
// host sends one command per clock on `cmd` and reads sums on `result_*`.
// Every command is first registered (one clock, to distribute it over the
// array) and then acts on all groups at once:
//   CMD_EXEC      the instruction is executed by every PE of every group; its
//                 buffer-memory address reads each group's own buffer memory.
//   CMD_BM_WRITE  data goes to address `addr` of group `grp`'s buffer memory,
//                 or of all of them when `bcast` is set.
//   CMD_PE_WRITE  data goes to register `reg_addr` of PE `pe_idx` of group
//                 `grp`, or of every PE of every group when `bcast` is set.
//   CMD_READ      register `reg_addr` of PE `pe_idx` is read in every group
//                 and summed over all groups (`bcast` set) or taken from group
//                 `grp` alone (`bcast` clear), with `red_op` choosing double or
//                 integer sum. result_valid/result_data follow the command by
//                 2 + ceil(log2(NG)) clocks (7 at NG = 32); one read can start
//                 per clock.
// An EXEC can use the result of the command just before it. Group and PE
// indices must be in range (asserted). The organisation into groups with
// buffer memories, the individual or broadcast writes, the broadcast
// instruction and the reduction over groups follow the architecture. The
// sizes (32 x 32 = 1024 PEs, the "1,000 or more" PEs the architecture aims
// at; 32 registers; 256-word buffer memories) and the command format are
// this design's choices.
module grape_dr
  import grape_pkg::*;
#(
  parameter int unsigned NG       = 32,
  parameter int unsigned NPE      = 32,
  parameter int unsigned NREG     = 32,
  parameter int unsigned BM_DEPTH = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cmd_t  cmd,
  output logic  result_valid,
  output word_t result_data
);

  localparam int unsigned RAW = (NREG > 1) ? $clog2(NREG) : 1;
  localparam int unsigned BAW = (BM_DEPTH > 1) ? $clog2(BM_DEPTH) : 1;
  localparam int unsigned PW  = (NPE > 1) ? $clog2(NPE) : 1;

  // Registered command, broadcast to all groups.
  cmd_t c;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c <= '{kind: CMD_NOP, red_op: RED_FSUM, instr: '{op: OP_NOP, default: '0}, default: '0};
    else        c <= cmd;
  end

  logic          exec, rd_en;
  logic [NG-1:0] grp_hit, red_mask;
  logic [NG-1:0] g_valid;
  word_t         g_data [NG];

  assign exec  = (c.kind == CMD_EXEC);
  assign rd_en = (c.kind == CMD_READ);

  for (genvar g = 0; g < NG; g++) begin : g_grp
    assign grp_hit[g] = c.bcast || (c.grp == IDX_W'(g));

    pe_group #(.NPE(NPE), .NREG(NREG), .BM_DEPTH(BM_DEPTH)) u_group (
      .clk       (clk),
      .rst_n     (rst_n),
      .exec      (exec),
      .instr     (c.instr),
      .bm_we     ((c.kind == CMD_BM_WRITE) && grp_hit[g]),
      .bm_waddr  (c.addr[BAW-1:0]),
      .bm_wdata  (c.data),
      .pe_we     ((c.kind == CMD_PE_WRITE) && grp_hit[g]),
      .pe_all    (c.bcast),
      .pe_sel    (c.pe_idx[PW-1:0]),
      .pe_reg    (c.reg_addr[RAW-1:0]),
      .pe_wdata  (c.data),
      .rd_en     (rd_en),
      .rd_pe     (c.pe_idx[PW-1:0]),
      .rd_reg    (c.reg_addr[RAW-1:0]),
      .out_valid (g_valid[g]),
      .out_data  (g_data[g])
    );
  end

  // The read's group selection and operation travel with the group output register.
  red_op_e red_op_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      red_mask <= '0;
      red_op_q <= RED_FSUM;
    end else if (rd_en) begin
      red_mask <= grp_hit;
      red_op_q <= c.red_op;
    end
  end

  reduction_tree #(.NG(NG)) u_tree (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (g_valid[0]),
    .in_op     (red_op_q),
    .in_mask   (red_mask),
    .in_data   (g_data),
    .out_valid (result_valid),
    .out_data  (result_data)
  );

  a_grp_range: assert property (@(posedge clk) disable iff (!rst_n)
      (c.kind inside {CMD_BM_WRITE, CMD_PE_WRITE, CMD_READ}) && !c.bcast |-> c.grp < IDX_W'(NG))
    else $error("grape_dr: group index out of range");
  a_pe_range: assert property (@(posedge clk) disable iff (!rst_n)
      (c.kind inside {CMD_PE_WRITE, CMD_READ}) && !(c.kind == CMD_PE_WRITE && c.bcast) |-> c.pe_idx < IDX_W'(NPE))
    else $error("grape_dr: PE index out of range");
  a_reg_range: assert property (@(posedge clk) disable iff (!rst_n)
      (c.kind inside {CMD_PE_WRITE, CMD_READ}) |-> c.reg_addr < REG_AW'(NREG))
    else $error("grape_dr: register index out of range");

endmodule
