// reduction_tree: hardware summation over the outputs of all groups.
//
// A binary tree of adders, one register level per tree level, so a set of
// NG inputs presented with in_valid comes out as their sum, with out_valid,
// LAT = ceil(log2(NG)) clocks later; a new set can enter every clock. Each
// node adds either as IEEE-754 doubles (RED_FSUM, rounded at every node in
// tree order) or as 64-bit integers (RED_ISUM); the operation travels down
// the pipeline with its data. Inputs whose in_mask bit is clear count as +0,
// which lets the host read one group's value unchanged. NG need not be a
// power of two: missing leaves are +0. The tree itself and its purpose,
// summing partial results over groups, follow the architecture; the
// pipelining, the masking and the integer mode are this design's choices.
module reduction_tree
  import grape_pkg::*;
#(
  parameter int unsigned NG  = 32,
  localparam int unsigned LAT = (NG > 1) ? $clog2(NG) : 0,
  localparam int unsigned NP  = 1 << LAT
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  red_op_e in_op,
  input  logic    [NG-1:0] in_mask,
  input  word_t   in_data [NG],
  output logic    out_valid,
  output word_t   out_data
);

  word_t   leaf [NP];
  logic    v_pipe  [LAT+1];
  red_op_e op_pipe [LAT+1];

  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < NG) begin : g_in
      assign leaf[i] = in_mask[i] ? in_data[i] : '0;
    end else begin : g_pad
      assign leaf[i] = '0;
    end
  end

  assign v_pipe[0]  = in_valid;
  assign op_pipe[0] = in_op;
  for (genvar s = 1; s <= LAT; s++) begin : g_ctl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_pipe[s]  <= 1'b0;
        op_pipe[s] <= RED_FSUM;
      end else begin
        v_pipe[s]  <= v_pipe[s-1];
        op_pipe[s] <= op_pipe[s-1];
      end
    end
  end

  if (LAT == 0) begin : g_single
    assign out_data = leaf[0];
  end else begin : g_tree
    // Heap numbering: node n has children 2n and 2n+1; indices >= NP are leaves.
    word_t node [1:NP-1];
    for (genvar n = 1; n < NP; n++) begin : g_node
      localparam int unsigned DEPTH = $clog2(n + 1) - 1;   // root has depth 0
      localparam int unsigned STAGE = LAT - 1 - DEPTH;     // pipeline stage of its inputs
      word_t l, r, fs;
      if (2 * n >= NP) begin : g_leaves
        assign l = leaf[2*n - NP];
        assign r = leaf[2*n + 1 - NP];
      end else begin : g_inner
        assign l = node[2*n];
        assign r = node[2*n + 1];
      end
      fp_add u_add (.a(l), .b(r), .y(fs));
      always_ff @(posedge clk) begin
        node[n] <= (op_pipe[STAGE] == RED_ISUM) ? (l + r) : fs;
      end
    end
    assign out_data = node[1];
  end

  assign out_valid = v_pipe[LAT];

endmodule
