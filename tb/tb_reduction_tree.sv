// tb_reduction_tree: self-checking test of the reduction tree.
//
// A new input set enters every clock (random doubles or integers, random
// masks, random operation). The expected sum is computed in the testbench
// as a pairwise tree in the simulator's double arithmetic (or as an integer
// sum), queued, and compared with the output when out_valid rises; the
// latency must be ceil(log2 NG) clocks. Runs with NG = 32 and with NG = 5,
// a size that is not a power of two.
module tb_reduction_tree;
  import grape_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Two instances of different sizes driven side by side.
  localparam int NA = 32, NB = 5;
  localparam int LAT_A = 5, LAT_B = 3;
  logic    in_valid;
  red_op_e in_op;
  logic [NA-1:0] mask_a;
  logic [NB-1:0] mask_b;
  word_t in_a [NA];
  word_t in_b [NB];
  logic v_a, v_b;
  word_t o_a, o_b;

  reduction_tree #(.NG(NA)) dut_a (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_op(in_op),
                                   .in_mask(mask_a), .in_data(in_a), .out_valid(v_a), .out_data(o_a));
  reduction_tree #(.NG(NB)) dut_b (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_op(in_op),
                                   .in_mask(mask_b), .in_data(in_b), .out_valid(v_b), .out_data(o_b));

  // Pairwise reference over a power-of-two padded list.
  function automatic word_t tree_sum(word_t v [], red_op_e op);
    word_t cur [];
    int n = 1;
    while (n < v.size()) n *= 2;
    cur = new[n];
    foreach (cur[i]) cur[i] = (i < v.size()) ? v[i] : '0;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++)
        cur[i] = (op == RED_ISUM) ? cur[2*i] + cur[2*i+1]
                                  : $realtobits($bitstoreal(cur[2*i]) + $bitstoreal(cur[2*i+1]));
      n /= 2;
    end
    return cur[0];
  endfunction

  word_t exp_a [$], exp_b [$];
  int    t_a [$], t_b [$];
  int    cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    if (v_a) begin
      checks++;
      if (exp_a.size() == 0 || o_a !== exp_a[0] || cycle - t_a[0] != LAT_A) begin
        failures++;
        if (failures < 10) $display("FAIL NG=32 got %h expected %h", o_a, exp_a.size() ? exp_a[0] : '0);
      end
      if (exp_a.size()) begin void'(exp_a.pop_front()); void'(t_a.pop_front()); end
    end
    if (v_b) begin
      checks++;
      if (exp_b.size() == 0 || o_b !== exp_b[0] || cycle - t_b[0] != LAT_B) begin
        failures++;
        if (failures < 10) $display("FAIL NG=5 got %h expected %h", o_b, exp_b.size() ? exp_b[0] : '0);
      end
      if (exp_b.size()) begin void'(exp_b.pop_front()); void'(t_b.pop_front()); end
    end
  end

  initial begin
    word_t va [], vb [];
    in_valid = 0; in_op = RED_FSUM; mask_a = '0; mask_b = '0;
    foreach (in_a[i]) in_a[i] = '0;
    foreach (in_b[i]) in_b[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    va = new[NA]; vb = new[NB];
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      in_op = red_op_e'($urandom % 2);
      mask_a = (it % 5 == 0) ? NA'(1) << ($urandom % NA) : {$urandom};
      mask_b = (it % 5 == 0) ? NB'(1) << ($urandom % NB) : NB'($urandom);
      for (int i = 0; i < NA; i++) begin
        in_a[i] = (in_op == RED_ISUM) ? {$urandom, $urandom}
                 : {1'($urandom), 11'(1023 - 8 + ($urandom % 17)), 20'($urandom), 32'($urandom)};
        va[i] = mask_a[i] ? in_a[i] : '0;
      end
      for (int i = 0; i < NB; i++) begin
        in_b[i] = in_a[i];
        vb[i] = mask_b[i] ? in_b[i] : '0;
      end
      if (in_valid) begin
        exp_a.push_back(tree_sum(va, in_op)); t_a.push_back(cycle);
        exp_b.push_back(tree_sum(vb, in_op)); t_b.push_back(cycle);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_a.size() != 0 || exp_b.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
