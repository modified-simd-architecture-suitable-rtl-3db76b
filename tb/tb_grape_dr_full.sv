// tb_grape_dr_full: the end-to-end test of tb_grape_dr at the array's default
// size (32 groups x 32 PEs, 32 registers, 256-word buffer memories), with
// the top's parameters left at their defaults. One pass of each workload.
//
// What it runs:
//
// The testbench plays the host. It runs the two kinds of computation the
// architecture is meant for and checks every result bit for bit against a
// reference computed here in the same operation order:
//  1. Matrix-vector product c = A b (one column of a matrix product). A is
//     split in blocks: PE p of group g holds A[p][g*K+k], k < K, in its
//     registers; the piece b[g*K .. g*K+K-1] goes to group g's buffer memory.
//     Every PE forms its partial dot product and the reduction tree sums
//     the partials over the groups, giving c[p].
//  2. Pairwise force sum f_i = sum_j m_j (x_j - x_i), in two modes:
//     a) reduction mode: every group holds the same NPE i-particles and a
//        different share of the j-particles; the tree adds the shares;
//     b) broadcast mode: every PE holds its own i-particle, the same
//        j-particles are broadcast to all buffer memories, and each PE's
//        force is read alone (one group selected).
//  3. An integer sum over the groups.
// It checks the read latency (2 + log2 NG clocks) and that reads issued on
// consecutive clocks all come back, and counts how often each mechanism
// occurred (individual and broadcast buffer-memory writes, individual and
// broadcast register writes, instructions with buffer-memory and register
// operands, reduced and single-group reads, double and integer sums); a
// mechanism that never occurred is a failure.
module tb_grape_dr_full;
  import grape_pkg::*;
  localparam int NG = 32, NPE = 32, NREG = 32, BM_DEPTH = 256;  // grape_dr defaults
  localparam int K = 4;        // matrix columns per group
  localparam int J = 3;        // j-particles per group (reduction mode)
  localparam int JB = 6;       // j-particles broadcast to all groups
  localparam int LAT = 2 + $clog2(NG);

  logic clk = 0, rst_n = 0;
  cmd_t cmd;
  logic result_valid;
  word_t result_data;
  int checks = 0, failures = 0, cycle = 0;

  grape_dr dut (
    .clk(clk), .rst_n(rst_n), .cmd(cmd), .result_valid(result_valid), .result_data(result_data));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters -------------------------------------------------
  typedef enum int {M_BM_ONE, M_BM_ALL, M_PE_ONE, M_PE_ALL, M_EXEC_BM, M_EXEC_REG,
                    M_READ_RED, M_READ_ONE, M_FSUM, M_ISUM, M_BACK2BACK, M_N} mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"bm_write_individual", "bm_write_broadcast", "pe_write_individual",
                             "pe_write_broadcast", "exec_bm_operand", "exec_reg_operand",
                             "read_reduced", "read_single_group", "double_sum", "integer_sum",
                             "back_to_back_reads"};

  // ---- host command helpers -----------------------------------------------
  function automatic cmd_t nop_cmd();
    return '{kind: CMD_NOP, red_op: RED_FSUM, instr: '{op: OP_NOP, default: '0}, default: '0};
  endfunction

  task automatic bm_write(int g, int a, word_t d, bit all);
    cmd_t c = nop_cmd();
    c.kind = CMD_BM_WRITE; c.bcast = all; c.grp = IDX_W'(g); c.addr = BM_AW'(a); c.data = d;
    mech[all ? M_BM_ALL : M_BM_ONE]++;
    @(negedge clk); cmd = c;
  endtask

  task automatic pe_write(int g, int p, int r, word_t d, bit all);
    cmd_t c = nop_cmd();
    c.kind = CMD_PE_WRITE; c.bcast = all; c.grp = IDX_W'(g); c.pe_idx = IDX_W'(p);
    c.reg_addr = REG_AW'(r); c.data = d;
    mech[all ? M_PE_ALL : M_PE_ONE]++;
    @(negedge clk); cmd = c;
  endtask

  task automatic exec(alu_op_e op, int dst, int a, int b, bit from_bm, int bm_addr);
    cmd_t c = nop_cmd();
    c.kind = CMD_EXEC;
    c.instr = '{op: op, dst: REG_AW'(dst), src_a: REG_AW'(a), src_b: REG_AW'(b),
                b_from_bm: from_bm, bm_addr: BM_AW'(bm_addr)};
    mech[from_bm ? M_EXEC_BM : M_EXEC_REG]++;
    @(negedge clk); cmd = c;
  endtask

  // Reads: issued back to back; expected values and issue times are queued.
  word_t exp_q [$];
  int    iss_q [$];
  task automatic read(int p, int r, bit all, int g, red_op_e op, word_t expected);
    cmd_t c = nop_cmd();
    c.kind = CMD_READ; c.bcast = all; c.grp = IDX_W'(g); c.pe_idx = IDX_W'(p);
    c.reg_addr = REG_AW'(r); c.red_op = op;
    mech[all ? M_READ_RED : M_READ_ONE]++;
    mech[op == RED_ISUM ? M_ISUM : M_FSUM]++;
    @(negedge clk); cmd = c;
    if (iss_q.size() > 0 && iss_q[$] == cycle - 1) mech[M_BACK2BACK]++;
    exp_q.push_back(expected); iss_q.push_back(cycle);
  endtask

  task automatic drain();
    @(negedge clk); cmd = nop_cmd();
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results never came back", exp_q.size());
      exp_q.delete(); iss_q.delete();
    end
  endtask

  // Result monitor: value and latency.
  always @(posedge clk) if (rst_n && result_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected result %h", result_data);
    end else begin
      if (result_data !== exp_q[0] || cycle - iss_q[0] != LAT) begin
        failures++;
        if (failures < 10)
          $display("FAIL result %h expected %h latency %0d expected %0d",
                   result_data, exp_q[0], cycle - iss_q[0], LAT);
      end
      void'(exp_q.pop_front()); void'(iss_q.pop_front());
    end
  end

  // ---- reference arithmetic -----------------------------------------------
  function automatic word_t fadd(word_t a, word_t b); return $realtobits($bitstoreal(a) + $bitstoreal(b)); endfunction
  function automatic word_t fsub(word_t a, word_t b); return $realtobits($bitstoreal(a) - $bitstoreal(b)); endfunction
  function automatic word_t fmul(word_t a, word_t b); return $realtobits($bitstoreal(a) * $bitstoreal(b)); endfunction

  // Sum over groups as the tree does it: pairwise, padded with zeros.
  function automatic word_t tree_sum(word_t v [NG], red_op_e op);
    word_t cur [];
    int n = 1;
    while (n < NG) n *= 2;
    cur = new[n];
    foreach (cur[i]) cur[i] = (i < NG) ? v[i] : '0;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++)
        cur[i] = (op == RED_ISUM) ? cur[2*i] + cur[2*i+1] : fadd(cur[2*i], cur[2*i+1]);
      n /= 2;
    end
    return cur[0];
  endfunction

  function automatic word_t rnd_double(int span);
    return {1'($urandom), 11'(1023 - span + ($urandom % (2 * span + 1))), 20'($urandom), 32'($urandom)};
  endfunction

  // ---- the workloads ------------------------------------------------------
  word_t A [NPE][NG*K];
  word_t bvec [NG*K];
  word_t part [NG];
  word_t xi [NG][NPE], xj [NG*JB], mj [NG*JB];
  word_t acc, t;

  task automatic matvec();
    // Load the matrix blocks, one register write per element.
    for (int g = 0; g < NG; g++)
      for (int p = 0; p < NPE; p++)
        for (int k = 0; k < K; k++) begin
          A[p][g*K+k] = rnd_double(4);
          pe_write(g, p, k, A[p][g*K+k], 0);
        end
    for (int col = 0; col < 2; col++) begin
      // One column of B, cut into NG pieces, one piece per buffer memory.
      for (int g = 0; g < NG; g++)
        for (int k = 0; k < K; k++) begin
          bvec[g*K+k] = rnd_double(4);
          bm_write(g, k, bvec[g*K+k], 0);
        end
      pe_write(0, 0, 8, '0, 1);                  // acc = 0 in every PE
      for (int k = 0; k < K; k++) begin
        exec(OP_FMUL, 9, k, 0, 1, k);            // t = A * b_k
        exec(OP_FADD, 8, 8, 9, 0, 0);            // acc += t
      end
      for (int p = 0; p < NPE; p++) begin
        for (int g = 0; g < NG; g++) begin
          acc = '0;
          for (int k = 0; k < K; k++) acc = fadd(acc, fmul(A[p][g*K+k], bvec[g*K+k]));
          part[g] = acc;
        end
        read(p, 8, 1, 0, RED_FSUM, tree_sum(part, RED_FSUM));
      end
      drain();
    end
  endtask

  // Force program: f(r3) -= m_j * (x_i(r0) - x_j) for buffer-memory pairs 0..n-1.
  task automatic force_program(int n);
    pe_write(0, 0, 3, '0, 1);
    for (int j = 0; j < n; j++) begin
      exec(OP_FSUB, 1, 0, 0, 1, 2*j);
      exec(OP_FMUL, 2, 1, 0, 1, 2*j+1);
      exec(OP_FSUB, 3, 3, 2, 0, 0);
    end
  endtask

  function automatic word_t force_ref(word_t x, int j0, int n);
    word_t f = '0;
    for (int j = j0; j < j0 + n; j++) f = fsub(f, fmul(fsub(x, xj[j]), mj[j]));
    return f;
  endfunction

  task automatic nbody_reduction();
    for (int p = 0; p < NPE; p++) begin
      xi[0][p] = rnd_double(3);
      for (int g = 0; g < NG; g++) pe_write(g, p, 0, xi[0][p], 0);
    end
    for (int g = 0; g < NG; g++)
      for (int j = 0; j < J; j++) begin
        xj[g*J+j] = rnd_double(3); mj[g*J+j] = rnd_double(2);
        bm_write(g, 2*j, xj[g*J+j], 0);
        bm_write(g, 2*j+1, mj[g*J+j], 0);
      end
    force_program(J);
    for (int p = 0; p < NPE; p++) begin
      for (int g = 0; g < NG; g++) part[g] = force_ref(xi[0][p], g*J, J);
      read(p, 3, 1, 0, RED_FSUM, tree_sum(part, RED_FSUM));
    end
    drain();
  endtask

  task automatic nbody_broadcast();
    for (int g = 0; g < NG; g++)
      for (int p = 0; p < NPE; p++) begin
        xi[g][p] = rnd_double(3);
        pe_write(g, p, 0, xi[g][p], 0);
      end
    for (int j = 0; j < JB; j++) begin
      xj[j] = rnd_double(3); mj[j] = rnd_double(2);
      bm_write(0, 2*j, xj[j], 1);
      bm_write(0, 2*j+1, mj[j], 1);
    end
    force_program(JB);
    for (int g = 0; g < NG; g++)
      for (int p = 0; p < NPE; p++) read(p, 3, 0, g, RED_FSUM, force_ref(xi[g][p], 0, JB));
    drain();
  endtask

  task automatic integer_sum();
    word_t v [NG];
    for (int g = 0; g < NG; g++) begin
      v[g] = {$urandom, $urandom};
      pe_write(g, 1, 10, v[g], 0);
    end
    exec(OP_IADD, 11, 10, 10, 0, 0);             // r11 = 2 * r10 (integer)
    for (int g = 0; g < NG; g++) v[g] = v[g] + v[g];
    read(1, 11, 1, 0, RED_ISUM, tree_sum(v, RED_ISUM));
    drain();
  endtask

  initial begin
    cmd = nop_cmd();
    foreach (mech[i]) mech[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 1; rep++) begin
      matvec();
      nbody_reduction();
      nbody_broadcast();
      integer_sum();
    end
    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-22s %0d", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never occurred", mech_name[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
