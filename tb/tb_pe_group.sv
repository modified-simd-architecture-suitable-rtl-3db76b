// tb_pe_group: self-checking test of one group (buffer memory + PEs).
//
// Each PE gets its own register values through individual Data In writes;
// the buffer memory is loaded; instructions that take operand B from the
// buffer memory are broadcast, so every PE combines its own data with the
// same buffer-memory word. Every PE's result is then read through the group
// output line and compared with a model, including the one-clock latency of
// the output register. A broadcast Data In write (pe_all) is checked too.
module tb_pe_group;
  import grape_pkg::*;
  localparam int NPE = 4, NREG = 8, BM_DEPTH = 16, RAW = 3, BAW = 4, PW = 2;

  logic clk = 0, rst_n = 0;
  logic exec, bm_we, pe_we, pe_all, rd_en, out_valid;
  instr_t instr;
  logic [BAW-1:0] bm_waddr;
  word_t bm_wdata, pe_wdata, out_data;
  logic [PW-1:0] pe_sel, rd_pe;
  logic [RAW-1:0] pe_reg, rd_reg;
  word_t model [NPE][NREG];
  word_t bm_model [BM_DEPTH];
  int checks = 0, failures = 0;

  pe_group #(.NPE(NPE), .NREG(NREG), .BM_DEPTH(BM_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rnd_double();
    return {1'($urandom), 11'(1023 - 10 + ($urandom % 21)), 20'($urandom), 32'($urandom)};
  endfunction

  task automatic idle();
    exec = 0; bm_we = 0; pe_we = 0; pe_all = 0; rd_en = 0;
  endtask

  // Read PE p register r through the group output; check latency and value.
  task automatic read_check(int p, int r);
    @(negedge clk);
    idle(); rd_en = 1; rd_pe = PW'(p); rd_reg = RAW'(r);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (!out_valid || out_data !== model[p][r]) begin
      failures++;
      if (failures < 10) $display("FAIL pe%0d r%0d valid=%0d got %h expected %h", p, r, out_valid, out_data, model[p][r]);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid held"); end
  endtask

  initial begin
    idle(); instr = '0; bm_waddr = '0; bm_wdata = '0; pe_wdata = '0; pe_sel = '0; pe_reg = '0;
    rd_pe = '0; rd_reg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      // Individual Data In writes.
      for (int p = 0; p < NPE; p++)
        for (int r = 0; r < NREG; r++) begin
          @(negedge clk);
          idle(); pe_we = 1; pe_sel = PW'(p); pe_reg = RAW'(r); pe_wdata = rnd_double();
          model[p][r] = pe_wdata;
        end
      // Broadcast Data In write of register 7.
      @(negedge clk);
      idle(); pe_we = 1; pe_all = 1; pe_reg = 3'd7; pe_wdata = rnd_double();
      for (int p = 0; p < NPE; p++) model[p][7] = pe_wdata;
      // Buffer-memory load.
      for (int a = 0; a < BM_DEPTH; a++) begin
        @(negedge clk);
        idle(); bm_we = 1; bm_waddr = BAW'(a); bm_wdata = rnd_double();
        bm_model[a] = bm_wdata;
      end
      // r2 = r0 * BM[k]; r3 = r2 + r1 (uses the result just written); r4 = r7 - BM[k+1]
      @(negedge clk);
      idle(); exec = 1;
      instr = '{op: OP_FMUL, dst: 2, src_a: 0, src_b: 0, b_from_bm: 1, bm_addr: BM_AW'(it % BM_DEPTH)};
      @(negedge clk);
      instr = '{op: OP_FADD, dst: 3, src_a: 2, src_b: 1, b_from_bm: 0, bm_addr: 0};
      @(negedge clk);
      instr = '{op: OP_FSUB, dst: 4, src_a: 7, src_b: 0, b_from_bm: 1, bm_addr: BM_AW'((it + 1) % BM_DEPTH)};
      for (int p = 0; p < NPE; p++) begin
        model[p][2] = $realtobits($bitstoreal(model[p][0]) * $bitstoreal(bm_model[it % BM_DEPTH]));
        model[p][3] = $realtobits($bitstoreal(model[p][2]) + $bitstoreal(model[p][1]));
        model[p][4] = $realtobits($bitstoreal(model[p][7]) - $bitstoreal(bm_model[(it + 1) % BM_DEPTH]));
      end
      for (int p = 0; p < NPE; p++)
        for (int r = 0; r < NREG; r++) read_check(p, r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
