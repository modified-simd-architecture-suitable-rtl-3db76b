// tb_pe: self-checking test of one processing element.
//
// Registers are loaded through Data In, then random broadcast instructions
// (floating-point, integer and logic, with operand B from a register or from
// the buffer-memory word) are executed one per clock. A model register file,
// computed with the simulator's own double arithmetic, is compared with the
// PE through its Data Out port after every instruction and in full sweeps.
// The single-cycle write-back is checked by instructions that use the result
// of the instruction right before them.
module tb_pe;
  import grape_pkg::*;
  localparam int NREG = 8, RAW = 3;

  logic clk = 0;
  logic exec, din_we;
  instr_t instr;
  word_t bm_data, din_data, dout_data;
  logic [RAW-1:0] din_reg, dout_reg;
  word_t model [NREG];
  int checks = 0, failures = 0;

  pe #(.NREG(NREG)) dut (
    .clk(clk), .exec(exec), .instr(instr), .bm_data(bm_data),
    .din_we(din_we), .din_reg(din_reg), .din_data(din_data),
    .dout_reg(dout_reg), .dout_data(dout_data));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rnd_double();
    return {1'($urandom), 11'(1023 - 20 + ($urandom % 41)), 20'($urandom), 32'($urandom)};
  endfunction

  // Reference with flush-to-zero and the design's quiet NaN.
  function automatic word_t canon(word_t v);
    if (v[62:52] == '1 && v[51:0] != '0) return QNAN;
    if (v[62:52] == '0) return {v[63], 63'd0};
    return v;
  endfunction

  function automatic word_t ref_op(alu_op_e o, word_t x, word_t z);
    case (o)
      OP_MOV:  return x;
      OP_MOVB: return z;
      OP_FADD: return canon($realtobits($bitstoreal(x) + $bitstoreal(z)));
      OP_FSUB: return canon($realtobits($bitstoreal(x) - $bitstoreal(z)));
      OP_FMUL: return canon($realtobits($bitstoreal(x) * $bitstoreal(z)));
      OP_IADD: return x + z;
      OP_ISUB: return x - z;
      OP_AND:  return x & z;
      OP_OR:   return x | z;
      OP_XOR:  return x ^ z;
      default: return '0;
    endcase
  endfunction

  task automatic cmp(int r, string what);
    dout_reg = RAW'(r);
    #1;
    checks++;
    if (dout_data !== model[r]) begin
      failures++;
      if (failures < 10) $display("FAIL %s r%0d got %h expected %h", what, r, dout_data, model[r]);
    end
  endtask

  initial begin
    alu_op_e ops [11] = '{OP_NOP, OP_MOV, OP_FADD, OP_FSUB, OP_FMUL, OP_IADD,
                          OP_ISUB, OP_AND, OP_OR, OP_XOR, OP_MOVB};
    word_t opb;
    exec = 0; din_we = 0; instr = '0; bm_data = '0; din_data = '0; din_reg = '0; dout_reg = '0;
    for (int round = 0; round < 1500; round++) begin
      // Reload all registers through Data In.
      for (int r = 0; r < NREG; r++) begin
        @(negedge clk);
        exec = 0; din_we = 1; din_reg = RAW'(r); din_data = rnd_double();
        model[r] = din_data;
      end
      @(negedge clk); din_we = 0;
      for (int r = 0; r < NREG; r++) cmp(r, "after load");
      // A few instructions, each using registers possibly written just before.
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        exec = 1;
        instr = '0;
        instr.op = ops[$urandom % 11];
        instr.dst = REG_AW'($urandom % NREG);
        instr.src_a = REG_AW'((k > 0 && $urandom % 2 == 0) ? instr.dst : $urandom % NREG);
        instr.src_b = REG_AW'($urandom % NREG);
        instr.b_from_bm = 1'($urandom);
        instr.bm_addr = BM_AW'($urandom);
        bm_data = rnd_double();
        opb = instr.b_from_bm ? bm_data : model[instr.src_b[RAW-1:0]];
        @(posedge clk);
        if (instr.op != OP_NOP)
          model[instr.dst[RAW-1:0]] = ref_op(instr.op, model[instr.src_a[RAW-1:0]], opb);
        @(negedge clk);
        exec = 0;
        cmp(int'(instr.dst[RAW-1:0]), instr.op.name());
      end
      for (int r = 0; r < NREG; r++) cmp(r, "sweep");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
