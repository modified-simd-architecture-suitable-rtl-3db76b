// tb_register_file: self-checking test of the PE register file.
//
// Random writes and reads on all three read ports, compared with a model
// array; a write must be visible on the read ports right after its clock
// edge, and a cycle without write enable must change nothing.
module tb_register_file;
  localparam int W = 64, NREG = 32, AW = 5;
  logic clk = 0;
  logic [AW-1:0] ra, rb, ro, wa;
  logic [W-1:0]  da, db, dout, wd;
  logic we;
  logic [W-1:0] model [NREG];
  int checks = 0, failures = 0;

  register_file #(.W(W), .NREG(NREG)) dut (
    .clk(clk), .ra_addr(ra), .ra_data(da), .rb_addr(rb), .rb_data(db),
    .ro_addr(ro), .ro_data(dout), .we(we), .wa(wa), .wd(wd));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(logic [W-1:0] got, logic [W-1:0] exp_v, string port);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL port %s got %h expected %h", port, got, exp_v);
    end
  endtask

  initial begin
    we = 0; wa = 0; wd = 0; ra = 0; rb = 0; ro = 0;
    // Fill every register.
    for (int i = 0; i < NREG; i++) begin
      @(negedge clk);
      we = 1; wa = AW'(i); wd = {$urandom, $urandom};
      model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      ra = AW'($urandom); rb = AW'($urandom); ro = AW'($urandom);
      #1;
      cmp(da, model[ra], "A"); cmp(db, model[rb], "B"); cmp(dout, model[ro], "O");
      we = 1'($urandom); wa = AW'($urandom); wd = {$urandom, $urandom};
      @(posedge clk);
      if (we) model[wa] = wd;
      #1;
      ra = wa;
      #1;
      cmp(da, model[wa], "A after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
