// tb_buffer_memory: self-checking test of a group's buffer memory.
//
// Random host writes and instruction-side reads compared with a model
// array; the word written at a clock edge must be readable in the next cycle.
module tb_buffer_memory;
  localparam int W = 64, DEPTH = 256, AW = 8;
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0]  wdata, rdata;
  logic [W-1:0]  model [DEPTH];
  int checks = 0, failures = 0;

  buffer_memory #(.W(W), .DEPTH(DEPTH)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      raddr = AW'($urandom);
      we = 1'($urandom); waddr = raddr; wdata = {$urandom, $urandom};
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL read after write %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
