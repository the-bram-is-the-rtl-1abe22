// tb_pim_regfile: random reads and writes against a reference array.
// Checks the one-cycle read latency of both ports and read-first
// behaviour when a word is read and written in the same cycle.
module tb_pim_regfile;
  localparam int NPE = 16, DEPTH = 64, AW = 6;
  logic clk = 0;
  logic [AW-1:0] addr_a = '0, addr_b = '0, waddr = '0;
  logic [NPE-1:0] rd_a, rd_b, wdata = '0;
  logic we = 0;
  logic [NPE-1:0] ref_mem [DEPTH];
  logic [NPE-1:0] exp_a, exp_b;
  int checks = 0, failures = 0;

  pim_regfile #(.NPE(NPE), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = NPE'($urandom); ref_mem[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      addr_a = AW'($urandom); addr_b = AW'($urandom);
      we = 1'($urandom); waddr = ($urandom_range(0, 3) == 0) ? addr_a : AW'($urandom);
      wdata = NPE'($urandom);
      exp_a = ref_mem[addr_a];   // read-first
      exp_b = ref_mem[addr_b];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      checks += 2;
      if (rd_a !== exp_a) begin failures++; $display("port A mismatch at %0d", addr_a); end
      if (rd_b !== exp_b) begin failures++; $display("port B mismatch at %0d", addr_b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
