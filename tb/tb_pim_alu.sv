// tb_pim_alu: drives the 16 bit-serial ALUs directly.
// 1. W-bit ADD and SUB of random operands, bit by bit, LSB first, each PE
//    with its own operands; results compared with integer arithmetic.
// 2. Full Booth radix-2 multiplication of random signed N-bit numbers by
//    the same step sequence the multicycle driver uses (partial product
//    kept in the testbench), compared with the integer product.
// 3. CPY and ZERO.
module tb_pim_alu;
  import imagine_pkg::*;
  localparam int W = 16, N = 6;
  logic clk = 0, rst = 1;
  alu_op_e op = ALU_NOP;
  logic first = 0, booth_ld = 0, booth_first = 0;
  logic [15:0] x = '0, y = '0, r_q;
  int checks = 0, failures = 0;

  pim_alu #(.NPE(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one serial pass: drives bits of xa/yb for all PEs, returns result bits
  task automatic serial(input alu_op_e o, input logic [W-1:0] xa [16],
                        input logic [W-1:0] yb [16], input int nb,
                        output logic [W-1:0] res [16]);
    for (int j = 0; j < nb; j++) begin
      @(negedge clk);
      op = o; first = (j == 0);
      for (int i = 0; i < 16; i++) begin x[i] = xa[i][j]; y[i] = yb[i][j]; end
      @(posedge clk); #1;
      for (int i = 0; i < 16; i++) res[i][j] = r_q[i];
    end
    @(negedge clk);
    op = ALU_NOP; first = 0;
  endtask

  initial begin
    logic [W-1:0] xa [16], yb [16], res [16], p [16], xs [16];
    logic [N-1:0] mx [16], my [16];
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < 16; i++) begin xa[i] = W'($urandom); yb[i] = W'($urandom); end
      serial(ALU_ADD, xa, yb, W, res);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (res[i] !== W'(xa[i] + yb[i])) begin failures++; $display("ADD pe %0d", i); end
      end
      serial(ALU_SUB, xa, yb, W, res);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (res[i] !== W'(xa[i] - yb[i])) begin failures++; $display("SUB pe %0d", i); end
      end
    end
    // Booth multiplication
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < 16; i++) begin
        mx[i] = N'($urandom); my[i] = N'($urandom); p[i] = '0;
        xs[i] = W'($signed(mx[i]));   // multiplicand, sign-extended
      end
      for (int s = 0; s < N; s++) begin
        logic [W-1:0] pa [16], xb [16];
        @(negedge clk);
        booth_ld = 1; booth_first = (s == 0);
        for (int i = 0; i < 16; i++) y[i] = my[i][s];
        @(negedge clk);
        booth_ld = 0; booth_first = 0;
        for (int i = 0; i < 16; i++) begin pa[i] = p[i] >> s; xb[i] = xs[i]; end
        serial(ALU_BOOTH, pa, xb, W - s, res);
        for (int i = 0; i < 16; i++)
          for (int j = 0; j < W - s; j++) p[i][s+j] = res[i][j];
      end
      for (int i = 0; i < 16; i++) begin
        checks++;
        if ($signed(p[i]) !== W'($signed(mx[i]) * $signed(my[i]))) begin
          failures++;
          $display("MULT pe %0d: %0d * %0d gave %0d", i, $signed(mx[i]), $signed(my[i]), $signed(p[i]));
        end
      end
    end
    // CPY and ZERO
    for (int i = 0; i < 16; i++) begin xa[i] = W'($urandom); yb[i] = W'($urandom); end
    serial(ALU_CPY, xa, yb, W, res);
    for (int i = 0; i < 16; i++) begin checks++; if (res[i] !== yb[i]) failures++; end
    serial(ALU_ZERO, xa, yb, W, res);
    for (int i = 0; i < 16; i++) begin checks++; if (res[i] !== '0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
