// tb_pim_select: reset state (selected), then random mask/value matches
// against the block's ID, and the flag holding between SELECTs.
module tb_pim_select;
  logic clk = 0, rst = 1, sel_we = 0, selected;
  logic [12:0] id = 13'h0a5, mask = '0, value = '0;
  logic exp_sel;
  int checks = 0, failures = 0;

  pim_select dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    checks++;
    if (selected !== 1'b1) begin failures++; $display("not selected after reset"); end
    exp_sel = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      sel_we = 1'($urandom);
      mask = 13'($urandom);
      value = ($urandom_range(0, 1) == 0) ? (id ^ (13'($urandom) & ~mask)) : 13'($urandom);
      if (sel_we) exp_sel = ((id & mask) == (value & mask));
      @(posedge clk); #1;
      checks++;
      if (selected !== exp_sel) begin failures++; $display("select mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
