// tb_input_regs: single-cycle instructions stream one per cycle and come
// out unchanged one cycle after acceptance; after a multicycle instruction
// in_ready stays low for RT_LAT cycles and then until busy_ret falls;
// issue also waits when busy returns late; SETPARAM's W field is kept.
module tb_input_regs;
  import imagine_pkg::*;
  import imagine_tb_pkg::*;
  localparam int RT = 5;
  logic clk = 0, rst = 1, in_valid = 0, in_ready, out_valid, busy_ret = 0, busy;
  logic [29:0] in_instr = '0, out_instr;
  logic [5:0] width_w;
  logic [29:0] sent [$];
  int checks = 0, failures = 0, cycles = 0;

  input_regs #(.RT_LAT(RT)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      checks++;
      if (sent.size() == 0 || out_instr !== sent[0]) begin
        failures++; $display("issued %h unexpected", out_instr);
      end
      if (sent.size() != 0) void'(sent.pop_front());
    end
  end

  initial begin
    int t0, blocked;
    repeat (3) @(negedge clk);
    rst = 0;
    // stream 20 single-cycle instructions back to back
    in_valid = 1;
    for (int k = 0; k < 20; k++) begin
      in_instr = i_write(k, 16'($urandom));
      checks++;
      if (!in_ready) begin failures++; $display("not ready for single-cycle stream"); end
      sent.push_back(in_instr);
      @(negedge clk);
    end
    in_instr = i_setparam(4, 21, 0);
    sent.push_back(in_instr);
    @(negedge clk);
    // multicycle: hold busy_ret high for a while after RT_LAT
    in_instr = i_add(1, 2, 0);
    sent.push_back(in_instr);
    @(negedge clk);
    in_instr = i_write(99, 16'h5555);
    busy_ret = 1;
    blocked = 0;
    t0 = cycles;
    fork
      begin repeat (RT + 8) @(negedge clk); busy_ret = 0; end
      begin
        while (!in_ready) begin blocked++; @(negedge clk); end
      end
    join
    sent.push_back(in_instr);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (blocked < RT + 8) begin failures++; $display("ready after %0d cycles", blocked); end
    // multicycle whose busy comes back late: busy_ret stays low for RT-1
    // cycles and is high for 4; issue must not resume in between
    in_valid = 1;
    in_instr = i_sub(3, 4);
    sent.push_back(in_instr);
    @(negedge clk);
    in_instr = i_write(98, 16'haaaa);
    blocked = 0;
    fork
      begin repeat (RT - 1) @(negedge clk); busy_ret = 1; repeat (4) @(negedge clk); busy_ret = 0; end
      begin
        while (!in_ready) begin blocked++; @(negedge clk); end
      end
    join
    sent.push_back(in_instr);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (blocked < RT + 3) begin failures++; $display("late busy: ready after %0d cycles", blocked); end
    checks++;
    if (width_w !== 6'd21) begin failures++; $display("width %0d", width_w); end
    repeat (3) @(negedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("%0d not issued", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
