// tb_tile_controller: sends instructions to the controller and compares
// the stream of non-idle control words with an expected stream built here
// from the instruction semantics (WRITE, SELECT, SETPTR, SETPARAM, ADD with
// fold, SUB, CLEAR, MULT, TX, TXADD). Checks:
//   - every word, in order;
//   - single-cycle latency: a WRITE's word leaves 3 cycles after it is
//     presented (input register + stage A + output register);
//   - one ADD keeps busy high for W + 4 controller cycles plus the 2 cycles
//     of input register and stage A (parameter load + W words + drain);
//   - single-cycle instructions stream at one per cycle.
module tb_tile_controller;
  import imagine_pkg::*;
  import imagine_tb_pkg::*;
  logic clk = 0, rst = 1, instr_valid = 0, busy;
  logic [29:0] instr = '0;
  pim_ctrl_t ctrl_out;
  pim_ctrl_t expq [$];
  int checks = 0, failures = 0, cycles = 0, words = 0;

  tile_controller dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare every non-idle word with the head of the expected queue
  always @(posedge clk) begin
    if (!rst && ctrl_out != CTRL_IDLE) begin
      checks++;
      words++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected word %h", ctrl_out);
      end else begin
        pim_ctrl_t e;
        e = expq.pop_front();
        if (ctrl_out != e) begin
          failures++;
          $display("word %0d: got %h expected %h", words, ctrl_out, e);
        end
      end
    end
  end

  task automatic send(input logic [29:0] ins);
    instr_valid = 1; instr = ins;
    @(negedge clk);
    instr_valid = 0;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  pim_ctrl_t c;
  function automatic pim_ctrl_t w0();
    return CTRL_IDLE;
  endfunction

  initial begin
    int n, w, aux, t0, bcount;
    repeat (4) @(negedge clk);
    rst = 0;
    @(negedge clk);

    // WRITE latency: presented at cycle t0, word visible 3 edges later
    c = w0(); c.op = ALU_CPY; c.we = 1; c.ext = 1; c.addr_a = 10'd7; c.imm = 26'h0beef;
    expq.push_back(c);
    send(i_write(7, 16'hbeef));
    repeat (2) @(negedge clk);
    checks++;
    if (ctrl_out != c) begin failures++; $display("WRITE latency"); end
    wait_idle();

    // streaming single-cycle instructions
    c = w0(); c.sel_we = 1; c.imm = {13'h0f0, 13'h020}; expq.push_back(c);
    c = w0(); c.ptr_we = 1; c.addr_a = 10'd300; expq.push_back(c);
    c = w0(); c.op = ALU_CPY; c.we = 1; c.ext = 1; c.addr_a = 10'd1; c.imm = 26'h1234; expq.push_back(c);
    send(i_select(13'h0f0, 13'h020));
    send(i_setptr(300));
    send(i_write(1, 16'h1234));
    wait_idle();

    // SETPARAM then ADD with fold
    n = 5; w = 9; aux = 500;
    send(i_setparam(n, w, aux));
    for (int j = 0; j < w; j++) begin
      c = w0(); c.op = ALU_ADD; c.first = (j == 0); c.we = 1; c.fold = 3'd2;
      c.addr_a = 10'(100 + j); c.addr_b = 10'(200 + j); expq.push_back(c);
    end
    @(negedge clk);
    t0 = cycles;
    send(i_add(100, 200, 2));
    bcount = 0;
    while (!busy) @(negedge clk);
    while (busy) begin bcount++; @(negedge clk); end
    checks++;
    if (bcount != w + 4 + 2) begin failures++; $display("ADD busy %0d cycles, expected %0d", bcount, w + 6); end
    wait_idle();

    // SUB
    for (int j = 0; j < w; j++) begin
      c = w0(); c.op = ALU_SUB; c.first = (j == 0); c.we = 1;
      c.addr_a = 10'(10 + j); c.addr_b = 10'(20 + j); expq.push_back(c);
    end
    send(i_sub(10, 20));
    wait_idle();

    // CLEAR
    for (int j = 0; j < w; j++) begin
      c = w0(); c.op = ALU_ZERO; c.we = 1; c.addr_a = 10'(40 + j); expq.push_back(c);
    end
    send(i_clear(40));
    wait_idle();

    // MULT P=600 X=700 Y=aux
    for (int j = 0; j < w; j++) begin
      c = w0(); c.op = ALU_ZERO; c.we = 1; c.addr_a = 10'(600 + j); expq.push_back(c);
    end
    for (int s = 0; s < n; s++) begin
      c = w0(); c.booth_ld = 1; c.booth_first = (s == 0); c.addr_b = 10'(aux + s); expq.push_back(c);
      for (int j = 0; j < w - s; j++) begin
        c = w0(); c.op = ALU_BOOTH; c.first = (j == 0); c.we = 1;
        c.addr_a = 10'(600 + s + j); c.addr_b = 10'(700 + ((j < n) ? j : n - 1));
        expq.push_back(c);
      end
    end
    send(i_mult(600, 700));
    wait_idle();

    // TX hop 3
    for (int k = 0; k < w + 3; k++) begin
      c = w0(); c.op = ALU_CPY; c.send = (k < w); c.addr_b = 10'(50 + k);
      c.addr_a = 10'(50 + k - 3); c.first = (k == 3);
      c.is_tx = (k >= 3); c.we = (k >= 3); expq.push_back(c);
    end
    send(i_tx(50, 3));
    wait_idle();

    // TXADD hop 2: send bit k of A, add the bit received (k-2) to own
    // bit k-2 of A, write at the pointer
    for (int k = 0; k < w + 2; k++) begin
      c = w0(); c.op = ALU_ADD; c.acc = 1; c.send = (k < w);
      c.addr_b = 10'(80 + k); c.addr_a = 10'(80 + k - 2); c.first = (k == 2);
      c.is_tx = (k >= 2); c.we = (k >= 2); expq.push_back(c);
    end
    send(i_txadd(80, 2));
    wait_idle();

    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
