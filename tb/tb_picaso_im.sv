// tb_picaso_im: one PiCaSO-IM block driven by control words.
// Checks, against integer models of all 16 PEs:
//   external writes and their gating by the select flag,
//   bit-serial ADD and SUB, in-block folds (d = 8, 4, 2, 1 leave the sum of
//   all 16 PEs in PE 0), Booth radix-2 MULT, the pointer register and the
//   network: a transfer sends PE 0's bits on west_out two cycles after the
//   read, and received east-in bits land at the pointer address; the
//   fused transfer-add writes own + received at the pointer.
// Also checks the 3-cycle issue-to-write-back latency via wb_en.
module tb_picaso_im;
  import imagine_pkg::*;
  localparam int N = 8, W = 16;
  logic clk = 0, rst = 1, east_in = 0, west_out, wb_bit, wb_en;
  pim_ctrl_t ctrl = CTRL_IDLE;
  logic [ID_W-1:0] id = 13'h045;
  int checks = 0, failures = 0;

  picaso_im #(.DEPTH(256)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input pim_ctrl_t c);
    ctrl = c;
    @(negedge clk);
    ctrl = CTRL_IDLE;
  endtask
  task automatic drain();
    repeat (BLOCK_PIPE + 1) @(negedge clk);
  endtask

  function automatic logic [W-1:0] rd(input int base, input int pe, input int nb);
    logic [W-1:0] v = '0;
    for (int j = 0; j < nb; j++) v[j] = dut.u_rf.mem[base + j][pe];
    return v;
  endfunction

  task automatic write_vals(input int base, input int nb, input logic [W-1:0] v [16]);
    pim_ctrl_t c;
    for (int j = 0; j < nb; j++) begin
      c = CTRL_IDLE; c.op = ALU_CPY; c.we = 1; c.ext = 1; c.addr_a = ADDR_W'(base + j);
      for (int i = 0; i < 16; i++) c.imm[i] = v[i][j];
      issue(c);
    end
    drain();
  endtask

  task automatic serial(input alu_op_e op, input int a, input int b, input int nb, input int fold);
    pim_ctrl_t c;
    for (int j = 0; j < nb; j++) begin
      c = CTRL_IDLE; c.op = op; c.first = (j == 0); c.we = 1; c.fold = FOLD_W'(fold);
      c.addr_a = ADDR_W'(a + j); c.addr_b = ADDR_W'(b + j);
      issue(c);
    end
    drain();
  endtask

  task automatic check(input string what, input int base, input int nb, input logic [W-1:0] e [16]);
    logic [W-1:0] m;
    m = (nb >= W) ? '1 : W'((1 << nb) - 1);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if ((rd(base, i, nb) & m) !== (e[i] & m)) begin
        failures++;
        $display("%s pe %0d: got %h expected %h", what, i, rd(base, i, nb), e[i] & m);
      end
    end
  endtask

  initial begin
    logic [W-1:0] va [16], vb [16], e [16], vx [16], vy [16];
    pim_ctrl_t c;
    int t_issue;
    repeat (4) @(negedge clk);
    rst = 0;

    for (int i = 0; i < 16; i++) begin va[i] = W'($urandom); vb[i] = W'($urandom); end
    write_vals(0, W, va);
    write_vals(20, W, vb);
    check("write A", 0, W, va);
    check("write B", 20, W, vb);

    // write-back latency: a word present in cycle t is written back at the
    // end of cycle t+3, so wb_en is high during cycle t+3
    c = CTRL_IDLE; c.op = ALU_CPY; c.we = 1; c.ext = 1; c.addr_a = 200;
    ctrl = c;
    @(posedge clk); #1;   // edge at the end of the issue cycle
    ctrl = CTRL_IDLE;
    for (int k = 1; k <= 4; k++) begin
      checks++;
      if (wb_en !== (k == 3)) begin failures++; $display("wb_en in cycle t+%0d = %b", k, wb_en); end
      @(posedge clk); #1;
    end
    @(negedge clk);

    // select gating: a non-matching SELECT blocks external writes
    c = CTRL_IDLE; c.sel_we = 1; c.imm = {13'h1fff, 13'h044};
    issue(c);
    for (int i = 0; i < 16; i++) e[i] = W'($urandom);
    write_vals(40, W, e);
    check("unselected write", 0, W, va);   // unchanged elsewhere
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (rd(40, i, W) == e[i]) begin failures++; $display("write while unselected"); end
    end
    c = CTRL_IDLE; c.sel_we = 1; c.imm = {13'h00f, 13'h005};  // matches low nibble
    issue(c);
    write_vals(40, W, e);
    check("selected write", 40, W, e);

    // ADD, SUB
    serial(ALU_ADD, 0, 20, W, 0);
    for (int i = 0; i < 16; i++) e[i] = va[i] + vb[i];
    check("ADD", 0, W, e);
    for (int i = 0; i < 16; i++) va[i] = e[i];
    serial(ALU_SUB, 0, 20, W, 0);
    for (int i = 0; i < 16; i++) e[i] = va[i] - vb[i];
    check("SUB", 0, W, e);
    for (int i = 0; i < 16; i++) va[i] = e[i];

    // folds
    for (int f = 4; f >= 1; f--) begin
      int d;
      d = 1 << (f - 1);
      serial(ALU_ADD, 0, 0, W, f);
      for (int i = 0; i < 16; i++) e[i] = va[i] + ((i + d < 16) ? va[i + d] : '0);
      check("fold", 0, W, e);
      for (int i = 0; i < 16; i++) va[i] = e[i];
    end

    // Booth MULT: P(60, W bits) = X(80, N bits) * Y(90, N bits)
    for (int i = 0; i < 16; i++) begin vx[i] = W'($urandom) & 16'h00ff; vy[i] = W'($urandom) & 16'h00ff; end
    write_vals(80, N, vx);
    write_vals(90, N, vy);
    for (int j = 0; j < W; j++) begin
      c = CTRL_IDLE; c.op = ALU_ZERO; c.we = 1; c.addr_a = ADDR_W'(60 + j); issue(c);
    end
    for (int s = 0; s < N; s++) begin
      c = CTRL_IDLE; c.booth_ld = 1; c.booth_first = (s == 0); c.addr_b = ADDR_W'(90 + s); issue(c);
      for (int j = 0; j < W - s; j++) begin
        c = CTRL_IDLE; c.op = ALU_BOOTH; c.first = (j == 0); c.we = 1;
        c.addr_a = ADDR_W'(60 + s + j); c.addr_b = ADDR_W'(80 + ((j < N) ? j : N - 1));
        issue(c);
      end
    end
    drain();
    for (int i = 0; i < 16; i++) e[i] = W'($signed(vx[i][N-1:0]) * $signed(vy[i][N-1:0]));
    check("MULT", 60, W, e);

    // transfer: send bits of addr 20 (PE 0) and receive a pattern at ptr 120
    c = CTRL_IDLE; c.ptr_we = 1; c.addr_a = 120; issue(c);
    c = CTRL_IDLE; c.sel_we = 1; c.imm = '0; issue(c);   // select
    fork
      begin
        for (int k = 0; k < W + 1; k++) begin
          c = CTRL_IDLE; c.op = ALU_CPY; c.send = (k < W); c.addr_b = ADDR_W'(20 + k);
          c.is_tx = (k >= 1); c.we = (k >= 1);
          issue(c);
        end
        drain();
      end
      begin
        // west_out carries bit k two edges after issue k; feed it back as
        // east-in (a hop of 1 through this block's own node)
        for (int k = 0; k < W + 4; k++) begin
          @(posedge clk); #1;
          east_in = west_out;
        end
      end
    join
    for (int i = 0; i < 16; i++) e[i] = vb[0];
    check("transfer", 120, W, e);
    checks++;
    if (dut.ptr !== ADDR_W'(120 + W)) begin failures++; $display("pointer %0d", dut.ptr); end

    // fused transfer-add: send addr 20 again, every PE adds the received
    // bit to its own bit of addr 20 (port A) and writes the sum at ptr 140
    c = CTRL_IDLE; c.ptr_we = 1; c.addr_a = 140; issue(c);
    fork
      begin
        for (int k = 0; k < W + 1; k++) begin
          c = CTRL_IDLE; c.op = ALU_ADD; c.acc = 1; c.first = (k == 1);
          c.send = (k < W); c.addr_b = ADDR_W'(20 + k); c.addr_a = ADDR_W'(20 + k - 1);
          c.is_tx = (k >= 1); c.we = (k >= 1);
          issue(c);
        end
        drain();
      end
      begin
        for (int k = 0; k < W + 4; k++) begin
          @(posedge clk); #1;
          east_in = west_out;
        end
      end
    join
    for (int i = 0; i < 16; i++) e[i] = vb[i] + vb[0];
    check("transfer-add", 140, W, e);
    for (int i = 0; i < 16; i++) e[i] = vb[i];
    check("transfer-add source kept", 20, W, e);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
