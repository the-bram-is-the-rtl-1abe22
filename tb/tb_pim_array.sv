// tb_pim_array: a 2 x 4 PIM array. Each block is selected by its ID and
// given its own 8-bit value in PE 0. Then, for hops 1 and 2, the senders
// (column mod 2h == h) transfer their value west; every receiver (column
// mod 2h == 0) must hold its sender's value at the pointer address, and a
// receiver with no sender (beyond the east edge) must hold 0. Finally
// column 0 sends and the array's west_out must carry its bits in order.
// wb_bit/wb_en must mirror writes into PE 0 of column 0.
module tb_pim_array;
  import imagine_pkg::*;
  localparam int R = 2, C = 4, CB = 2, N = 8;
  logic clk = 0, rst = 1;
  pim_ctrl_t cw = CTRL_IDLE;
  pim_ctrl_t ctrl [R*C];
  logic [R-1:0] east_in = '0, west_out, wb_bit, wb_en;
  int checks = 0, failures = 0, n_wb = 0;
  logic [N-1:0] v [R][C];

  for (genvar k = 0; k < R*C; k++) begin : g_c
    assign ctrl[k] = cw;
  end
  pim_array #(.ROWS(R), .COLS(C), .COL_BITS(CB), .DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) for (int r = 0; r < R; r++) if (wb_en[r]) n_wb++;

  task automatic issue(input pim_ctrl_t c);
    cw = c;
    @(negedge clk);
    cw = CTRL_IDLE;
  endtask
  task automatic sel(input logic [12:0] mask, input logic [12:0] value);
    pim_ctrl_t c;
    c = CTRL_IDLE; c.sel_we = 1; c.imm = {mask, value};
    issue(c);
  endtask

  function automatic logic [N-1:0] rd(input int r, input int c, input int base);
    logic [N-1:0] x;
    for (int j = 0; j < N; j++) begin
      unique case (r * C + c)
        0: x[j] = dut.g_row[0].g_col[0].u_blk.u_rf.mem[base+j][0];
        1: x[j] = dut.g_row[0].g_col[1].u_blk.u_rf.mem[base+j][0];
        2: x[j] = dut.g_row[0].g_col[2].u_blk.u_rf.mem[base+j][0];
        3: x[j] = dut.g_row[0].g_col[3].u_blk.u_rf.mem[base+j][0];
        4: x[j] = dut.g_row[1].g_col[0].u_blk.u_rf.mem[base+j][0];
        5: x[j] = dut.g_row[1].g_col[1].u_blk.u_rf.mem[base+j][0];
        6: x[j] = dut.g_row[1].g_col[2].u_blk.u_rf.mem[base+j][0];
        default: x[j] = dut.g_row[1].g_col[3].u_blk.u_rf.mem[base+j][0];
      endcase
    end
    return x;
  endfunction

  task automatic tx(input int hop);
    pim_ctrl_t c;
    c = CTRL_IDLE; c.ptr_we = 1; c.addr_a = 20; issue(c);
    for (int k = 0; k < N + hop; k++) begin
      c = CTRL_IDLE; c.op = ALU_CPY; c.send = (k < N); c.addr_b = ADDR_W'(k);
      c.is_tx = (k >= hop); c.we = (k >= hop);
      issue(c);
    end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    pim_ctrl_t c;
    logic [N-1:0] wbits;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int r = 0; r < R; r++)
      for (int c2 = 0; c2 < C; c2++) begin
        v[r][c2] = N'($urandom);
        sel(13'h1fff, 13'((r << CB) | c2));
        for (int j = 0; j < N; j++) begin
          c = CTRL_IDLE; c.op = ALU_CPY; c.we = 1; c.ext = 1; c.addr_a = ADDR_W'(j);
          c.imm = IMM_W'({15'd0, v[r][c2][j]});
          issue(c);
        end
      end
    repeat (4) @(negedge clk);
    for (int r = 0; r < R; r++)
      for (int c2 = 0; c2 < C; c2++) begin
        checks++;
        if (rd(r, c2, 0) !== v[r][c2]) begin failures++; $display("load (%0d,%0d)", r, c2); end
      end
    checks++;
    if (n_wb != R * N) begin failures++; $display("wb_en count %0d", n_wb); end

    for (int h = 1; h <= 2; h *= 2) begin
      sel(13'(2*h - 1), 13'(h));
      tx(h);
      for (int r = 0; r < R; r++)
        for (int c2 = 0; c2 < C; c2 += 2*h) begin
          logic [N-1:0] e;
          e = (c2 + h < C) ? v[r][c2+h] : '0;
          checks++;
          if (rd(r, c2, 20) !== e) begin
            failures++; $display("hop %0d (%0d,%0d): got %h expected %h", h, r, c2, rd(r, c2, 20), e);
          end
        end
    end

    // column 0 sends: west_out of each row carries v[r][0] LSB first
    sel(13'h3, 13'h0);
    for (int r = 0; r < R; r++) begin
      fork
        begin
          for (int k = 0; k < N; k++) begin
            c = CTRL_IDLE; c.send = 1; c.addr_b = ADDR_W'(k); issue(c);
          end
        end
        begin
          @(posedge clk);
          for (int k = 0; k < N; k++) begin
            @(posedge clk); #1;
            wbits[k] = west_out[r];
          end
        end
      join
      checks++;
      if (wbits !== v[r][0]) begin failures++; $display("west_out row %0d: %h vs %h", r, wbits, v[r][0]); end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
