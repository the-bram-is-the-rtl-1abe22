// tb_gemv_tile: one GEMV tile of 3 x 2 blocks computes y = A x for a
// 3 x 32 matrix of 6-bit signed values through its instruction port:
// per-block loads, MULT, folds 8/4/2/1, one hop from column 1 to column 0,
// final ADD. The bits the leftmost PEs write (wb_bit/wb_en) are collected
// here as the column shift registers would; the last W of each row must
// be y. Column 0 then sends its result west with a TX; west_out of row 0
// must carry it, LSB first, at the expected cycle.
module tb_gemv_tile;
  import imagine_pkg::*;
  import imagine_tb_pkg::*;
  localparam int R = 3, C = 2, CB = 1, K = C * 16, N = 6, W = 18;
  localparam int A_AD = 0, X_AD = 8, P_AD = 16, T_AD = 40;
  logic clk = 0, rst = 1, instr_valid = 0, busy;
  logic [29:0] instr = '0;
  logic [R-1:0] east_in = '0, west_out, wb_bit, wb_en;
  logic [W-1:0] sr [R];
  int checks = 0, failures = 0;
  int a [R][K];
  int x [K];

  gemv_tile #(.ROWS(R), .COLS(C), .COL_BITS(CB), .DEPTH(128)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk)
    if (!rst) for (int r = 0; r < R; r++) if (wb_en[r]) sr[r] <= {wb_bit[r], sr[r][W-1:1]};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [29:0] ins);
    instr_valid = 1; instr = ins;
    @(negedge clk);
    instr_valid = 0;
    if (is_multi(ins[29:26])) begin
      repeat (2) @(negedge clk);
      while (busy) @(negedge clk);
    end
  endtask

  initial begin
    longint y;
    logic [W-1:0] wo, y0;
    repeat (5) @(negedge clk);
    rst = 0;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) a[r][k] = int'($urandom_range(0, 63)) - 32;
    for (int k = 0; k < K; k++) x[k] = int'($urandom_range(0, 63)) - 32;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        send(i_select(13'h1fff, 13'((r << CB) | c)));
        for (int b = 0; b < N; b++) begin
          logic [15:0] wd;
          for (int i = 0; i < 16; i++) wd[i] = 1'((a[r][c*16+i] >>> b) & 1);
          send(i_write(A_AD + b, wd));
        end
        for (int b = 0; b < N; b++) begin
          logic [15:0] wd;
          for (int i = 0; i < 16; i++) wd[i] = 1'((x[c*16+i] >>> b) & 1);
          send(i_write(X_AD + b, wd));
        end
      end
    send(i_select('0, '0));
    send(i_setparam(N, W, X_AD));
    send(i_mult(P_AD, A_AD));
    for (int f = 4; f >= 1; f--) send(i_add(P_AD, P_AD, f));
    send(i_select(13'h1, 13'h1));
    send(i_setptr(T_AD));
    send(i_tx(P_AD, 1));
    send(i_add(P_AD, T_AD, 0));
    repeat (4) @(negedge clk);
    for (int r = 0; r < R; r++) begin
      y = 0;
      for (int k = 0; k < K; k++) y += longint'(a[r][k]) * longint'(x[k]);
      checks++;
      if ($signed(sr[r]) !== W'(y)) begin
        failures++; $display("row %0d: got %0d expected %0d", r, $signed(sr[r]), y);
      end
    end
    // column 0 sends its result west: collect W bits of row 0
    y0 = sr[0];
    send(i_select(13'h1, 13'h0));
    fork
      send(i_tx(P_AD, 1));
      begin
        // first bit appears on west_out 2 + 2 (fanout) + 3 (controller) +
        // 1 (parameter load) cycles after the TX is presented
        repeat (8) @(posedge clk);
        for (int k = 0; k < W; k++) begin
          @(posedge clk); #1;
          wo[k] = west_out[0];
        end
      end
    join
    checks++;
    if (wo !== y0) begin failures++; $display("west_out %h vs %h", wo, y0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
