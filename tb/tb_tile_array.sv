// tb_tile_array: a 2 x 2 array of tiles with 2 x 2 blocks each (4 block
// rows, 4 block columns, 64 PEs per row) computes y = A x for a 4 x 64
// matrix of 7-bit signed values. All tiles get the same instruction, as
// from the top-level fanout tree. Binary hopping with hops 1 and 2 moves
// partial sums across the tile boundary. The bits written into the
// leftmost PEs (wb_bit/wb_en) are collected as the column shift registers
// would; the last W of each row must equal y.
module tb_tile_array;
  import imagine_pkg::*;
  import imagine_tb_pkg::*;
  localparam int TR = 2, TC = 2, PR = 2, PC = 2;
  localparam int R = TR * PR, C = TC * PC, CB = 2, K = C * 16, N = 7, W = 22;
  localparam int A_AD = 0, X_AD = 8, P_AD = 16, T_AD = 48;
  logic clk = 0, rst = 1, busy;
  logic [30:0] cur = '0;
  logic [30:0] tile_in [TR*TC];
  logic [R-1:0] wb_bit, wb_en;
  logic [W-1:0] sr [R];
  int checks = 0, failures = 0;
  int a [R][K];
  int x [K];

  for (genvar k = 0; k < TR*TC; k++) begin : g_in
    assign tile_in[k] = cur;
  end
  tile_array #(.TILE_ROWS(TR), .TILE_COLS(TC), .ROWS(PR), .COLS(PC),
               .FAN_LEVELS(1), .DEPTH(128)) dut (.*);
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
    cur = {1'b1, ins};
    @(negedge clk);
    cur = '0;
    if (is_multi(ins[29:26])) begin
      repeat (2) @(negedge clk);
      while (busy) @(negedge clk);
    end
  endtask

  initial begin
    longint y;
    repeat (5) @(negedge clk);
    rst = 0;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) a[r][k] = int'($urandom_range(0, 127)) - 64;
    for (int k = 0; k < K; k++) x[k] = int'($urandom_range(0, 127)) - 64;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        send(i_select(13'h1fff, 13'((r << CB) | c)));
        for (int b = 0; b < N; b++) begin
          logic [15:0] wd;
          for (int i = 0; i < 16; i++) wd[i] = 1'((a[r][c*16+i] >>> b) & 1);
          send(i_write(A_AD + b, wd));
        end
      end
    for (int c = 0; c < C; c++) begin
      send(i_select(13'h3, 13'(c)));
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
    for (int h = 1; h < C; h *= 2) begin
      send(i_select(13'(2*h - 1), 13'(h)));
      send(i_setptr(T_AD));
      send(i_tx(P_AD, h));
      send(i_add(P_AD, T_AD, 0));
    end
    repeat (4) @(negedge clk);
    for (int r = 0; r < R; r++) begin
      y = 0;
      for (int k = 0; k < K; k++) y += longint'(a[r][k]) * longint'(x[k]);
      checks++;
      if ($signed(sr[r]) !== W'(y)) begin
        failures++; $display("row %0d: got %0d expected %0d", r, $signed(sr[r]), y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
