// tb_imagine_gemv: GEMV at the four precisions of the latency study
// (4, 8, 16 and 32-bit signed elements) on an engine of 1 x 2 tiles of the
// full tile size (12 x 2 blocks): 12 block rows by 4 block columns, so
// y = A x with a 12 x 64 matrix A. For each precision N the result width is
// W = 2N + 6 (a 2N-bit product plus log2(64) bits of sum growth), up to
// 72 bits for N = 32, which is also the width of the read-out.
// Each run: per-block matrix loads, per-column vector loads, MULT, folds
// 8, 4, 2, 1, binary hopping with hops 1 and 2 by the fused transfer-add
// (TXADD: each level's sum lands at the pointer and is the next level's
// source), read-out of the 12 results through FIFO-out. The array-level
// reduction time is checked against W + h + 4 controller cycles per level
// plus the issue round trip. The cycle count from the MULT to the end of the last
// reduction step is printed for each precision.
module tb_imagine_gemv;
  import imagine_pkg::*;
  import imagine_tb_pkg::*;

  localparam int TR = 1, TC = 2;
  localparam int NROW = TR * 12, NCOL = TC * 2, K = NCOL * NPE, COL_BITS = 2;
  localparam int A_AD = 0, X_AD = 32, P_AD = 64, T_AD = 160;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_shift = 0, out_valid, busy;
  logic [29:0] in_instr = '0;
  logic signed [71:0] out_data;

  imagine_top #(.TILE_ROWS(TR), .TILE_COLS(TC), .TOP_FAN_LEVELS(1)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0, got = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [29:0] ins);
    in_valid = 1'b1;
    in_instr = ins;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  logic signed [31:0] a [NROW][K];
  logic signed [31:0] x [K];
  logic signed [71:0] y [NROW];
  bit reading = 0;

  always @(posedge clk) begin
    if (!rst && reading && out_valid && got < NROW) begin
      checks++;
      if (out_data != y[got]) begin
        failures++;
        $display("row %0d: got %0d expected %0d", got, out_data, y[got]);
      end
      got++;
    end
  end

  function automatic logic signed [31:0] rnd(input int n);
    logic [31:0] v = $urandom;
    return n == 32 ? $signed(v) : $signed(v << (32 - n)) >>> (32 - n);
  endfunction

  task automatic run_gemv(input int n);
    int w = 2 * n + 6, t0, t1, src;
    for (int r = 0; r < NROW; r++)
      for (int k = 0; k < K; k++) a[r][k] = rnd(n);
    for (int k = 0; k < K; k++) x[k] = rnd(n);
    for (int r = 0; r < NROW; r++) begin
      y[r] = '0;
      for (int k = 0; k < K; k++) y[r] += 72'(a[r][k]) * 72'(x[k]);
    end
    for (int r = 0; r < NROW; r++)
      for (int c = 0; c < NCOL; c++) begin
        send(i_select(13'h1fff, 13'((r << COL_BITS) | c)));
        for (int b = 0; b < n; b++) begin
          logic [15:0] wd;
          for (int i = 0; i < NPE; i++) wd[i] = a[r][c*NPE+i][b];
          send(i_write(A_AD + b, wd));
        end
      end
    for (int c = 0; c < NCOL; c++) begin
      send(i_select(13'((1 << COL_BITS) - 1), 13'(c)));
      for (int b = 0; b < n; b++) begin
        logic [15:0] wd;
        for (int i = 0; i < NPE; i++) wd[i] = x[c*NPE+i][b];
        send(i_write(X_AD + b, wd));
      end
    end
    send(i_select('0, '0));
    send(i_setparam(n, w, X_AD));
    t0 = cycles;
    send(i_mult(P_AD, A_AD));
    for (int f = 4; f >= 1; f--) send(i_add(P_AD, P_AD, f));
    @(negedge clk);
    while (busy) @(negedge clk);
    t1 = cycles;
    // binary hopping with TXADD: level h reads partial sums at src and
    // writes the sums at the pointer, which becomes the next level's src
    src = P_AD;
    for (int h = 1, lvl = 0; h < NCOL; h *= 2, lvl++) begin
      send(i_select(13'(2*h - 1), 13'(h)));
      send(i_setptr(T_AD + lvl * w));
      send(i_txadd(src, h));
      src = T_AD + lvl * w;
    end
    @(negedge clk);
    while (busy) @(negedge clk);
    // each level: W + h + 4 controller cycles (the published (N+4) per
    // level plus the hop), plus a fixed issue/busy round trip per level
    checks++;
    if (cycles - t1 > 2 * (w + 4) + (NCOL - 1) + 2 * 30) begin
      failures++;
      $display("array-level reduction took %0d cycles", cycles - t1);
    end
    $display("%0d-bit array-level reduction (2 levels): %0d cycles", n, cycles - t1);
    $display("%0d-bit GEMV %0d x %0d (W = %0d): %0d cycles from MULT to result",
             n, NROW, K, w, cycles - t0);
    got = 0;
    reading = 1;
    out_shift = 1'b1;
    repeat (NROW) @(negedge clk);
    out_shift = 1'b0;
    repeat (6) @(negedge clk);
    reading = 0;
    checks++;
    if (got != NROW) begin failures++; $display("read %0d of %0d elements", got, NROW); end
  endtask

  initial begin
    repeat (8) @(negedge clk);
    rst = 1'b0;
    repeat (8) @(negedge clk);
    run_gemv(4);
    run_gemv(8);
    run_gemv(16);
    run_gemv(32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
