// tb_imagine_top: end-to-end GEMV on a reduced IMAGine engine.
//
// Engine: 1 x 2 tiles of 2 x 2 blocks, i.e. 2 block rows of 4 blocks, 64
// PEs per row. The test computes y = A x for a random 2 x 64 matrix A and
// vector x of 8-bit signed integers, the way a front end would:
//   1. per block, SELECT it and WRITE its 16 matrix elements bit-serially
//      (one word per bit position); per block column, SELECT the column
//      and WRITE the vector slice (broadcast to all rows);
//   2. MULT: every PE forms A[r][k] * x[k] (Booth radix-2, W = 24 bits);
//   3. in-block reduction: ADD with fold 8, 4, 2, 1 into PE 0;
//   4. array reduction by binary hopping: for hop 1, 2: SELECT the senders
//      (column mod 2*hop == hop), SETPTR, TX, ADD;
//   5. read the output column through FIFO-out and compare with y.
// It also runs SUB once and checks it, and counts how often each
// mechanism happened: issue stalls behind multicycle instructions, selects,
// folds, hops, Booth steps with add and with subtract, output reads.
// The cycle count of one ADD level (W + 4 inside the controller) is checked
// through the time in_ready stays low.
module tb_imagine_top;
  import imagine_pkg::*;
  import imagine_tb_pkg::*;

  localparam int TR = 1, TC = 2, PR = 2, PC = 2;
  localparam int NROW = TR * PR, NCOL = TC * PC, K = NCOL * NPE;
  localparam int N = 8, W = 24;
  localparam int A_AD = 0, X_AD = 16, P_AD = 32, T_AD = 64, S_AD = 100;
  localparam int COL_BITS = $clog2(NCOL);

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_shift = 0, out_valid, busy;
  logic [29:0] in_instr = '0;
  logic signed [71:0] out_data;

  imagine_top #(.TILE_ROWS(TR), .TILE_COLS(TC), .PIM_ROWS(PR), .PIM_COLS(PC),
                .TOP_FAN_LEVELS(1)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int n_stall = 0, n_select = 0, n_fold = 0, n_hop = 0, n_booth_add = 0,
      n_booth_sub = 0, n_read = 0;

  always @(posedge clk) begin
    cycles++;
    if (in_valid && !in_ready) n_stall++;
  end

  // Booth decisions actually taken by the PEs of block (0,0)
  logic [NPE-1:0] bc, bp;
  assign bc = dut.u_tiles.g_tr[0].g_tc[0].u_tile.u_array.g_row[0].g_col[0].u_blk.u_alu.booth_cur;
  assign bp = dut.u_tiles.g_tr[0].g_tc[0].u_tile.u_array.g_row[0].g_col[0].u_blk.u_alu.booth_prev;
  always @(posedge clk) begin
    if (dut.u_tiles.g_tr[0].g_tc[0].u_tile.u_array.g_row[0].g_col[0].u_blk.s2.op == ALU_BOOTH) begin
      n_booth_sub += $countones(bc & ~bp);
      n_booth_add += $countones(~bc & bp);
    end
  end

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

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  function automatic logic [12:0] bid(input int r, input int c);
    return 13'((r << COL_BITS) | c);
  endfunction

  int a [NROW][K];
  int x [K];
  longint y [NROW];

  task automatic read_out(input string what, input longint expect_v [NROW]);
    int got = 0;
    @(negedge clk);
    out_shift = 1'b1;
    repeat (NROW) @(negedge clk);
    out_shift = 1'b0;
    fork
      begin
        repeat (NROW + 4) @(posedge clk);
      end
      begin
        while (got < NROW) begin
          @(posedge clk);
          if (out_valid) begin
            checks++;
            n_read++;
            if (out_data != 72'(expect_v[got])) begin
              failures++;
              $display("%s row %0d: got %0d expected %0d", what, got, out_data, expect_v[got]);
            end
            got++;
          end
        end
      end
    join_any
    disable fork;
    if (got != NROW) begin
      failures++;
      $display("%s: only %0d elements read", what, got);
    end
  endtask

  initial begin
    longint d [NROW];
    int t0, t1;
    for (int r = 0; r < NROW; r++)
      for (int k = 0; k < K; k++) a[r][k] = int'($urandom_range(0, 255)) - 128;
    for (int k = 0; k < K; k++) x[k] = int'($urandom_range(0, 255)) - 128;
    a[0][0] = -128; x[0] = -128;  // extreme corner
    for (int r = 0; r < NROW; r++) begin
      y[r] = 0;
      for (int k = 0; k < K; k++) y[r] += longint'(a[r][k]) * longint'(x[k]);
    end

    repeat (6) @(negedge clk);
    rst = 1'b0;
    repeat (6) @(negedge clk);

    // 1. load matrix (per block) and vector (per block column)
    for (int r = 0; r < NROW; r++)
      for (int c = 0; c < NCOL; c++) begin
        send(i_select(13'h1fff, bid(r, c)));
        n_select++;
        for (int b = 0; b < N; b++) begin
          logic [15:0] wd;
          for (int i = 0; i < NPE; i++) wd[i] = 1'((a[r][c*NPE+i] >>> b) & 1);
          send(i_write(A_AD + b, wd));
        end
      end
    for (int c = 0; c < NCOL; c++) begin
      send(i_select(13'((1 << COL_BITS) - 1), 13'(c)));
      n_select++;
      for (int b = 0; b < N; b++) begin
        logic [15:0] wd;
        for (int i = 0; i < NPE; i++) wd[i] = 1'((x[c*NPE+i] >>> b) & 1);
        send(i_write(X_AD + b, wd));
      end
    end
    send(i_select('0, '0));

    // 2. multiply: P = A * x, W bits
    send(i_setparam(N, W, X_AD));
    send(i_mult(P_AD, A_AD));

    // 3. in-block reduction into PE 0; time one ADD level
    for (int f = 4; f >= 1; f--) begin
      @(negedge clk);
      t0 = cycles;
      send(i_add(P_AD, P_AD, f));
      t1 = cycles;
      n_fold++;
      if (f == 4) begin
        // the ADD is accepted at once; the next instruction waits for it
        send(i_select('0, '0));
        checks++;
        // W + 4 controller cycles plus the busy round trip (2*levels + 4
        // + pipeline), measured from the ADD's acceptance
        if (cycles - t1 < W + 4 || cycles - t1 > W + 4 + 20) begin
          failures++;
          $display("ADD level took %0d cycles", cycles - t1);
        end
      end
    end

    // 4. array-level reduction by binary hopping
    for (int h = 1; h < NCOL; h *= 2) begin
      send(i_select(13'(2*h - 1), 13'(h)));
      send(i_setptr(T_AD));
      send(i_tx(P_AD, h));
      send(i_add(P_AD, T_AD, 0));
      n_hop++;
    end
    wait_idle();

    // 5. read the result vector
    read_out("gemv", y);

    // SUB: D = P - P' where P' is a second copy of the vector: use
    // A*x again into S and subtract: S - P = 0 in every row's PE 0
    send(i_select('0, '0));
    send(i_mult(S_AD, A_AD));
    for (int f = 4; f >= 1; f--) send(i_add(S_AD, S_AD, f));
    send(i_sub(S_AD, P_AD));   // leftmost PE: in-block sum - full row sum
    wait_idle();
    // expected: row's leftmost-block partial sum minus the full sum
    for (int r = 0; r < NROW; r++) begin
      longint ps;
      ps = 0;
      for (int k = 0; k < NPE; k++) ps += longint'(a[r][k]) * longint'(x[k]);
      d[r] = ps - y[r];
    end
    read_out("sub", d);

    checks++;
    if (n_stall == 0 || n_select == 0 || n_fold == 0 || n_hop == 0 ||
        n_booth_add == 0 || n_booth_sub == 0 || n_read == 0) begin
      failures++;
      $display("mechanism not exercised: stall %0d select %0d fold %0d hop %0d booth+ %0d booth- %0d read %0d",
               n_stall, n_select, n_fold, n_hop, n_booth_add, n_booth_sub, n_read);
    end
    $display("mechanisms: stall=%0d select=%0d fold=%0d hop=%0d booth_add=%0d booth_sub=%0d read=%0d cycles=%0d",
             n_stall, n_select, n_fold, n_hop, n_booth_add, n_booth_sub, n_read, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
