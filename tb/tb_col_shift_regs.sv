// tb_col_shift_regs: random W-bit values are written LSB first into each
// row at random times (rows interleaved, with other writes before them),
// then the column is read out: one element per cycle, row 0 first,
// sign-extended from W bits, two cycles after `shift`.
module tb_col_shift_regs;
  localparam int R = 6, OW = 32;
  logic clk = 0, rst = 1, shift = 0, out_valid;
  logic [R-1:0] wb_bit = '0, wb_en = '0;
  logic [5:0] width_w = 6'd13;
  logic signed [OW-1:0] out_data;
  int checks = 0, failures = 0;
  logic [12:0] v [R];

  col_shift_regs #(.NROW(R), .OUT_W(OW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [R];
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < R; r++) begin v[r] = 13'($urandom); cnt[r] = -int'($urandom_range(0, 7)); end
    // write garbage bits first (cnt < 0), then the value LSB first
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        wb_en[r] = 1'($urandom) && cnt[r] < 13;
        if (wb_en[r]) begin
          wb_bit[r] = (cnt[r] < 0) ? 1'($urandom) : v[r][cnt[r]];
          cnt[r]++;
        end
      end
    end
    @(negedge clk);
    wb_en = '0;
    for (int r = 0; r < R; r++) if (cnt[r] != 13) begin failures++; $display("row %0d incomplete", r); end
    shift = 1;
    repeat (R) @(negedge clk);
    shift = 0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      checks++;
      if (out_data !== OW'($signed(v[got]))) begin
        failures++; $display("row %0d: got %0d expected %0d", got, out_data, $signed(v[got]));
      end
      got++;
    end
  end
  final begin
    if (got != R) $display("read %0d of %0d", got, R);
  end
endmodule
