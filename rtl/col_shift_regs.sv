// col_shift_regs: the column of shift registers that collects the output
// vector, and its read-out path to FIFO-out.
//
// There is one OUT_W-bit register per block row. Whenever the leftmost PE
// of that row is written (wb_en), the written bit enters the register at
// the top and the register shifts right, so after a W-bit result has been
// written LSB first, the register's top W bits hold it. At the end of a
// GEMV this is the row's element of the output vector.
// Read-out: while `shift` is high the column moves up by one register per
// cycle; the element leaving register 0 passes OUT_PIPE output registers
// and appears on out_data, sign-extended from W bits, with out_valid, one
// element per cycle, row 0 first.
//
// Follows the paper: the shift registers fed by the writes to the leftmost
// PEs, shifted up and read through FIFO-out one element per cycle, with two
// output registers as drawn in Fig. 3(a). OUT_W and the sign-extension are
// this design's choices.
module col_shift_regs
  import imagine_pkg::*;
#(
  parameter int unsigned NROW     = 168,
  parameter int unsigned OUT_W    = 72,
  parameter int unsigned OUT_PIPE = 2
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [NROW-1:0]         wb_bit,
  input  logic [NROW-1:0]         wb_en,
  input  logic [PREC_W-1:0]       width_w,
  input  logic                    shift,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  logic [OUT_W-1:0] sr [NROW];
  logic [OUT_W-1:0] pipe_d [OUT_PIPE+1];
  logic             pipe_v [OUT_PIPE+1];
  int unsigned      sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int r = 0; r < NROW; r++) sr[r] <= '0;
    end else begin
      for (int r = 0; r < NROW; r++) begin
        if (shift)        sr[r] <= (r == NROW - 1) ? '0 : sr[r+1];
        else if (wb_en[r]) sr[r] <= {wb_bit[r], sr[r][OUT_W-1:1]};
      end
    end
  end

  // align: the result sits in the top W bits
  always_comb begin
    sh        = (int'(width_w) >= OUT_W || width_w == '0) ? 0 : OUT_W - int'(width_w);
    pipe_d[0] = OUT_W'($signed(sr[0]) >>> sh);
    pipe_v[0] = shift;
  end

  for (genvar k = 1; k <= OUT_PIPE; k++) begin : g_pipe
    always_ff @(posedge clk) begin
      if (rst) begin
        pipe_d[k] <= '0;
        pipe_v[k] <= 1'b0;
      end else begin
        pipe_d[k] <= pipe_d[k-1];
        pipe_v[k] <= pipe_v[k-1];
      end
    end
  end

  assign out_data  = pipe_d[OUT_PIPE];
  assign out_valid = pipe_v[OUT_PIPE];
endmodule
