// tb_pim_opmux: checks every operand choice of the OpMux against a model:
// plain port B, folds by 1/2/4/8 PEs (zero fill), east-in broadcast and
// immediate data, and the one-cycle register stage.
module tb_pim_opmux;
  import imagine_pkg::*;
  logic clk = 0;
  logic [15:0] rd_a = '0, rd_b = '0, ext_data = '0, x_q, y_q, ex, ey;
  logic [2:0] fold = '0;
  logic is_tx = 0, east_in = 0, ext = 0;
  int checks = 0, failures = 0;
  int unsigned sel;

  pim_opmux #(.NPE(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      rd_a = 16'($urandom); rd_b = 16'($urandom); ext_data = 16'($urandom);
      fold = 3'($urandom_range(0, 4)); east_in = 1'($urandom);
      sel = $urandom_range(0, 2);
      case (sel)
        0: begin is_tx = 0; ext = 0; end
        1: begin is_tx = 1; ext = 0; end
        default: begin is_tx = 0; ext = 1; end
      endcase
      ex = rd_a;
      if (ext)            ey = ext_data;
      else if (is_tx)     ey = {16{east_in}};
      else begin
        for (int i = 0; i < 16; i++) begin
          int src;
          src = (fold == 0) ? i : i + (1 << (fold - 1));
          ey[i] = (src < 16) ? rd_b[src] : 1'b0;
        end
      end
      @(posedge clk); #1;
      checks += 2;
      if (x_q !== ex) begin failures++; $display("x mismatch"); end
      if (y_q !== ey) begin failures++; $display("y mismatch fold=%0d tx=%0d ext=%0d", fold, is_tx, ext); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
