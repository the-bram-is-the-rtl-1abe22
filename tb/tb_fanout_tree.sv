// tb_fanout_tree: a 3-level fanout-2 tree with 10 outputs; random words
// must appear on every output exactly LEVELS cycles later.
module tb_fanout_tree;
  localparam int W = 12, L = 3, N = 10;
  logic clk = 0;
  logic [W-1:0] din = '0, dout [N];
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  fanout_tree #(.W(W), .LEVELS(L), .FANOUT(2), .N_OUT(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      din = W'($urandom);
      hist.push_back(din);
      @(posedge clk); #1;
      if (hist.size() >= L) begin
        logic [W-1:0] e;
        e = hist.pop_front();
        for (int j = 0; j < N; j++) begin
          checks++;
          if (dout[j] !== e) begin failures++; $display("out %0d wrong at t=%0d", j, t); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
