// tb_pim_netnode: a chain of 8 nodes. Random senders and bits; checks that
// every node's west_out equals, one cycle later, its own bit when it sends
// and its east neighbour's output otherwise, and that a bit injected h
// nodes east arrives after h cycles.
module tb_pim_netnode;
  localparam int L = 8;
  logic clk = 0, rst = 1;
  logic [L-1:0] send = '0, local_bit = '0, wo;
  logic [L:0] chain;
  int checks = 0, failures = 0;

  assign chain[L] = 1'b0;
  for (genvar k = 0; k < L; k++) begin : g_n
    pim_netnode u (.clk, .rst, .send(send[k]), .local_bit(local_bit[k]),
                   .east_in(chain[k+1]), .west_out(wo[k]));
    assign chain[k] = wo[k];
  end
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L:0] prev;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      send = L'($urandom); local_bit = L'($urandom);
      prev = chain;
      @(posedge clk); #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (wo[k] !== (send[k] ? local_bit[k] : prev[k+1])) begin
          failures++; $display("node %0d wrong", k);
        end
      end
    end
    // hop latency: inject at node 5, observe at node 0 after 6 cycles (5 hops + its own register)
    @(negedge clk);
    send = '0; local_bit = '0;
    repeat (L + 1) @(negedge clk);   // flush the chain
    send = 8'b0010_0000; local_bit = 8'b0010_0000;
    @(negedge clk);
    send = '0; local_bit = '0;
    for (int c = 1; c <= 7; c++) begin
      checks++;
      if (wo[0] !== (c == 6)) begin failures++; $display("hop timing c=%0d", c); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
