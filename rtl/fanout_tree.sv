// fanout_tree: pipelined register tree that fans a W-bit bundle out to
// N_OUT destinations.
//
// Level l (1..LEVELS) holds FANOUT^l copies of the bundle; copy i of level
// l is loaded from copy i/FANOUT of level l-1 (level 0 is the input).
// Output j is driven by leaf copy j mod FANOUT^LEVELS. Every output sees
// the input after exactly LEVELS cycles; LEVELS = 0 is a plain wire, so
// the tree can be tuned at implementation time without touching the logic
// around it. The registers have no reset and no enable (one control set);
// the source keeps them defined by sending idle words after reset.
//
// Follows the paper: a parameterized fanout tree between controller and
// PIM array, implemented with 2 levels and fanout 4 in the tile, and one
// between the input registers and the tile array. The leaf-to-output
// assignment is this design's choice.
module fanout_tree #(
  parameter int unsigned W      = 8,
  parameter int unsigned LEVELS = 2,
  parameter int unsigned FANOUT = 4,
  parameter int unsigned N_OUT  = 24
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout [N_OUT]
);
  localparam int unsigned LEAVES = FANOUT ** LEVELS;

  if (LEVELS == 0) begin : g_wire
    for (genvar j = 0; j < N_OUT; j++) begin : g_out
      assign dout[j] = din;
    end
  end else begin : g_tree
    for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
      localparam int unsigned N = FANOUT ** l;
      logic [W-1:0] q [N];
      for (genvar i = 0; i < N; i++) begin : g_reg
        if (l == 1) begin : g_root
          always_ff @(posedge clk) q[i] <= din;
        end else begin : g_inner
          always_ff @(posedge clk) q[i] <= g_lvl[l-1].q[i / FANOUT];
        end
      end
    end
    for (genvar j = 0; j < N_OUT; j++) begin : g_out
      assign dout[j] = g_lvl[LEVELS].q[j % LEAVES];
    end
  end
endmodule
