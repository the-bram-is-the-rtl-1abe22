// input_regs: the engine's input registers between FIFO-in and the
// top-level fanout tree.
//
// The front end offers one 30-bit instruction per cycle (in_valid /
// in_ready, transfer when both are high). The register holds one
// instruction and issues it on out_valid/out_instr the next cycle.
// Single-cycle instructions stream at one per cycle. After a multicycle
// instruction (opcode bit 3) issue stops: the register waits RT_LAT
// cycles, the time for the tile controllers' busy flag to come back
// through the return pipeline, and then until busy_ret is low.
// The register also keeps the result width W of the last SETPARAM, which
// the column shift registers need to align the output elements.
//
// The paper names the input registers as the front end's way to send
// instructions to the tiles; the handshake and the busy wait are this
// design's choice.
module input_regs
  import imagine_pkg::*;
#(
  parameter int unsigned RT_LAT = 12
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [INSTR_W-1:0] in_instr,
  output logic               out_valid,
  output logic [INSTR_W-1:0] out_instr,
  input  logic               busy_ret,
  output logic [PREC_W-1:0]  width_w,
  output logic               busy
);
  localparam int unsigned CW = $clog2(RT_LAT + 1);
  logic [CW-1:0] wait_cnt;
  logic          waiting;

  assign busy     = waiting || out_valid;
  assign in_ready = !waiting && !(out_valid && is_multi(out_instr[INSTR_W-1 -: 4]));

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_instr <= '0;
      waiting   <= 1'b0;
      wait_cnt  <= '0;
      width_w   <= PREC_W'(16);
    end else begin
      out_valid <= in_valid && in_ready;
      if (in_valid && in_ready) begin
        out_instr <= in_instr;
        if (in_instr[INSTR_W-1 -: 4] == OP_SETPARAM) width_w <= in_instr[18:12];
      end
      if (out_valid && is_multi(out_instr[INSTR_W-1 -: 4])) begin
        waiting  <= 1'b1;
        wait_cnt <= CW'(RT_LAT);
      end else if (waiting) begin
        if (wait_cnt != '0) wait_cnt <= wait_cnt - 1'b1;
        else if (!busy_ret) waiting  <= 1'b0;
      end
    end
  end
endmodule
