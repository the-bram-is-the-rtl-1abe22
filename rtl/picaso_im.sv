// picaso_im: one PiCaSO-IM processing-in-memory block (16 bit-serial PEs).
//
// The block is a four-stage pipeline around one RAMB18-sized register file:
//   stage 0  register-file read at port A and port B. Port A's address is
//            the control word's addr_a, or the pointer register during a
//            transfer (is_tx), which adds the third address the east-to-west
//            accumulation needs while ports A and B stay in use. With
//            `acc` (fused transfer-add) port A keeps addr_a (the block's
//            own partial sum) and only the write goes to the pointer.
//   stage 1  OpMux: chooses the y operand (port B, folded port B, east-in
//            or immediate data); the network node sends PE 0 of port B
//            west when the block is selected and `send` is set.
//   stage 2  ALU: 16 bit-serial ALUs with carry and Booth registers.
//   stage 3  write-back of the ALU word at the delayed write address
//            (port-A address, or the pointer during a transfer).
// Every control word is applied by all blocks (SIMD). The select flag
// (block-ID match) gates only external writes (ext) and network sends.
//
// Interface: `ctrl` is the tile's control word, one per cycle; `id` is the
// block's {row, column}. east_in/west_out is the east-to-west chain. wb_bit
// / wb_en show the bit written into PE 0, used by the leftmost blocks to
// feed the output shift registers.
// Timing: a control word read at cycle t writes back at the end of cycle
// t+3 (BLOCK_PIPE = 3 cycles between issue and write).
//
// Follows the paper: PiCaSO-F's register file / OpMux / ALU pipeline, the
// east-to-west network node, the pointer register with its address mux
// (isTx) and the ID-based select block (Fig. 4b). The pipeline depth, the
// control encoding and what the select flag gates are this design's own.
module picaso_im
  import imagine_pkg::*;
#(
  parameter int unsigned NPE   = imagine_pkg::NPE,
  parameter int unsigned DEPTH = imagine_pkg::DEPTH
) (
  input  logic            clk,
  input  logic            rst,
  input  pim_ctrl_t       ctrl,
  input  logic [ID_W-1:0] id,
  input  logic            east_in,
  output logic            west_out,
  output logic            wb_bit,
  output logic            wb_en
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    alu_op_e           op;
    logic              first;
    logic              we;
    logic              booth_ld;
    logic              booth_first;
    logic [FOLD_W-1:0] fold;
    logic              is_tx;
    logic              send;
    logic              ext;
    logic [AW-1:0]     waddr;
    logic [NPE-1:0]    data;
  } stage_t;

  logic           selected;
  logic [AW-1:0]  ptr, addr_a_eff, waddr_eff;
  logic [NPE-1:0] rd_a, rd_b, x, y, r;
  stage_t         s0, s1, s2, s3;

  // ---- stage 0: pointer, address mux, select, register-file read
  // TX writes the received bit at the pointer (read through port A);
  // TXADD reads the block's own partial sum at addr_a and writes the sum
  // at the pointer: three addresses in one cycle.
  assign addr_a_eff = (ctrl.is_tx && !ctrl.acc) ? ptr : ctrl.addr_a[AW-1:0];
  assign waddr_eff  = ctrl.is_tx ? ptr : ctrl.addr_a[AW-1:0];

  always_ff @(posedge clk) begin
    if (rst)              ptr <= '0;
    else if (ctrl.ptr_we) ptr <= ctrl.addr_a[AW-1:0];
    else if (ctrl.is_tx)  ptr <= ptr + 1'b1;
  end

  pim_select u_select (
    .clk, .rst, .id,
    .sel_we  (ctrl.sel_we),
    .mask    (ctrl.imm[2*ID_W-1:ID_W]),
    .value   (ctrl.imm[ID_W-1:0]),
    .selected
  );

  always_comb begin
    s0.op          = ctrl.op;
    s0.first       = ctrl.first;
    s0.we          = ctrl.we && (!ctrl.ext || selected);
    s0.booth_ld    = ctrl.booth_ld;
    s0.booth_first = ctrl.booth_first;
    s0.fold        = ctrl.fold;
    s0.is_tx       = ctrl.is_tx;
    s0.send        = ctrl.send;
    s0.ext         = ctrl.ext;
    s0.waddr       = waddr_eff;
    s0.data        = ctrl.imm[NPE-1:0];
  end

  pim_regfile #(.NPE(NPE), .DEPTH(DEPTH)) u_rf (
    .clk,
    .addr_a (addr_a_eff),
    .addr_b (ctrl.addr_b[AW-1:0]),
    .rd_a, .rd_b,
    .we     (s3.we),
    .waddr  (s3.waddr),
    .wdata  (r)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      s1 <= '0;
      s2 <= '0;
      s3 <= '0;
    end else begin
      s1 <= s0;
      s2 <= s1;
      s3 <= s2;
    end
  end

  // ---- stage 1: OpMux and network node
  pim_opmux #(.NPE(NPE)) u_opmux (
    .clk, .rd_a, .rd_b,
    .fold     (s1.fold),
    .is_tx    (s1.is_tx),
    .east_in,
    .ext      (s1.ext),
    .ext_data (s1.data),
    .x_q      (x),
    .y_q      (y)
  );

  pim_netnode u_node (
    .clk, .rst,
    .send      (s1.send && selected),
    .local_bit (rd_b[0]),
    .east_in,
    .west_out
  );

  // ---- stage 2: ALU
  pim_alu #(.NPE(NPE)) u_alu (
    .clk, .rst,
    .op          (s2.op),
    .first       (s2.first),
    .booth_ld    (s2.booth_ld),
    .booth_first (s2.booth_first),
    .x, .y,
    .r_q         (r)
  );

  // ---- stage 3: write-back (inside the register file)
  assign wb_bit = r[0];
  assign wb_en  = s3.we;
endmodule
