// tile_controller: the GEMV tile controller.
//
// It takes one 30-bit instruction per cycle (when `instr_valid`) and turns
// it into a stream of block control words. Its parts, in pipeline order:
//   input register -> decoder -> [A] -> Op-Params, single-cycle driver,
//   driver-select FSM -> [B] -> multicycle driver -> [C] -> outmux ->
//   output register.
// A, B and C are optional pipeline stages (PIPE_A/B/C = 1 inserts a
// register), so logic depth can be traded for latency at implementation
// time without changing behaviour.
// The single-cycle driver handles WRITE, SELECT and SETPTR (one control
// word each, one per cycle) and SETPARAM (which only loads Op-Params). The
// 2-state driver-select FSM hands ADD, SUB, MULT, CLEAR and TX to the
// multicycle driver and waits for it; the outmux passes the word of the
// driver in charge. `busy` is high from the cycle a multicycle instruction
// sits in the input register until the multicycle driver is done; the
// sender must not issue while it is high.
// Timing: a single-cycle instruction leaves as a control word
// 2 + PIPE_A + PIPE_B + PIPE_C cycles after it enters.
//
// Follows the paper (Fig. 4a): the 30-bit instruction, the decoder,
// Op-Params, the two drivers, the 2-state driver-select FSM, the outmux,
// registered inputs and outputs and the optional stages A, B, C, of which
// the final implementation enables A. Encodings are this design's own.
module tile_controller
  import imagine_pkg::*;
#(
  parameter bit PIPE_A = 1'b1,
  parameter bit PIPE_B = 1'b0,
  parameter bit PIPE_C = 1'b0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               instr_valid,
  input  logic [INSTR_W-1:0] instr,
  output pim_ctrl_t          ctrl_out,
  output logic               busy
);
  typedef struct packed {
    logic   valid;
    instr_t ins;
    logic   multi;
  } dec_t;

  typedef struct packed {
    logic              start;
    instr_t            ins;
    pim_ctrl_t         single;
  } drv_t;

  // ---- input register
  logic   vld_q;
  instr_t ins_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      vld_q <= 1'b0;
      ins_q <= '0;
    end else begin
      vld_q <= instr_valid;
      ins_q <= instr;
    end
  end

  // ---- decoder
  dec_t dec, dec_a;
  always_comb begin
    dec.valid = vld_q;
    dec.ins   = ins_q;
    dec.multi = vld_q && is_multi(ins_q.op);
  end

  // ---- optional stage A
  if (PIPE_A) begin : g_pa
    always_ff @(posedge clk) begin
      if (rst) dec_a <= '0;
      else     dec_a <= dec;
    end
  end else begin : g_na
    assign dec_a = dec;
  end

  // raw instruction bits [25:0] of stage A
  logic [25:0] raw_a;
  assign raw_a = {dec_a.ins.a, dec_a.ins.b, dec_a.ins.fold, dec_a.ins.rsvd};

  // ---- Op-Params
  logic [PREC_W-1:0] prec_n, width_w;
  logic [ADDR_W-1:0] aux;
  always_ff @(posedge clk) begin
    if (rst) begin
      prec_n  <= PREC_W'(8);
      width_w <= PREC_W'(16);
      aux     <= '0;
    end else if (dec_a.valid && dec_a.ins.op == OP_SETPARAM) begin
      {prec_n, width_w, aux} <= raw_a[25:2];
    end
  end

  // ---- single-cycle driver
  drv_t drv, drv_b;
  always_comb begin
    drv.start  = 1'b0;
    drv.ins    = dec_a.ins;
    drv.single = CTRL_IDLE;
    if (dec_a.valid) begin
      unique case (dec_a.ins.op)
        OP_WRITE: begin
          drv.single.op     = ALU_CPY;
          drv.single.we     = 1'b1;
          drv.single.ext    = 1'b1;
          drv.single.addr_a = dec_a.ins.a;
          drv.single.imm    = IMM_W'(raw_a[15:0]);
        end
        OP_SELECT: begin
          drv.single.sel_we = 1'b1;
          drv.single.imm    = IMM_W'(raw_a);
        end
        OP_SETPTR: begin
          drv.single.ptr_we = 1'b1;
          drv.single.addr_a = dec_a.ins.a;
        end
        default: ;
      endcase
    end
  end

  // ---- driver-select FSM (2 states)
  typedef enum logic {DS_SINGLE, DS_MULTI} ds_e;
  ds_e  ds;
  logic m_done, m_active;
  always_ff @(posedge clk) begin
    if (rst) ds <= DS_SINGLE;
    else unique case (ds)
      DS_SINGLE: if (dec_a.multi) ds <= DS_MULTI;
      DS_MULTI:  if (m_done)      ds <= DS_SINGLE;
      default:   ds <= DS_SINGLE;
    endcase
  end
  logic start_d;
  assign start_d = dec_a.multi && (ds == DS_SINGLE);

  // ---- optional stage B
  drv_t drv_s;
  always_comb begin
    drv_s       = drv;
    drv_s.start = start_d;
  end
  if (PIPE_B) begin : g_pb
    always_ff @(posedge clk) begin
      if (rst) drv_b <= '{ins: '0, single: CTRL_IDLE, default: 1'b0};
      else     drv_b <= drv_s;
    end
  end else begin : g_nb
    assign drv_b = drv_s;
  end

  // ---- multicycle driver
  pim_ctrl_t m_ctrl;
  ctrl_multi_driver u_multi (
    .clk, .rst,
    .start   (drv_b.start),
    .instr   (drv_b.ins),
    .prec_n, .width_w, .aux,
    .ctrl    (m_ctrl),
    .active  (m_active),
    .done    (m_done)
  );

  // ---- optional stage C
  pim_ctrl_t m_ctrl_c, s_ctrl_c;
  logic      m_act_c;
  if (PIPE_C) begin : g_pc
    always_ff @(posedge clk) begin
      if (rst) begin
        m_ctrl_c <= CTRL_IDLE;
        s_ctrl_c <= CTRL_IDLE;
        m_act_c  <= 1'b0;
      end else begin
        m_ctrl_c <= m_ctrl;
        s_ctrl_c <= drv_b.single;
        m_act_c  <= m_active;
      end
    end
  end else begin : g_nc
    assign m_ctrl_c = m_ctrl;
    assign s_ctrl_c = drv_b.single;
    assign m_act_c  = m_active;
  end

  // ---- outmux and output register
  always_ff @(posedge clk) begin
    if (rst)          ctrl_out <= CTRL_IDLE;
    else if (m_act_c) ctrl_out <= m_ctrl_c;
    else              ctrl_out <= s_ctrl_c;
  end

  assign busy = (vld_q && is_multi(ins_q.op)) || dec_a.multi || ds == DS_MULTI;

  // A single-cycle word must never collide with a running multicycle one.
  a_no_overlap: assert property (@(posedge clk) disable iff (rst)
                                 !(m_act_c && s_ctrl_c != CTRL_IDLE));
endmodule
