// imagine_tb_pkg: instruction encoders shared by the IMAGine testbenches.
//
// Each function returns one 30-bit instruction in the layout of
// imagine_pkg: opcode in [29:26], fields below it.
package imagine_tb_pkg;
  import imagine_pkg::*;

  function automatic logic [29:0] i_write(input int addr, input logic [15:0] data);
    return {OP_WRITE, 10'(addr), data};
  endfunction
  function automatic logic [29:0] i_select(input logic [12:0] mask, input logic [12:0] value);
    return {OP_SELECT, mask, value};
  endfunction
  function automatic logic [29:0] i_setptr(input int addr);
    return {OP_SETPTR, 10'(addr), 16'd0};
  endfunction
  function automatic logic [29:0] i_txadd(input int a, input int hop);
    return {OP_TXADD, 10'(a), 8'(hop), 8'd0};
  endfunction
  function automatic logic [29:0] i_setparam(input int n, input int w, input int aux);
    return {OP_SETPARAM, 7'(n), 7'(w), 10'(aux), 2'd0};
  endfunction
  function automatic logic [29:0] i_add(input int a, input int b, input int fold);
    return {OP_ADD, 10'(a), 10'(b), 3'(fold), 3'd0};
  endfunction
  function automatic logic [29:0] i_sub(input int a, input int b);
    return {OP_SUB, 10'(a), 10'(b), 3'd0, 3'd0};
  endfunction
  function automatic logic [29:0] i_mult(input int p, input int x);
    return {OP_MULT, 10'(p), 10'(x), 6'd0};
  endfunction
  function automatic logic [29:0] i_tx(input int src, input int hop);
    return {OP_TX, 10'(src), 8'(hop), 8'd0};
  endfunction
  function automatic logic [29:0] i_clear(input int a);
    return {OP_CLEAR, 10'(a), 16'd0};
  endfunction
endpackage
