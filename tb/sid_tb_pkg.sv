// sid_tb_pkg: helpers shared by the SID testbenches: a fixed-point reference
// multiply, conversions between real numbers and Q16.16, and an assembler for
// the 128-bit macro-instruction.
package sid_tb_pkg;
  import sid_pkg::*;

  function automatic logic [31:0] fxmul(input logic [31:0] a, input logic [31:0] b);
    longint pr;
    pr = longint'($signed(a)) * longint'($signed(b));
    return pr[47:16];
  endfunction

  function automatic logic [31:0] r2fx(input real r);
    return 32'($rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic real fx2r(input logic [31:0] v);
    return real'($signed(v)) / 65536.0;
  endfunction

  function automatic logic [127:0] mk_inst(input mode_e m, input int len, input int wid,
                                           input int ax, input int ay, input int az);
    inst_t i;
    i.mode   = 4'(m);
    i.length = 14'(len);
    i.width  = 14'(wid);
    i.addr_x = 32'(ax);
    i.addr_y = 32'(ay);
    i.addr_z = 32'(az);
    return 128'(i);
  endfunction

  function automatic real sigm(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real tanh_r(input real x);
    return (1.0 - $exp(-2.0 * x)) / (1.0 + $exp(-2.0 * x));
  endfunction
endpackage
