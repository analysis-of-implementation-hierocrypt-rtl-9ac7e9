// hc3_pkg: types and GF(2^8) arithmetic shared by the Hierocrypt-3 modules.
//
// The field is GF(2^8) with the primitive polynomial x^8 + x^6 + x^5 + x + 1
// (0x163). gf_mul_const multiplies by a constant with shift-and-add; with a
// constant operand it reduces to fixed XOR equations per output bit, e.g. for C4h
//   OUT7 = IN7^IN2^IN1^IN0   OUT6 = IN6^IN1^IN0   OUT5 = IN5^IN2^IN1
//   OUT4 = IN7^IN4^IN2       OUT3 = IN6^IN3^IN1   OUT2 = IN5^IN2^IN0
//   OUT1 = IN4^IN1           OUT0 = IN3^IN2^IN1
// Byte order: byte x1 of a 128-bit block is bits 127:120, x16 is bits 7:0; a
// 256-bit round key is K1(128) || K2(128).
package hc3_pkg;

  typedef logic [127:0] block_t;
  typedef logic [255:0] rkey_t;

  localparam logic [8:0] HC3_POLY = 9'h163;

  function automatic logic [7:0] gf_mul_const(input logic [7:0] x, input logic [7:0] c);
    logic [7:0] acc, a;
    acc = '0;
    a   = x;
    for (int i = 0; i < 8; i++) begin
      if (c[i]) acc = acc ^ a;
      a = a[7] ? ((a << 1) ^ HC3_POLY[7:0]) : (a << 1);
    end
    return acc;
  endfunction

endpackage
