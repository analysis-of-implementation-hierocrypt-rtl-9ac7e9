// cam_sbox: one Camellia 8x8 substitution box, s1, s2, s3 or s4 (parameter WHICH).
//
// The four boxes share the s1 table of cam_pkg: s2(x) = s1(x) <<< 1,
// s3(x) = s1(x) >>> 1 and s4(x) = s1(x <<< 1). The box is a purely combinational
// 256 x 8 ROM; in the FLEX 10KE implementation each such box occupies one 2048-bit
// embedded array block, which is why one clock cycle of the datapath holds at most
// three rounds (24 boxes). Interface: din (8 bits) in, dout (8 bits) out, no clock.
// The box names and their placement come from the F-function drawing; the table
// itself is the one of the Camellia specification, which the drawing only names.
module cam_sbox
  import cam_pkg::*;
#(
  parameter int unsigned WHICH = 1  // 1..4: s1, s2, s3 or s4
) (
  input  logic [7:0] din,
  output logic [7:0] dout
);

  logic [7:0] idx;
  logic [7:0] raw;

  always_comb begin
    idx = (WHICH == 4) ? rol8(din, 1) : din;
    raw = SBOX1[idx];
    unique case (WHICH)
      2:       dout = rol8(raw, 1);
      3:       dout = rol8(raw, 7);
      default: dout = raw;
    endcase
  end

endmodule
